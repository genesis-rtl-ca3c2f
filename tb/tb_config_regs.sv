// tb_config_regs: checks reset values and that each register write lands in the right fields of
// the configuration seen by the rest of the chip.
module tb_config_regs;
  import genesis_pkg::*;
  logic clk = 0, rst_n = 1, we = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [15:0] wdata = 0, rdata;
  cfg_t cfg;
  int checks = 0, failures = 0, cyc = 0;

  config_regs dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr, .rdata, .cfg);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset is applied
  always @(posedge clk) cyc++;

  task automatic wr(input int a, input int d);
    @(negedge clk); we = 1; waddr = 4'(a); wdata = 16'(d); @(negedge clk); we = 0;
  endtask
  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    expect_eq("reset n_in", cfg.n_in, 256);
    expect_eq("reset n_hid", cfg.n_hid, 200);
    expect_eq("reset n_out", cfg.n_out, 2);
    wr(0, 100); wr(1, 48); wr(2, 3);
    wr(3, 16'h4321); wr(4, 300); wr(5, -20); wr(6, 128); wr(7, -100); wr(8, 900);
    wr(9, 16'h0357); wr(10, 33); wr(11, 16'h1122); wr(12, 9); wr(13, 77);
    expect_eq("n_in", cfg.n_in, 100);   expect_eq("n_hid", cfg.n_hid, 48);
    expect_eq("n_out", cfg.n_out, 3);
    expect_eq("a", cfg.a_sh, 1); expect_eq("b", cfg.b_sh, 2); expect_eq("c", cfg.c_sh, 3); expect_eq("u", cfg.u_sh, 4);
    expect_eq("v_th", cfg.v_th, 300); expect_eq("v_rest", cfg.v_rest, -20);
    expect_eq("R", cfg.r_gain, 128); expect_eq("imin", cfg.i_min, -100); expect_eq("imax", cfg.i_max, 900);
    expect_eq("eta", cfg.eta_sh, 7); expect_eq("d", cfg.d_sh, 5); expect_eq("tau", cfg.tr_sh, 3);
    expect_eq("inc", cfg.tr_inc, 33); expect_eq("post", cfg.post_thr, 8'h22); expect_eq("pre", cfg.pre_thr, 8'h11);
    expect_eq("m_step", cfg.m_step, 9); expect_eq("err_th", cfg.err_th, 77);
    raddr = 4; #1; expect_eq("readback", rdata, 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin wait (cyc == 10000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
