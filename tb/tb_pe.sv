// tb_pe: exercises all eight PE instructions on one processing element and checks its outputs,
// its accumulator and the one-cycle forwarding of the instruction, with reference arithmetic.
module tb_pe;
  import genesis_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 1;
  cfg_t cfg;
  pe_instr_t in_op, out_op;
  logic signed [15:0] in_a, in_b, out_a, out_b, acc_o;
  int checks = 0, failures = 0, cyc = 0;

  pe #(.ROW(0)) dut (.clk, .rst_n, .cfg, .in_op, .in_a, .in_b, .out_op, .out_a, .out_b, .acc_o);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset is applied
  always @(posedge clk) cyc++;

  task automatic issue(input pe_op_e op, input int a, input int b, input bit msel = 0,
                       input bit pre = 0, input bit v = 1);
    @(negedge clk);
    in_op = '{valid: v, op: op, msel: msel, pre_over: pre};
    in_a = 16'(a); in_b = 16'(b);
    @(posedge clk); #1;
    in_op = '0;
  endtask

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  int w1, m1, w2, m2, u, tr, wn, mn;
  initial begin
    cfg = '0; cfg.d_sh = 2; cfg.eta_sh = 1; cfg.post_thr = 50; cfg.m_step = 16;
    in_op = '0; in_a = 0; in_b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 50; rep++) begin
      w1 = $urandom_range(0, 2047) - 1024; m1 = $urandom_range(0, 300);
      w2 = $urandom_range(0, 2047) - 1024; m2 = $urandom_range(0, 300);
      u  = $urandom_range(0, 1023) - 512;  tr = $urandom_range(0, 100);
      issue(OP_RST_ACC, 0, 0);
      expect_eq("acc after reset", acc_o, 0);
      issue(OP_MV_W, w1, m1);
      issue(OP_MV_W, w2, m2);
      expect_eq("shift out W", out_a, w1);
      expect_eq("shift out M", out_b, m1);
      expect_eq("op forwarded", int'(out_op.op), int'(OP_MV_W));
      issue(OP_ACC, 0, 0); issue(OP_ACC, 0, 0); issue(OP_ACC, 0, 0);
      expect_eq("accumulate", acc_o, sat(3 * w2));
      issue(OP_ACC, 0, 0, 0, 0, 0);      // invalid: no effect
      expect_eq("invalid slot", acc_o, sat(3 * w2));
      issue(OP_LD_TEMP, u, tr);
      issue(OP_LD_TEMP, 7, 9);            // shifts the previous {U, trace} out
      expect_eq("temp shift", out_a, u);
      expect_eq("trace shift", out_b, tr);
      issue(OP_LD_TEMP, u, tr);
      issue(OP_META, 0, 0, 0);            // weight update
      wn = ref_meta(w2, m2, u, 2, 1);
      issue(OP_META, 0, 0, 1, rep[0]);    // metaplasticity update
      mn = m2 + (tr >= 50 ? 16 : 0) - (rep[0] ? 16 : 0);
      if (mn < 0) mn = 0;
      issue(OP_MV_W, 0, 0);
      expect_eq("updated W", out_a, wn);
      expect_eq("updated M", out_b, mn);
      issue(OP_MV_ACC, 1234, 0);
      expect_eq("move acc out", out_a, sat(3 * w2));
      expect_eq("move acc in", acc_o, 1234);
      issue(OP_LD_ACC, -77, 0);
      expect_eq("load acc", acc_o, -77);
      issue(OP_MV_IN, 555, -666);
      expect_eq("move input a", out_a, 555);
      expect_eq("move input b", out_b, -666);
      expect_eq("op forwarded 2", int'(out_op.op), int'(OP_MV_IN));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin wait (cyc == 100000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
