// tb_lif_unit: checks the neuron unit's forward step (eq. 1, 2, threshold and reset, trace) and
// backward step (eq. 3 and the boxcar Theta) on random operands against reference arithmetic,
// and that a constant input current makes the neuron fire periodically.
module tb_lif_unit;
  import genesis_pkg::*;
  import tb_ref_pkg::*;
  cfg_t cfg;
  logic bwd;
  logic signed [15:0] acc_in;
  logic [31:0] vi_in, tu_in, vi_out, tu_out;
  logic spike;
  int checks = 0, failures = 0;

  lif_unit dut (.cfg, .bwd, .acc_in, .vi_in, .tu_in, .vi_out, .tu_out, .spike);

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  int v, i, a, u, t, vn, in_, un;
  bit sp;
  int nspk;
  initial begin
    cfg = '0;
    for (int n = 0; n < 3000; n++) begin
      cfg.a_sh = 4'($urandom_range(0, 4)); cfg.b_sh = 4'($urandom_range(1, 5));
      cfg.c_sh = 4'($urandom_range(0, 4)); cfg.u_sh = 4'($urandom_range(0, 4));
      cfg.v_th = 16'($urandom_range(64, 1024)); cfg.v_rest = 16'($urandom_range(0, 64));
      cfg.r_gain = 16'($urandom_range(0, 512)); cfg.i_min = -16'sd300; cfg.i_max = 16'sd300;
      cfg.tr_sh = 4'($urandom_range(1, 4)); cfg.tr_inc = 8'($urandom_range(1, 40));
      v = $urandom_range(0, 2047) - 1024; i = $urandom_range(0, 2047) - 1024;
      a = $urandom_range(0, 4095) - 2048; u = $urandom_range(0, 4095) - 2048;
      t = $urandom_range(0, 255);
      vi_in = {16'(v), 16'(i)}; tu_in = {8'h80, 8'(t), 16'(u)}; acc_in = 16'(a);
      bwd = 0; #1;
      ref_lif(v, i, a, cfg.a_sh, cfg.b_sh, cfg.c_sh, int'(cfg.v_th), int'(cfg.v_rest), vn, in_, sp);
      expect_eq("I'", int'($signed(vi_out[15:0])), in_);
      expect_eq("V'", int'($signed(vi_out[31:16])), vn);
      expect_eq("spike", int'(spike), int'(sp));
      expect_eq("T'", int'(tu_out[23:16]), ref_trace(t, sp, cfg.tr_sh, cfg.tr_inc));
      expect_eq("U kept", int'($signed(tu_out[15:0])), u);
      bwd = 1; #1;
      un = ref_dend(u, a, int'(cfg.r_gain), cfg.u_sh);
      expect_eq("U'", int'($signed(tu_out[15:0])), un);
      expect_eq("Theta", int'(tu_out[31]), int'(i > -300 && i < 300));
      expect_eq("T kept", int'(tu_out[23:16]), t);
      expect_eq("VI kept", int'(vi_out == vi_in), 1);
      expect_eq("no spike bwd", int'(spike), 0);
    end
    // constant drive: neuron fires regularly
    cfg.a_sh = 1; cfg.b_sh = 3; cfg.c_sh = 1; cfg.v_th = 256; cfg.v_rest = 0;
    vi_in = 0; tu_in = 0; acc_in = 16'sd200; bwd = 0; nspk = 0;
    for (int n = 0; n < 100; n++) begin
      #1; nspk += spike; vi_in = vi_out; tu_in = tu_out;
    end
    checks++;
    if (nspk < 10 || nspk > 60) begin failures++; $display("FAIL spike count %0d", nspk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
