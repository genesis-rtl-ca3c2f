// tb_error_neuron: drives output/label spike patterns into the error neurons and checks, against
// a reference model of the error current and the two LIF error neurons, when false-positive and
// false-negative spikes appear; also checks that matching spikes produce no error.
module tb_error_neuron;
  import genesis_pkg::*;
  import tb_ref_pkg::*;
  localparam int NOUT = 8;
  logic clk = 0, rst_n = 1, clr = 0, step = 0, s_out = 0, s_label = 0, fp, fn, done;
  logic [2:0] idx = 0;
  cfg_t cfg;
  int checks = 0, failures = 0, cyc = 0, nfp = 0, nfn = 0;
  int e [NOUT], vp [NOUT], vn [NOUT];

  error_neuron #(.NOUT(NOUT)) dut (.clk, .rst_n, .cfg, .clr, .step, .idx, .s_out, .s_label, .fp, .fn, .done);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset is applied
  always @(posedge clk) cyc++;

  initial begin
    cfg = '0; cfg.a_sh = 1; cfg.b_sh = 2; cfg.c_sh = 1; cfg.v_rest = 0; cfg.err_th = 16'sd100;
    for (int o = 0; o < NOUT; o++) begin e[o] = 0; vp[o] = 0; vn[o] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int n = 0; n < 2000; n++) begin
      int o, d, ep, fpe, fne, vpn, vnn;
      o = $urandom_range(0, NOUT - 1);
      @(negedge clk);
      idx = 3'(o);
      case (o % 4)
        0: begin s_out = 1; s_label = 0; end                  // always false positive
        1: begin s_out = 0; s_label = 1; end                  // always false negative
        2: begin s_out = n[0]; s_label = n[0]; end            // always correct
        default: begin s_out = 1'($urandom_range(0, 1)); s_label = 1'($urandom_range(0, 1)); end
      endcase
      step = 1;
      d  = (s_out == s_label) ? 0 : (s_out ? 256 : -256);
      ep = sat(longint'(e[o]) + fdiv(longint'(d) - e[o], 1));
      vpn = sat(longint'(vp[o]) + fdiv(-longint'(vp[o]), 2) + fdiv(ep, 1));
      vnn = sat(longint'(vn[o]) + fdiv(-longint'(vn[o]), 2) - fdiv(ep, 1));
      fpe = vpn >= 100; fne = vnn >= 100;
      e[o] = ep; vp[o] = fpe ? 0 : vpn; vn[o] = fne ? 0 : vnn;
      @(posedge clk); #1; step = 0;
      checks += 3;
      if (fp != fpe[0] || fn != fne[0] || !done) begin
        failures++; $display("FAIL n=%0d o=%0d fp=%0d/%0d fn=%0d/%0d", n, o, fp, fpe, fn, fne);
      end
      if ((o % 4) == 2 && (fp || fn)) begin failures++; $display("FAIL error on a correct output"); end
      if ((o % 4) == 0 && fn) begin failures++; $display("FAIL fn on false positive"); end
      nfp += fp; nfn += fn;
    end
    checks++;
    if (nfp == 0 || nfn == 0) begin failures++; $display("FAIL no error spikes %0d %0d", nfp, nfn); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin wait (cyc == 100000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
