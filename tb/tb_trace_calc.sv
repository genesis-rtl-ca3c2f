// tb_trace_calc: checks the 8-bit trace step X' = X - X/2^tau + inc*S (saturating) exhaustively
// over X and S for several tau/inc, and that a constant spike train settles below 255.
module tb_trace_calc;
  import tb_ref_pkg::*;
  logic [7:0] tin, tout, inc;
  logic spike;
  logic [3:0] tau;
  int checks = 0, failures = 0;

  trace_calc #(.TW(8)) dut (.trace_in(tin), .spike, .cfg_tau(tau), .cfg_inc(inc), .trace_out(tout));

  initial begin
    for (int tt = 1; tt <= 4; tt++)
      for (int ii = 0; ii < 3; ii++)
        for (int x = 0; x < 256; x++)
          for (int s = 0; s < 2; s++) begin
            tin = 8'(x); spike = s[0]; tau = 4'(tt); inc = 8'(ii * 60 + 5);
            #1;
            checks++;
            if (int'(tout) != ref_trace(x, s[0], tt, ii * 60 + 5)) begin
              failures++; $display("FAIL x=%0d s=%0d tau=%0d got %0d", x, s, tt, tout);
            end
          end
    // activity: a neuron spiking every step reaches a steady state near inc*2^tau
    tin = 0; tau = 3; inc = 10; spike = 1;
    for (int n = 0; n < 60; n++) begin #1; tin = tout; end
    checks++;
    if (!(tin >= 70 && tin <= 80)) begin failures++; $display("FAIL steady trace %0d", tin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
