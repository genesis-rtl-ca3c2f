// tb_meta_update: checks the metaplasticity weight-update unit against the reference equations
// f(w,m) = 1 - |m*w|/2^d (clamped at 0) and w' = w - 2^-eta f U, on corner and random operands.
module tb_meta_update;
  import tb_ref_pkg::*;
  logic signed [15:0] w, m, u, w_new, f_out;
  logic [3:0] d, eta;
  int checks = 0, failures = 0;

  meta_update #(.W(16)) dut (.w, .m, .u, .cfg_d(d), .cfg_eta(eta), .w_new, .f_out);

  task automatic check(input int ww, input int mm, input int uu, input int dd, input int ee);
    int ef, ew;
    w = 16'(ww); m = 16'(mm); u = 16'(uu); d = 4'(dd); eta = 4'(ee);
    #1;
    ef = ref_f(ww, mm, dd);
    ew = ref_meta(ww, mm, uu, dd, ee);
    checks += 2;
    if (int'(f_out) != ef) begin
      failures++; $display("FAIL f w=%0d m=%0d d=%0d got %0d exp %0d", ww, mm, dd, f_out, ef);
    end
    if (int'(w_new) != ew) begin
      failures++; $display("FAIL w' w=%0d m=%0d u=%0d got %0d exp %0d", ww, mm, uu, w_new, ew);
    end
  endtask

  initial begin
    // m = 0: full plasticity, w' = w - U/2^eta
    check(100, 0, 256, 2, 0);
    check(-100, 0, -512, 2, 1);
    // consolidated synapse: |m*w| >= 2^d, no change
    check(512, 512, 256, 2, 0);
    // half plasticity: |m*w| / 2^d = 0.5
    check(256, 512, 256, 2, 0);
    check(-256, 512, 256, 2, 0);
    // saturation
    check(-32768, 0, 32767, 0, 0);
    check(32767, 0, -32768, 0, 0);
    for (int n = 0; n < 2000; n++)
      check($urandom_range(0, 65535) - 32768, $urandom_range(0, 1023), $urandom_range(0, 4095) - 2048,
            $urandom_range(0, 8), $urandom_range(0, 6));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
