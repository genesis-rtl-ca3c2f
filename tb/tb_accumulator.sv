// tb_accumulator: random enable/reset/load sequence against a saturating integer model.
module tb_accumulator;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 1, acc_en = 0, acc_rst = 0, load = 0;
  logic signed [15:0] din = 0, acc;
  int checks = 0, failures = 0, model = 0, cyc = 0;

  accumulator #(.W(16)) dut (.clk, .rst_n, .acc_en, .acc_rst, .load, .din, .acc);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset is applied
  always @(posedge clk) cyc++;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      acc_en = ($urandom_range(0, 3) != 0); acc_rst = ($urandom_range(0, 40) == 0);
      load = ($urandom_range(0, 30) == 0);
      din = 16'($urandom_range(0, 65535));
      if (n > 2000) din = 16'sd30000;   // drive into saturation
      @(posedge clk); #1;
      if (acc_rst)     model = 0;
      else if (load)   model = int'(din);
      else if (acc_en) model = sat(longint'(model) + int'(din));
      checks++;
      if (int'(acc) != model) begin failures++; $display("FAIL n=%0d got %0d exp %0d", n, acc, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin wait (cyc == 100000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
