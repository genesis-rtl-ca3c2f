// tb_spike_fifo: random push/pop traffic against a queue model, full/empty flags, and replay of
// the whole list after rewind and emptying after clr.
module tb_spike_fifo;
  logic clk = 0, rst_n = 1, clr = 0, rewind = 0, push = 0, pop = 0, empty, full;
  logic [15:0] din = 0, dout;
  logic [4:0] count;
  int checks = 0, failures = 0, cyc = 0;
  int model [$];
  int all [$];
  int rd;

  spike_fifo #(.DEPTH(16), .W(16)) dut (.clk, .rst_n, .clr, .rewind, .push, .din, .pop, .dout, .empty, .full, .count);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset is applied
  always @(posedge clk) cyc++;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 30; round++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      all.delete(); rd = 0;
      checks++; if (!empty) begin failures++; $display("FAIL not empty after clr"); end
      // push up to 16, with pops interleaved
      for (int n = 0; n < 40; n++) begin
        @(negedge clk);
        push = ($urandom_range(0, 2) != 0) && all.size() < 16;
        pop  = ($urandom_range(0, 3) == 0) && rd < all.size();
        din  = 16'($urandom_range(0, 65535));
        if (pop) begin
          checks++;
          if (int'(dout) != all[rd]) begin failures++; $display("FAIL pop got %0d exp %0d", dout, all[rd]); end
          rd++;
        end
        if (push) all.push_back(int'(din));
        @(posedge clk); #1; push = 0; pop = 0;
        checks++;
        if (int'(count) != all.size() - rd) begin failures++; $display("FAIL count %0d exp %0d", count, all.size() - rd); end
        checks++;
        if (full != (all.size() - rd == 16)) begin failures++; $display("FAIL full flag"); end
      end
      // rewind and replay everything
      @(negedge clk); rewind = 1; @(negedge clk); rewind = 0;
      for (int n = 0; n < all.size(); n++) begin
        checks++;
        if (empty || int'(dout) != all[n]) begin failures++; $display("FAIL replay %0d got %0d exp %0d", n, dout, all[n]); end
        pop = 1; @(negedge clk); pop = 0;
      end
      checks++; if (!empty) begin failures++; $display("FAIL not empty after replay"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin wait (cyc == 100000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
