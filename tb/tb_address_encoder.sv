// tb_address_encoder: feeds random sparse spike words, collects the indices pushed to the FIFO
// and checks they are exactly the set bits in ascending order, with one index per cycle (a word
// with k spikes takes k cycles, an empty word one), including back-pressure from a full FIFO.
module tb_address_encoder;
  import genesis_pkg::*;
  logic clk = 0, rst_n = 1, in_valid = 0, in_ready, fifo_full = 0, out_push, busy;
  logic [15:0] in_word = 0;
  logic [11:0] in_widx = 0;
  logic [IDXW-1:0] out_idx;
  int checks = 0, failures = 0, cyc = 0;
  int expq [$];
  int t0, nbits, nstall;

  address_encoder #(.WORD(16)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_word, .in_widx, .fifo_full,
                                    .out_push, .out_idx, .busy);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset is applied
  always @(posedge clk) begin
    cyc++;
    if (rst_n) fifo_full <= ($urandom_range(0, 9) == 0) && nstall > 0;
    if (rst_n && out_push) begin
      int e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL unexpected index %0d", out_idx); end
      else begin
        e = expq.pop_front();
        if (int'(out_idx) != e) begin failures++; $display("FAIL index %0d exp %0d", out_idx, e); end
      end
    end
  end

  initial begin
    nstall = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // timing: no back-pressure, a word with k spikes keeps the encoder busy k cycles
    for (int n = 0; n < 200; n++) begin
      logic [15:0] wd;
      wd = 16'($urandom_range(0, 65535)) & 16'($urandom_range(0, 65535)) & 16'($urandom_range(0, 65535));
      nbits = $countones(wd);
      for (int b = 0; b < 16; b++) if (wd[b]) expq.push_back(n * 16 + b);
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_word = wd; in_widx = 12'(n);
      @(negedge clk); in_valid = 0; t0 = cyc;
      while (busy) @(negedge clk);
      checks++;
      if (cyc - t0 != nbits) begin failures++; $display("FAIL word %0d took %0d cycles for %0d spikes", n, cyc - t0, nbits); end
    end
    // back-pressure
    nstall = 1;
    for (int n = 200; n < 400; n++) begin
      logic [15:0] wd;
      wd = 16'($urandom_range(0, 65535));
      for (int b = 0; b < 16; b++) if (wd[b]) expq.push_back(n * 16 + b);
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_word = wd; in_widx = 12'(n);
      @(negedge clk); in_valid = 0;
    end
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d indices missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin wait (cyc == 100000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
