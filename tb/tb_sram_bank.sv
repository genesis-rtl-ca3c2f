// tb_sram_bank: writes random words to random addresses of a full-size bank, reads them back
// with the one-cycle read latency, and checks read-during-write returns the old word.
module tb_sram_bank;
  import genesis_pkg::*;
  logic clk = 0, re = 0, we = 0;
  logic [LAW-1:0] raddr = 0, waddr = 0;
  logic [31:0] rdata, wdata = 0;
  int checks = 0, failures = 0, cyc = 0;
  int unsigned model [int];

  sram_bank #(.DEPTH(BANK_DEPTH), .AW(LAW)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = 1; waddr = LAW'($urandom_range(0, BANK_DEPTH - 1)); wdata = $urandom;
      model[int'(waddr)] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (model[a]) begin
      @(negedge clk); re = 1; raddr = LAW'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL addr %0d got %h exp %h", a, rdata, model[a]); end
    end
    // read and write of the same address in one cycle: old data returned, new data stored
    @(negedge clk); re = 1; raddr = 14'd100; we = 1; waddr = 14'd100; wdata = 32'hcafe_f00d;
    @(negedge clk); re = 0; we = 0;
    checks++;
    if (model.exists(100) && rdata != model[100]) begin failures++; $display("FAIL read-during-write"); end
    @(negedge clk); re = 1; raddr = 14'd100; @(negedge clk); re = 0;
    checks++;
    if (rdata != 32'hcafe_f00d) begin failures++; $display("FAIL write not stored"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin wait (cyc == 100000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
