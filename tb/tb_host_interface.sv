// tb_host_interface: sends every host command over the 16-bit bus and checks what reaches the
// accelerator side (configuration, SRAM writes with auto-increment, spike words, label, run
// flags), the data returned for SRAM reads and CMD_OUT, and that ready drops while busy.
module tb_host_interface;
  import genesis_pkg::*;
  logic clk = 0, rst_n = 1, start = 0, ready, dout_valid;
  logic [15:0] data_in = 0, data_out;
  logic cfg_we, mem_we, mem_re, spk_we, lbl_we, run;
  logic [3:0] cfg_addr, spk_widx, run_flags;
  logic [15:0] cfg_data, spk_data, lbl_data;
  logic [GAW-1:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  logic mem_rvalid;
  logic busy = 0;
  logic [15:0] out_spikes = 16'h00a5;
  int checks = 0, failures = 0, cyc = 0;
  int unsigned wr_log [$];
  int unsigned rd_words [$];
  int spk_log [$];
  int cfg_hits = 0, lbl_hits = 0, run_hits = 0;

  host_interface dut (.clk, .rst_n, .start, .ready, .data_in, .data_out, .dout_valid,
    .cfg_we, .cfg_addr, .cfg_data, .mem_we, .mem_re, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata,
    .spk_we, .spk_widx, .spk_data, .lbl_we, .lbl_data, .run, .run_flags, .busy, .out_spikes);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset is applied
  always @(posedge clk) cyc++;

  task automatic send(input logic [15:0] wd);
    @(negedge clk);
    while (!ready) @(negedge clk);
    start = 1; data_in = wd;
    @(negedge clk); start = 0;
  endtask
  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask

  // accelerator-side model: memory returns addr*3+1, one cycle after mem_re; a run keeps busy 20 cycles
  int busy_cnt = 0;
  always @(posedge clk) begin
    mem_rvalid <= mem_re;
    mem_rdata  <= 32'(mem_addr) * 3 + 1;
    if (mem_we) wr_log.push_back(mem_addr);
    if (mem_we) wr_log.push_back(mem_wdata);
    if (spk_we) spk_log.push_back({spk_widx, spk_data});
    if (cfg_we && cfg_addr == 4'd9 && cfg_data == 16'h1234) cfg_hits++;
    if (lbl_we && lbl_data == 16'h0002) lbl_hits++;
    if (run) begin run_hits++; busy_cnt <= 20; end
    if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
    busy <= run || busy_cnt > 1;
    if (dout_valid) rd_words.push_back(data_out);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    send({CMD_CFG, 12'd9}); send(16'h1234);
    send({CMD_MWR, 12'd3}); send(16'h0001); send(16'h0010);   // address 0x10010
    for (int n = 0; n < 3; n++) begin send(16'(n + 16'hA000)); send(16'(n + 16'h0B00)); end
    send({CMD_SPK, 12'd3}); send(16'h8001); send(16'h0000); send(16'hFFFF);
    send({CMD_LBL, 12'd0}); send(16'h0002);
    send({CMD_RUN, 12'd5});
    // ready must drop while the accelerator is busy
    @(negedge clk); @(negedge clk);
    expect_eq("ready low while busy", ready, 0);
    send({CMD_MRD, 12'd2}); send(16'h0000); send(16'h0100);
    send({CMD_OUT, 12'd0});
    repeat (10) @(negedge clk);
    expect_eq("cfg write", cfg_hits, 1);
    expect_eq("label", lbl_hits, 1);
    expect_eq("run", run_hits, 1);
    expect_eq("run flags", run_flags, 5);
    expect_eq("mem writes", wr_log.size(), 6);
    for (int n = 0; n < 3; n++) begin
      expect_eq("waddr", wr_log[2*n], 32'h10010 + n);
      expect_eq("wdata", wr_log[2*n+1], {16'(n + 16'hA000), 16'(n + 16'h0B00)});
    end
    expect_eq("spike words", spk_log.size(), 3);
    expect_eq("spike 0", spk_log[0], {4'd0, 16'h8001});
    expect_eq("spike 2", spk_log[2], {4'd2, 16'hFFFF});
    expect_eq("read words", rd_words.size(), 5);
    expect_eq("read 0 hi", rd_words[0], 16'((32'h100 * 3 + 1) >> 16));
    expect_eq("read 0 lo", rd_words[1], 16'(32'h100 * 3 + 1));
    expect_eq("read 1 lo", rd_words[3], 16'(32'h101 * 3 + 1));
    expect_eq("out spikes", rd_words[4], 16'h00a5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin wait (cyc == 10000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
