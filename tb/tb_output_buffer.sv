// tb_output_buffer: presents bottom-row "move accumulator" outputs (bottom row first) with
// idle cycles between them, checks they are stored by row, that other instructions are ignored,
// that full rises after ROWS captures, and that the phase multiplexer selects {M,W} from the
// array in update phases and the neuron unit's word otherwise.
module tb_output_buffer;
  import genesis_pkg::*;
  localparam int NR = 8, NC = 8;
  logic clk = 0, rst_n = 1, clr = 0, full, phase = 0;
  pe_instr_t bot_op = '0;
  logic signed [15:0] bot_a [NC], bot_b [NC], rd_data [NC];
  logic [2:0] rd_row = 0;
  logic [31:0] lif_word [NC], wb_word [NC];
  int checks = 0, failures = 0, cyc = 0;
  int exp_v [NR][NC];

  output_buffer #(.NR(NR), .NC(NC)) dut (.clk, .rst_n, .clr, .bot_op, .bot_a, .bot_b, .rd_row, .rd_data,
                                         .full, .phase, .lif_word, .wb_word);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset is applied
  always @(posedge clk) cyc++;

  initial begin
    for (int c = 0; c < NC; c++) begin bot_a[c] = 0; bot_b[c] = 0; lif_word[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      checks++; if (full) begin failures++; $display("FAIL full after clr"); end
      for (int i = 0; i < NR; i++) begin
        // an ignored instruction
        @(negedge clk);
        bot_op = '{valid: 1'b1, op: OP_MV_W, msel: 1'b0, pre_over: 1'b0};
        for (int c = 0; c < NC; c++) bot_a[c] = 16'($urandom);
        if ($urandom_range(0, 1)) begin @(negedge clk); bot_op = '0; end
        @(negedge clk);
        bot_op = '{valid: 1'b1, op: OP_MV_ACC, msel: 1'b0, pre_over: 1'b0};
        for (int c = 0; c < NC; c++) begin
          bot_a[c] = 16'($urandom); exp_v[NR-1-i][c] = int'(bot_a[c]);
        end
      end
      @(negedge clk); bot_op = '0;
      checks++; if (!full) begin failures++; $display("FAIL not full"); end
      for (int r = 0; r < NR; r++) begin
        rd_row = 3'(r); #1;
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (int'(rd_data[c]) != exp_v[r][c]) begin failures++; $display("FAIL row %0d col %0d", r, c); end
        end
      end
      // phase multiplexer
      for (int c = 0; c < NC; c++) begin
        bot_a[c] = 16'($urandom); bot_b[c] = 16'($urandom); lif_word[c] = $urandom;
      end
      phase = 1; #1;
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (wb_word[c] != {bot_b[c], bot_a[c]}) begin failures++; $display("FAIL mux phase 1"); end
      end
      phase = 0; #1;
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (wb_word[c] != lif_word[c]) begin failures++; $display("FAIL mux phase 0"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin wait (cyc == 100000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
