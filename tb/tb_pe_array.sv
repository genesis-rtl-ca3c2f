// tb_pe_array: streams random weights into the 8x8 array the way the proposed dataflow does
// (8 "move weight" per active input, then "accumulate"), drains the sums with "move
// accumulator" and checks every neuron's sum, the bottom-row order and the pipeline latency of
// ROWS+1 cycles from the top of the array to its bottom output.
module tb_pe_array;
  import genesis_pkg::*;
  import tb_ref_pkg::*;
  localparam int NR = 8, NC = 8;
  logic clk = 0, rst_n = 1;
  cfg_t cfg;
  pe_instr_t top_op, bot_op;
  logic signed [15:0] top_a [NC], top_b [NC], bot_a [NC], bot_b [NC];
  logic signed [15:0] acc_o [NR][NC];
  int checks = 0, failures = 0, cyc = 0;
  int model [NR][NC];
  int got_cnt, first_out_cyc, drain_issue_cyc;

  pe_array #(.NR(NR), .NC(NC)) dut (.clk, .rst_n, .cfg, .top_op, .top_a, .top_b, .bot_op, .bot_a,
                                    .bot_b, .acc_o);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset is applied
  always @(posedge clk) cyc++;

  task automatic issue(input pe_op_e op, input int a [NC]);
    @(negedge clk);
    top_op = '{valid: 1'b1, op: op, msel: 1'b0, pre_over: 1'b0};
    for (int c = 0; c < NC; c++) begin top_a[c] = 16'(a[c]); top_b[c] = 0; end
  endtask

  // bottom-row monitor: sums leave bottom row first
  always @(posedge clk) if (rst_n && bot_op.valid && bot_op.op == OP_MV_ACC) begin
    if (got_cnt == 0) first_out_cyc = cyc;
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (int'(bot_a[c]) != model[NR-1-got_cnt][c]) begin
        failures++;
        $display("FAIL row %0d col %0d got %0d exp %0d", NR-1-got_cnt, c, bot_a[c], model[NR-1-got_cnt][c]);
      end
    end
    got_cnt++;
  end

  int wv [NC];
  int zero [NC];
  initial begin
    cfg = '0; top_op = '0;
    for (int c = 0; c < NC; c++) begin top_a[c] = 0; top_b[c] = 0; zero[c] = 0; end
    for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) model[r][c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      got_cnt = 0;
      for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) model[r][c] = 0;
      for (int j = 0; j < 5 + round * 7; j++) begin
        int wt [NR][NC];
        for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) begin
          wt[r][c] = $urandom_range(0, 511) - 256;
          model[r][c] = sat(longint'(model[r][c]) + wt[r][c]);
        end
        for (int i = 0; i < NR; i++) begin
          for (int c = 0; c < NC; c++) wv[c] = wt[NR-1-i][c];
          issue(OP_MV_W, wv);
        end
        issue(OP_ACC, zero);
      end
      for (int i = 0; i < NR; i++) begin
        issue(OP_MV_ACC, zero);
        if (i == 0) drain_issue_cyc = cyc;
      end
      @(negedge clk); top_op = '0;
      repeat (NR + 4) @(posedge clk);
      checks++;
      if (got_cnt != NR) begin failures++; $display("FAIL %0d rows drained", got_cnt); end
      checks++;
      // NR+1 register stages (input buffer + NR PEs); the monitor samples one edge later
      if (first_out_cyc - drain_issue_cyc != NR + 2) begin
        failures++; $display("FAIL latency %0d", first_out_cyc - drain_issue_cyc);
      end
      for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) begin
        checks++;
        if (acc_o[r][c] != 0) begin failures++; $display("FAIL acc not cleared r%0d c%0d", r, c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin wait (cyc == 200000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
