// output_buffer: bottom-of-array output buffers with the phase 2:1 multiplexers.
//
// When the accumulators are shifted out of the array (bottom instruction "move accumulator"),
// each column delivers the sums of its ROWS neurons, bottom row first. The buffer stores them
// by row, entry r holding the sum of the neuron in row r, for the neuron units to process in any
// order. Per column, a 2:1 multiplexer driven by the phase signal selects what is written back
// to the column's SRAM bank: the neuron unit's result (forward/backward phases, phase=0) or the
// word leaving the bottom PE, {M, W} (synapse-update phases, phase=1).
//
// Interface: clr restarts the capture count; capture happens on the cycle the bottom
// instruction is a valid OP_MV_ACC. rd_row selects the entry read on rd_data (combinational).
module output_buffer
  import genesis_pkg::*;
#(
  parameter int NR = ROWS,
  parameter int NC = COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  pe_instr_t          bot_op,
  input  logic signed [15:0] bot_a [NC],
  input  logic signed [15:0] bot_b [NC],
  input  logic [$clog2(NR)-1:0] rd_row,
  output logic signed [15:0] rd_data [NC],
  output logic               full,
  input  logic               phase,
  input  logic [31:0]        lif_word [NC],
  output logic [31:0]        wb_word [NC]
);
  logic signed [15:0]      buf_q [NR][NC];
  logic [$clog2(NR):0]     cnt;
  logic                    cap;

  assign cap  = bot_op.valid && bot_op.op == OP_MV_ACC && cnt < ($clog2(NR)+1)'(NR);
  assign full = cnt == ($clog2(NR)+1)'(NR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) buf_q[r][c] <= '0;
    end else if (clr) begin
      cnt <= '0;
    end else if (cap) begin
      for (int c = 0; c < NC; c++) buf_q[NR-1-int'(cnt)][c] <= bot_a[c];
      cnt <= cnt + 1'b1;
    end
  end

  always_comb
    for (int c = 0; c < NC; c++) begin
      rd_data[c] = buf_q[rd_row][c];
      wb_word[c] = phase ? {bot_b[c], bot_a[c]} : lif_word[c];
    end
endmodule
