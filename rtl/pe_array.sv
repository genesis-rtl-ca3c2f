// pe_array: ROWS x COLS mesh of processing elements with the input buffer on top.
//
// The control unit presents one instruction (shared by all columns) and one {in_a,in_b} pair per
// column each cycle. The input buffer registers them, then each column is a vertical chain
// of PEs: instruction and data move one row per cycle, so an instruction issued in cycle t
// executes in row r in cycle t+1+r and leaves the bottom row (bot_op/bot_a/bot_b) in cycle
// t+1+ROWS. Columns work in lock-step on the same instruction; a column receives the synaptic
// data of the neurons it holds, which with low-order interleaving all come from one SRAM bank.
// The bottom row feeds the neuron units and the output buffers.
//
// The 8x8 size and the mesh follow the paper. Horizontal links between PEs are not used by the
// proposed dataflow (every column is fed from its own bank) and are not built.
module pe_array
  import genesis_pkg::*;
#(
  parameter int NR = ROWS,
  parameter int NC = COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  input  pe_instr_t          top_op,
  input  logic signed [15:0] top_a [NC],
  input  logic signed [15:0] top_b [NC],
  output pe_instr_t          bot_op,
  output logic signed [15:0] bot_a [NC],
  output logic signed [15:0] bot_b [NC],
  output logic signed [15:0] acc_o [NR][NC]
);
  // input buffer
  pe_instr_t          ib_op;
  logic signed [15:0] ib_a [NC];
  logic signed [15:0] ib_b [NC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ib_op <= '0;
      for (int c = 0; c < NC; c++) begin ib_a[c] <= '0; ib_b[c] <= '0; end
    end else begin
      ib_op <= top_op;
      ib_a  <= top_a;
      ib_b  <= top_b;
    end
  end

  pe_instr_t          op_w [NR+1][NC];
  logic signed [15:0] a_w  [NR+1][NC];
  logic signed [15:0] b_w  [NR+1][NC];

  for (genvar c = 0; c < NC; c++) begin : g_col
    assign op_w[0][c] = ib_op;
    assign a_w[0][c]  = ib_a[c];
    assign b_w[0][c]  = ib_b[c];
    for (genvar r = 0; r < NR; r++) begin : g_row
      pe #(.ROW(r)) u_pe (
        .clk, .rst_n, .cfg,
        .in_op(op_w[r][c]), .in_a(a_w[r][c]), .in_b(b_w[r][c]),
        .out_op(op_w[r+1][c]), .out_a(a_w[r+1][c]), .out_b(b_w[r+1][c]),
        .acc_o(acc_o[r][c])
      );
    end
    assign bot_a[c] = a_w[NR][c];
    assign bot_b[c] = b_w[NR][c];
  end
  assign bot_op = op_w[NR][0];
endmodule
