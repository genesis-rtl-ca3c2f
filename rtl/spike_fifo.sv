// spike_fifo: FIFO of active-neuron indices produced by the address encoder.
//
// A synchronous FIFO (registered storage, combinational read data of the head entry) with one
// addition: rewind moves the read pointer back to the first entry written since the last clr,
// so the same list of active neurons can be replayed for every tile of postsynaptic neurons.
// Depth DEPTH entries; it holds one layer's spike list, which never exceeds the layer size.
// The rewind feature and the depth are this design's choices.
//
// Interface: push/din, pop/dout (dout valid while !empty), clr empties, rewind replays.
module spike_fifo
  import genesis_pkg::*;
#(
  parameter int DEPTH = 256,
  parameter int W     = IDXW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         rewind,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wr, rd;

  assign count = wr - rd;
  assign empty = (wr == rd);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = mem[rd[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wr[AW-1:0]] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr <= '0; rd <= '0;
    end else if (clr) begin
      wr <= '0; rd <= '0;
    end else begin
      if (push && !full) wr <= wr + 1'b1;
      if (rewind)                rd <= '0;
      else if (pop && !empty)    rd <= rd + 1'b1;
    end
  end
  // The list never wraps (rewind restarts at entry 0), so depth is a hard limit.
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("spike_fifo overflow");
endmodule
