// address_encoder: turns a spike train into the indices of the neurons that fired (AER).
//
// The spike train arrives as 16-bit words, word k holding neurons 16k..16k+15. The encoder keeps
// the pending bits of the current word and, each cycle, pushes the index of the lowest pending
// set bit to the FIFO and clears that bit. A word with no spikes costs one cycle and produces no
// index, so inactive neurons generate no data movement. Accepting a new word only when the
// previous one is exhausted (in_ready) and the lowest-index-first order are this design's choices.
//
// Interface: in_valid/in_ready handshake on {in_word, in_widx}; out_push/out_idx to the FIFO,
// stalled while fifo_full. busy is high while bits are pending.
module address_encoder
  import genesis_pkg::*;
#(
  parameter int WORD = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [WORD-1:0] in_word,
  input  logic [11:0]     in_widx,
  input  logic            fifo_full,
  output logic            out_push,
  output logic [IDXW-1:0] out_idx,
  output logic            busy
);
  logic [WORD-1:0]         pend;
  logic [11:0]             widx;
  logic [$clog2(WORD)-1:0] low;
  logic                    any;

  always_comb begin
    low = '0;
    any = |pend;
    for (int b = WORD - 1; b >= 0; b--)
      if (pend[b]) low = b[$clog2(WORD)-1:0];
  end

  assign busy     = any;
  assign in_ready = !any;
  assign out_push = any && !fifo_full;
  assign out_idx  = IDXW'(widx) * IDXW'(WORD) + IDXW'(low);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0; widx <= '0;
    end else if (in_valid && in_ready) begin
      pend <= in_word; widx <= in_widx;
    end else if (out_push) begin
      pend[low] <= 1'b0;
    end
  end
endmodule
