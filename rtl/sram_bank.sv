// sram_bank: one of the eight interleaved on-chip SRAM banks.
//
// DEPTH words of 32 bits. Each word co-locates two 16-bit quantities, as in the memory map:
// {M, W} for a synapse (so a weight and its metaplasticity parameter are fetched in one
// access), {V, I}, {WFP, WFN} and {T, U}. Bank-local regions (genesis_pkg): synapses at 0..8191,
// {V,I} at 8192..8223, {WFP,WFN} at 8224..8287, {T,U} at 8288..8319.
//
// Written as an array with one synchronous read port and one write port (read data one cycle
// after the address; a read and a write of the same address in one cycle return the old word).
// The fabricated chip uses SRAM macros whose port structure the paper does not state; the
// separate read and write ports are this design's choice.
module sram_bank
  import genesis_pkg::*;
#(
  parameter int DEPTH = BANK_DEPTH,
  parameter int AW    = LAW
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
