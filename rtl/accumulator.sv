// accumulator: 16-bit saturating accumulator of a processing element.
//
// Sums the weights of synapses whose presynaptic neuron fired ("Acc enable"), clears on
// "Acc reset" and can be loaded directly. Saturation at the 16-bit limits instead of wrapping
// is this design's choice. Priority: reset, then load, then enable.
//
// Timing: one registered result per cycle; acc shows the sum of all earlier enabled inputs.
module accumulator
  import genesis_pkg::*;
#(
  parameter int W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                acc_en,
  input  logic                acc_rst,
  input  logic                load,
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc <= '0;
    else if (acc_rst) acc <= '0;
    else if (load)    acc <= din;
    else if (acc_en)  acc <= sat16(32'(acc) + 32'(din));
  end
endmodule
