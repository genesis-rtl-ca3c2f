// trace_calc: 8-bit activity trace of one neuron (combinational step).
//
// Discretises dX/dt = -X/tau + S as X' = X - (X >> tau) + inc*S with the leak 1/tau restricted to
// a power of two (dyadic constants, as the rest of the design). The result saturates at 255.
// 8-bit traces follow the paper; the shift-based leak, the configurable increment and the
// saturation are this design's choices.
//
// Interface: trace_in/trace_out unsigned 8-bit; spike is the neuron's output spike of this
// time step; cfg_tau and cfg_inc come from the configuration registers. No clock.
module trace_calc #(
  parameter int TW = 8
) (
  input  logic [TW-1:0] trace_in,
  input  logic          spike,
  input  logic [3:0]    cfg_tau,
  input  logic [TW-1:0] cfg_inc,
  output logic [TW-1:0] trace_out
);
  logic [TW:0] sum;
  always_comb begin
    sum = {1'b0, trace_in} - {1'b0, (trace_in >> cfg_tau)} + (spike ? {1'b0, cfg_inc} : '0);
    trace_out = sum[TW] ? {TW{1'b1}} : sum[TW-1:0];
  end
endmodule
