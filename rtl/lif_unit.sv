// lif_unit: neuron unit attached below one PE column (combinational datapath).
//
// Forward mode (bwd=0), for the neuron whose weighted spike sum is acc_in:
//     I' = I + 2^-a (acc_in - I)                               eq.(1)
//     V' = V + 2^-b (V_rest - V) + 2^-c I                      eq.(2)
//     spike = V' >= V_th; on a spike V' is reset to V_rest
//     T' = trace_calc(T, spike)
// Backward mode (bwd=1), acc_in is the weighted sum of error spikes E reaching the neuron:
//     U' = U + 2^-u (E * R)                                    eq.(3)
//     Theta = (I_min < I < I_max), stored in bit 31 of the {Theta,T,U} word
// The gain constants are powers of two, so the multipliers of eq.(1),(2) are shifts. The paper
// writes 2^a, 2^b, 2^c with positive exponents; they are taken here as attenuations 2^-a etc.,
// which is what a leak needs. Reset-to-rest after a spike and storing Theta beside the trace are
// this design's choices.
//
// Interface: vi_in/vi_out = {V, I} and tu_in/tu_out = {Theta, 7'b0, T, U} are SRAM words laid
// out as in the memory map (upper half first). No clock: the control unit registers the result.
module lif_unit
  import genesis_pkg::*;
(
  input  cfg_t               cfg,
  input  logic               bwd,
  input  logic signed [15:0] acc_in,
  input  logic [31:0]        vi_in,
  input  logic [31:0]        tu_in,
  output logic [31:0]        vi_out,
  output logic [31:0]        tu_out,
  output logic               spike
);
  logic signed [15:0] v, i, u, i_n, v_n, u_n;
  logic [7:0]         t, t_n;
  logic               theta;
  logic signed [31:0] v_sum, eu;

  trace_calc #(.TW(8)) u_trace (
    .trace_in(t), .spike(spike), .cfg_tau(cfg.tr_sh), .cfg_inc(cfg.tr_inc), .trace_out(t_n)
  );

  always_comb begin
    v = vi_in[31:16];
    i = vi_in[15:0];
    t = tu_in[23:16];
    u = tu_in[15:0];
    i_n = i; v_n = v; u_n = u; spike = 1'b0; theta = tu_in[31];
    eu = '0; v_sum = '0;
    if (!bwd) begin
      i_n   = sat16(32'(i) + ((32'(acc_in) - 32'(i)) >>> cfg.a_sh));
      v_sum = 32'(v) + ((32'(cfg.v_rest) - 32'(v)) >>> cfg.b_sh) + (32'(i) >>> cfg.c_sh);
      v_n   = sat16(v_sum);
      if (v_n >= cfg.v_th) begin
        spike = 1'b1;
        v_n   = cfg.v_rest;
      end
    end else begin
      eu    = (32'(acc_in) * 32'(cfg.r_gain)) >>> FRAC;
      u_n   = sat16(32'(u) + (eu >>> cfg.u_sh));
      theta = (i > cfg.i_min) && (i < cfg.i_max);
    end
    vi_out = {v_n, i_n};
    tu_out = {theta, 7'd0, (bwd ? t : t_n), u_n};
  end
endmodule
