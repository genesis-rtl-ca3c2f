// error_neuron: error-encoding neurons of the output layer.
//
// For output neuron o, the error current follows the output-versus-label difference,
//     e' = e + 2^-a ((S_out - S_label) * 1.0 - e)
// and drives two leaky integrate-and-fire neurons: the false-positive neuron integrates e and
// the false-negative neuron integrates its inverse -e,
//     Vx' = Vx + 2^-b (V_rest - Vx) + 2^-c (+/-e),  spike when Vx' >= err_th, then Vx' = V_rest.
// A false-positive spike means the output fired without the label; a false-negative spike means
// the label fired without the output. The paper gives this structure; the leaky current, the
// reuse of the hidden neurons' constants a, b, c and the separate threshold are this design's.
//
// Interface: one neuron is stepped per cycle when step=1 (index idx); fp/fn are registered and
// valid one cycle later with done=1. State for NOUT neurons is held here and cleared by clr.
module error_neuron
  import genesis_pkg::*;
#(
  parameter int NOUT = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  input  logic                    clr,
  input  logic                    step,
  input  logic [$clog2(NOUT)-1:0] idx,
  input  logic                    s_out,
  input  logic                    s_label,
  output logic                    fp,
  output logic                    fn,
  output logic                    done
);
  logic signed [15:0] e   [NOUT];
  logic signed [15:0] vfp [NOUT];
  logic signed [15:0] vfn [NOUT];
  logic signed [15:0] diff, e_n, vfp_n, vfn_n;
  logic               fp_n, fn_n;

  always_comb begin
    diff  = s_out == s_label ? 16'sd0 : (s_out ? ONE : -ONE);
    e_n   = sat16(32'(e[idx]) + ((32'(diff) - 32'(e[idx])) >>> cfg.a_sh));
    vfp_n = sat16(32'(vfp[idx]) + ((32'(cfg.v_rest) - 32'(vfp[idx])) >>> cfg.b_sh) + (32'(e_n) >>> cfg.c_sh));
    vfn_n = sat16(32'(vfn[idx]) + ((32'(cfg.v_rest) - 32'(vfn[idx])) >>> cfg.b_sh) - (32'(e_n) >>> cfg.c_sh));
    fp_n  = vfp_n >= cfg.err_th;
    fn_n  = vfn_n >= cfg.err_th;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NOUT; k++) begin e[k] <= '0; vfp[k] <= '0; vfn[k] <= '0; end
      fp <= 1'b0; fn <= 1'b0; done <= 1'b0;
    end else begin
      done <= step;
      if (clr) begin
        for (int k = 0; k < NOUT; k++) begin e[k] <= '0; vfp[k] <= cfg.v_rest; vfn[k] <= cfg.v_rest; end
      end else if (step) begin
        e[idx]   <= e_n;
        vfp[idx] <= fp_n ? cfg.v_rest : vfp_n;
        vfn[idx] <= fn_n ? cfg.v_rest : vfn_n;
        fp <= fp_n;
        fn <= fn_n;
      end
    end
  end
endmodule
