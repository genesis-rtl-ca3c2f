// meta_update: metaplasticity weight-update unit of a processing element (combinational).
//
// Computes the regularised synapse update
//     f(w,m) = 1 - |m*w| / 2^d              (bilinear metaplasticity function, clamped at 0)
//     w_new  = w - 2^-eta * f(w,m) * U      (U already gated by the boxcar Theta(I))
// in Q7.8 fixed point. The datapath follows the unit's block diagram: |W| is formed by
// selecting W or its negation on the sign test "W>0", multiplied by M, subtracted from 1,
// scaled by a shift, multiplied by U and added to W. The diagram scales with a left shift by a
// constant; here the scale 2^-d is applied to |m*w| as the equation writes it, and the learning
// rate is a right shift by eta. Clamping f at 0 and saturating w_new to 16 bits are choices of
// this design.
//
// Interface: w, m, u are signed Q7.8; cfg_d, cfg_eta are shift amounts. Purely combinational;
// the enclosing PE registers w_new.
module meta_update
  import genesis_pkg::*;
#(
  parameter int W = 16
) (
  input  logic signed [W-1:0] w,
  input  logic signed [W-1:0] m,
  input  logic signed [W-1:0] u,
  input  logic [3:0]          cfg_d,
  input  logic [3:0]          cfg_eta,
  output logic signed [W-1:0] w_new,
  output logic signed [W-1:0] f_out   // f(w,m), exposed for test and observation
);
  logic [W:0]           abs_w, abs_m;
  logic [2*W+1:0]       prod;      // |m|*|w|, 2*FRAC fractional bits
  logic [2*W+1:0]       scaled;    // |m*w| / 2^d, FRAC fractional bits
  logic signed [W:0]    f;
  logic signed [2*W+1:0] fu;       // f * U, 2*FRAC fractional bits
  logic signed [2*W+1:0] dw;

  always_comb begin
    abs_w  = (w > 0) ? {w[W-1], w} : -{w[W-1], w};   // mux of W and its negation on W>0
    abs_m  = (m[W-1]) ? -{m[W-1], m} : {m[W-1], m};
    prod   = abs_m * abs_w;
    scaled = prod >> (FRAC + int'(cfg_d));
    if (scaled >= (2*W+2)'(ONE)) f = '0;
    else                        f = (W+1)'(ONE) - (W+1)'(scaled);
    fu     = f * u;
    dw     = fu >>> (FRAC + int'(cfg_eta));
    w_new  = sat16(32'(w) - 32'(dw));
    f_out  = f[W-1:0];
  end
endmodule
