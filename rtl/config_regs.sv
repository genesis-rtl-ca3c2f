// config_regs: configuration buffers holding the network size and the neuron and learning
// constants, written by the host during initialisation.
//
// Sixteen 16-bit registers; register k is written when we=1 and waddr=k. The packed view cfg is
// what the rest of the chip uses. Register map (this design's choice):
//   0 n_in   1 n_hid   2 n_out   3 {u,c,b,a} shifts (4 bits each, a in [3:0])
//   4 V_th   5 V_rest  6 R       7 I_min   8 I_max   9 {-, tau_trace, d, eta}
//  10 trace increment [7:0]  11 {pre_thr, post_thr}  12 M step  13 error-neuron threshold
// Reset values give a usable network (256-200-2, Q7.8 constants).
module config_regs
  import genesis_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [3:0]  waddr,
  input  logic [15:0] wdata,
  input  logic [3:0]  raddr,
  output logic [15:0] rdata,
  output cfg_t        cfg
);
  logic [15:0] r [16];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r[0]  <= 16'd256;   r[1]  <= 16'd200;  r[2]  <= 16'd2;
      r[3]  <= 16'h3121;  r[4]  <= 16'd128;  r[5]  <= 16'd0;
      r[6]  <= 16'd256;   r[7]  <= -16'sd512; r[8] <= 16'd512;
      r[9]  <= 16'h0224;  r[10] <= 16'd16;   r[11] <= 16'h2020;
      r[12] <= 16'd4;     r[13] <= 16'd64;   r[14] <= '0; r[15] <= '0;
    end else if (we) begin
      r[waddr] <= wdata;
    end
  end

  assign rdata = r[raddr];

  always_comb begin
    cfg          = '0;
    cfg.n_in     = r[0];
    cfg.n_hid    = r[1];
    cfg.n_out    = r[2];
    cfg.a_sh     = r[3][3:0];
    cfg.b_sh     = r[3][7:4];
    cfg.c_sh     = r[3][11:8];
    cfg.u_sh     = r[3][15:12];
    cfg.v_th     = r[4];
    cfg.v_rest   = r[5];
    cfg.r_gain   = r[6];
    cfg.i_min    = r[7];
    cfg.i_max    = r[8];
    cfg.eta_sh   = r[9][3:0];
    cfg.d_sh     = r[9][7:4];
    cfg.tr_sh    = r[9][11:8];
    cfg.tr_inc   = r[10][7:0];
    cfg.post_thr = r[11][7:0];
    cfg.pre_thr  = r[11][15:8];
    cfg.m_step   = r[12];
    cfg.err_th   = r[13];
  end
endmodule
