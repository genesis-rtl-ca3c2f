// pe: processing element of the Genesis systolic array.
//
// A PE holds the partial sum of one postsynaptic neuron and the state needed to update the
// synapses arriving at it: a weight register and a metaplasticity register (filled by "move
// weight"), an accumulator, a temp register holding the neuron's gated dendritic error U and an
// 8-bit register holding the neuron's trace (both filled by "load temp"). The opcode is decoded
// into the enables of the accumulator and of the metaplasticity update unit, and is passed with
// the data to the PE below through a buffer register, so that a column behaves as a skewed
// shift chain: an instruction issued at the top reaches row r r cycles later.
//
// Instructions (3-bit opcode, names from the architecture figure; semantics are this design's):
//   OP_ACC      acc <= acc + wreg                     (weighted sum of spikes)
//   OP_RST_ACC  acc <= 0
//   OP_META     msel=0: wreg <= wreg - 2^-eta * f(wreg,mreg) * temp
//               msel=1: mreg <= mreg + m_step*(trace >= post_thr) - m_step*pre_over, kept >= 0
//   OP_LD_TEMP  {temp,trace} <= {in_a,in_b[7:0]};  out <= old {temp,trace}
//   OP_LD_ACC   acc <= in_a
//   OP_MV_IN    out <= {in_a,in_b}                    (pass data to the PE below)
//   OP_MV_W     {wreg,mreg} <= {in_a,in_b};  out <= old {wreg,mreg}
//   OP_MV_ACC   acc <= in_a;  out_a <= old acc
// Outputs out_a/out_b/out_op are registered (one cycle per PE). Instructions with valid=0 do
// nothing. The trace itself is computed in the neuron unit below the array, where the spike is
// known, and is brought into the PE with "load temp".
module pe
  import genesis_pkg::*;
#(
  parameter int ROW = 0   // row position, for observation only
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  input  pe_instr_t          in_op,
  input  logic signed [15:0] in_a,
  input  logic signed [15:0] in_b,
  output pe_instr_t          out_op,
  output logic signed [15:0] out_a,
  output logic signed [15:0] out_b,
  output logic signed [15:0] acc_o    // accumulator, for observation
);
  logic signed [15:0] wreg, mreg, temp;
  logic [7:0]         trace;
  logic signed [15:0] acc, w_upd, f_unused;
  logic               acc_en, acc_rst, acc_load;
  logic signed [15:0] acc_din;
  logic signed [16:0] m_next;

  // encoder: opcode to unit enables
  always_comb begin
    acc_en   = in_op.valid && in_op.op == OP_ACC;
    acc_rst  = in_op.valid && in_op.op == OP_RST_ACC;
    acc_load = in_op.valid && (in_op.op == OP_LD_ACC || in_op.op == OP_MV_ACC);
    acc_din  = acc_load ? in_a : wreg;
  end

  accumulator #(.W(16)) u_acc (
    .clk, .rst_n, .acc_en, .acc_rst, .load(acc_load), .din(acc_din), .acc
  );

  meta_update #(.W(16)) u_meta (
    .w(wreg), .m(mreg), .u(temp), .cfg_d(cfg.d_sh), .cfg_eta(cfg.eta_sh),
    .w_new(w_upd), .f_out(f_unused)
  );

  always_comb begin
    m_next = 17'(mreg);
    if (trace >= cfg.post_thr) m_next = m_next + 17'(cfg.m_step);
    if (in_op.pre_over)        m_next = m_next - 17'(cfg.m_step);
    if (m_next < 0)            m_next = '0;
    else if (m_next > 17'sd32767) m_next = 17'sd32767;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wreg <= '0; mreg <= '0; temp <= '0; trace <= '0;
      out_a <= '0; out_b <= '0; out_op <= '0;
    end else begin
      out_op <= in_op;
      if (in_op.valid) begin
        unique case (in_op.op)
          OP_META: begin
            if (!in_op.msel) wreg <= w_upd;
            else             mreg <= m_next[15:0];
          end
          OP_LD_TEMP: begin
            temp <= in_a; trace <= in_b[7:0];
            out_a <= temp; out_b <= {8'd0, trace};
          end
          OP_MV_IN: begin
            out_a <= in_a; out_b <= in_b;
          end
          OP_MV_W: begin
            wreg <= in_a; mreg <= in_b;
            out_a <= wreg; out_b <= mreg;
          end
          OP_MV_ACC: begin
            out_a <= acc; out_b <= '0;
          end
          default: ;  // OP_ACC, OP_RST_ACC, OP_LD_ACC act on the accumulator only
        endcase
      end
    end
  end

  assign acc_o = acc;
endmodule
