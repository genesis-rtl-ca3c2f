// genesis_pkg: types and constants shared by the Genesis spiking continual-learning accelerator.
//
// Number format: every network quantity (weight W, metaplasticity M, current I, voltage V,
// dendritic error U, feedback weights) is a 16-bit two's-complement fixed-point number with
// FRAC fractional bits (Q7.8 by default). Traces are unsigned 8-bit integers.
//
// The 3-bit PE opcode and its eight instructions (accumulate, reset accumulator, metaplasticity
// weight update, load temp, load accumulator, move input, move weight, move accumulator) follow
// the architecture figure; their encoding and the two side-band bits that travel with the opcode
// (msel, pre_over) are this design's choice.
//
// Memory map of one SRAM bank (32-bit words, two 16-bit halves per word), following the memory
// map figure: 8192 synapse words {M,W}, 32 state words {V,I}, 64 feedback words {WFP,WFN} and
// 32 words {T,U}. A global word address A lives in bank A % 8 at local address A / 8
// (low-order interleaving).
package genesis_pkg;

  localparam int DW       = 16;   // parameter precision (bits)
  localparam int TW       = 8;    // trace precision (bits)
  localparam int FRAC     = 8;    // fractional bits of the fixed-point format
  localparam int NBANKS   = 8;    // interleaved SRAM banks
  localparam int ROWS     = 8;    // PE rows
  localparam int COLS     = 8;    // PE columns
  localparam int MAXN     = 256;  // largest layer (spike-vector length)
  localparam int IDXW     = 16;   // width of a neuron index in the FIFO

  // bank-local memory map
  localparam int SYN_BASE   = 0;
  localparam int SYN_WORDS  = 8192;
  localparam int VI_BASE    = 8192;
  localparam int VI_WORDS   = 32;
  localparam int FB_BASE    = 8224;
  localparam int FB_WORDS   = 64;
  localparam int TU_BASE    = 8288;
  localparam int TU_WORDS   = 32;
  localparam int BANK_DEPTH = 8320;
  localparam int LAW        = 14;  // bank-local address width
  localparam int GAW        = 17;  // global word address width

  localparam logic signed [DW-1:0] ONE  = 16'sd256;   // 1.0 in Q7.8
  localparam logic signed [DW-1:0] SMAX = 16'sh7fff;
  localparam logic signed [DW-1:0] SMIN = 16'sh8000;

  typedef enum logic [2:0] {
    OP_ACC     = 3'd0,  // acc <= acc + weight register
    OP_RST_ACC = 3'd1,  // acc <= 0
    OP_META    = 3'd2,  // metaplastic update of weight (msel=0) or of M (msel=1)
    OP_LD_TEMP = 3'd3,  // shift {U,trace} into temp/trace registers
    OP_LD_ACC  = 3'd4,  // acc <= in_a
    OP_MV_IN   = 3'd5,  // pass in_a/in_b to the PE below
    OP_MV_W    = 3'd6,  // shift {W,M} through the weight/metaplasticity registers
    OP_MV_ACC  = 3'd7   // shift accumulators down the column
  } pe_op_e;

  typedef struct packed {
    logic   valid;
    pe_op_e op;
    logic   msel;      // OP_META: 0 = weight update, 1 = metaplasticity-parameter update
    logic   pre_over;  // OP_META, msel=1: presynaptic trace is above its threshold
  } pe_instr_t;

  // configuration (hyperparameters) written by the host
  typedef struct packed {
    logic [15:0]        n_in;      // input neurons
    logic [15:0]        n_hid;     // hidden neurons
    logic [15:0]        n_out;     // output neurons
    logic [3:0]         a_sh;      // eq.(1) current leak 2^-a
    logic [3:0]         b_sh;      // eq.(2) voltage leak 2^-b
    logic [3:0]         c_sh;      // eq.(2) current gain 2^-c
    logic [3:0]         u_sh;      // eq.(3) dt/tau_mem = 2^-u
    logic signed [15:0] v_th;      // firing threshold
    logic signed [15:0] v_rest;    // resting / reset potential
    logic signed [15:0] r_gain;    // eq.(3) R
    logic signed [15:0] i_min;     // boxcar lower limit
    logic signed [15:0] i_max;     // boxcar upper limit
    logic [3:0]         eta_sh;    // learning rate 2^-eta
    logic [3:0]         d_sh;      // eq.(5) 2^d
    logic [3:0]         tr_sh;     // trace leak 2^-tau
    logic [7:0]         tr_inc;    // trace increment per spike
    logic [7:0]         post_thr;  // postsynaptic trace threshold (M strengthened)
    logic [7:0]         pre_thr;   // presynaptic trace threshold (M weakened)
    logic signed [15:0] m_step;    // M increment/decrement
    logic signed [15:0] err_th;    // error-neuron threshold
  } cfg_t;

  // host command codes (upper nibble of a header word)
  typedef enum logic [3:0] {
    CMD_NOP  = 4'd0,
    CMD_CFG  = 4'd1,   // arg = register, 1 data word
    CMD_MWR  = 4'd2,   // arg = N words; addr hi, addr lo, then N x (hi, lo)
    CMD_MRD  = 4'd3,   // arg = N words; addr hi, addr lo; N x (hi, lo) returned
    CMD_SPK  = 4'd4,   // arg = N spike words (16 input neurons each)
    CMD_LBL  = 4'd5,   // 1 data word: label spikes of the output neurons
    CMD_RUN  = 4'd6,   // arg[3:0] = {meta, update, backward, forward}
    CMD_OUT  = 4'd7    // returns 1 word: output spikes of the last forward step
  } cmd_e;

  function automatic logic signed [DW-1:0] sat16(input logic signed [31:0] x);
    if (x > 32'sd32767)       return SMAX;
    else if (x < -32'sd32768) return SMIN;
    else                      return x[DW-1:0];
  endfunction

endpackage
