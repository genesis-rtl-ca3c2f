// control_unit: sequencer of the Genesis accelerator.
//
// The network is two fully connected spiking layers, n_in -> n_hid -> n_out. On a CMD_RUN the
// unit runs, in this order, the phases selected by run_flags:
//   forward   (flag 0): layer 1, then layer 2. The presynaptic spike train is handed to the
//             address encoder, which fills the FIFO with the indices of the active neurons.
//             For every tile of up to 64 postsynaptic neurons, and every index j in the FIFO,
//             the 8 words {M,W} of the synapses j -> (tile neurons) are read from the 8 banks
//             (one word per bank per cycle, 8 cycles) and shifted down the PE columns with
//             "move weight", then "accumulate" adds them in every PE. "Move accumulator"
//             then shifts the 64 sums into the output buffers, and each column's neuron unit
//             reads {V,I} and {T,U}, applies the LIF step and writes both back; spikes are
//             kept in the hidden / output spike vectors. Inactive inputs cost no cycle.
//   backward  (flag 1): the error neurons compare output and label spikes and produce
//             false-positive / false-negative spikes. These are address-encoded; for the
//             output layer each error spike reaches its own output neuron with weight +1/-1,
//             for the hidden layer it is weighted by the fixed feedback weights WFP / -WFN.
//             The sums go through the neuron units in backward mode, which integrate U and
//             record the boxcar Theta(I).
//   update    (flag 2): layer 2, then layer 1. Each PE first receives the gated error of its
//             neuron and its trace ("load temp"); then, for every presynaptic neuron that
//             fired, the {M,W} words are shifted in and "metaplasticity update" computes the
//             new weights, which are shifted out at the bottom (while the next ones shift in)
//             and written back to the same addresses.
//   meta      (flag 3): same sweep over all presynaptic neurons, updating M from the
//             postsynaptic trace (held by the PE) and the presynaptic trace (sent with the
//             instruction as pre_over).
// Addresses: neuron n of a layer is handled by column n%8, row (n/8)%8 of tile n/64; its
// synapse from presynaptic j is global word base + j*NP + n (NP = layer size rounded up to 8),
// which low-order interleaving places in bank n%8, so all 8 columns read one common
// bank-local address each cycle. State words {V,I}/{T,U} of hidden neuron h and output neuron o
// sit at index h and NHP+o; feedback words {WFP,WFN} of (o,h) at index o*NHP+h.
//
// The phases, their order, the AER encoding, the shared-address interleaved memory and the
// co-located {M,W} words follow the paper; tiling, the instruction schedule, replaying the FIFO
// per tile and the keeping of spike vectors and input traces in registers are this design's.
//
// Timing: 9 cycles per active presynaptic neuron per tile, plus 8 (drain) and 40 (neuron units)
// per tile in forward/backward; busy is high from the cycle after run until the last phase ends.
module control_unit
  import genesis_pkg::*;
#(
  parameter int NOUT = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  // host interface
  input  logic               run,
  input  logic [3:0]         run_flags,
  output logic               busy,
  input  logic               spk_we,
  input  logic [3:0]         spk_widx,
  input  logic [15:0]        spk_data,
  input  logic               lbl_we,
  input  logic [15:0]        lbl_data,
  output logic [15:0]        out_spikes,
  input  logic               h_we,
  input  logic               h_re,
  input  logic [GAW-1:0]     h_addr,
  input  logic [31:0]        h_wdata,
  output logic               h_rvalid,
  output logic [31:0]        h_rdata,
  // SRAM banks
  output logic               b_re,
  output logic [LAW-1:0]     b_raddr,
  input  logic [31:0]        b_rdata [NBANKS],
  output logic               b_we [NBANKS],
  output logic [LAW-1:0]     b_waddr,
  output logic [31:0]        b_wdata [NBANKS],
  // address encoder and FIFO
  output logic               enc_valid,
  input  logic               enc_ready,
  output logic [15:0]        enc_word,
  output logic [11:0]        enc_widx,
  input  logic               enc_busy,
  output logic               fifo_clr,
  output logic               fifo_rewind,
  output logic               fifo_pop,
  input  logic [IDXW-1:0]    fifo_dout,
  input  logic               fifo_empty,
  // PE array
  output pe_instr_t          top_op,
  output logic signed [15:0] top_a [COLS],
  output logic signed [15:0] top_b [COLS],
  input  pe_instr_t          bot_op,
  // output buffers (with the phase 2:1 multiplexers)
  output logic               ob_clr,
  output logic [2:0]         ob_rd_row,
  input  logic               ob_full,
  output logic               ob_phase,
  output logic [31:0]        ob_lif_word [COLS],
  input  logic [31:0]        ob_wb_word [COLS],
  // neuron units
  output logic               lif_bwd,
  output logic [31:0]        lif_vi [COLS],
  output logic [31:0]        lif_tu [COLS],
  input  logic [31:0]        lif_vi_out [COLS],
  input  logic [31:0]        lif_tu_out [COLS],
  input  logic               lif_spike [COLS],
  // error neurons
  output logic               en_clr,
  output logic               en_step,
  output logic [$clog2(NOUT)-1:0] en_idx,
  output logic               en_sout,
  output logic               en_slabel,
  input  logic               en_fp,
  input  logic               en_fn,
  input  logic               en_done,
  // activity counters (observation)
  output logic [31:0]        n_stream_ops,   // presynaptic neurons streamed (all tiles)
  output logic [31:0]        n_skipped,      // inactive presynaptic neurons skipped (AER)
  output logic [31:0]        n_wb,           // synapse words written back
  output logic [31:0]        n_spikes        // neuron spikes produced in forward phases
);
  typedef enum logic [3:0] {
    J_FWD1, J_FWD2, J_ERR, J_BWD2, J_BWD1, J_UPD2, J_UPD1, J_MET2, J_MET1, J_NONE
  } job_e;
  typedef enum logic [1:0] {K_FWD, K_BWD, K_UPD, K_MET} kind_e;
  typedef enum logic [3:0] {
    S_IDLE, S_JOB, S_PREOV, S_PREOV2, S_FEED, S_FEEDW, S_TILE, S_LDT, S_STREAM,
    S_FLUSH, S_WBW, S_DRAIN, S_OBW, S_NEUR, S_ERR, S_ERRW
  } st_e;
  typedef enum logic [2:0] {SRC_ZERO, SRC_W, SRC_FB, SRC_ID, SRC_TU} src_e;

  typedef struct packed {
    logic      valid;
    pe_instr_t op;
    src_e      src;
    logic [3:0] e;      // error-spike index for SRC_FB / SRC_ID
    logic [2:0] k;      // row of the neuron addressed
  } req_t;

  typedef struct packed {
    logic           en;
    logic [LAW-1:0] addr;
    logic [2:0]     k;
  } wb_t;

  st_e   st;
  job_e  job;
  kind_e kind;
  logic [3:0] flags;

  logic [MAXN-1:0] in_spk, hid_spk, pre_over;
  logic [15:0]     out_spk, lbl, err_spk;
  logic [7:0]      itrace [MAXN];

  // job-dependent quantities
  logic [15:0]    n_pre, n_post, nhp, nop, np8, id_off;
  logic [LAW-1:0] syn_base_l;
  logic [MAXN-1:0] src_vec;
  logic [3:0]     n_tiles;
  logic           layer2;

  // counters
  logic [4:0]  w;          // spike word being fed
  logic [3:0]  t;          // tile
  logic [3:0]  k;          // row counter within a sequence
  logic [2:0]  mstep;      // neuron-unit micro step
  logic [15:0] prev_j;
  logic        have_prev;
  logic [5:0]  q;
  logic [3:0]  o;

  req_t req, s1;
  logic [31:0] vi_q [COLS];
  logic [31:0] tu_q [COLS];

  // write-back queue (entries in issue order of "move weight")
  localparam int WBQ = 16;
  wb_t        wbq [WBQ];
  logic [4:0] wbq_wr, wbq_rd;
  logic       wbq_push, wbq_pop;
  wb_t        wbq_in;
  logic       wbq_empty;
  logic [2:0] h_bank_q;

  // --------------------------------------------------------------------------------------------
  // job decode
  always_comb begin
    nhp    = (cfg.n_hid + 16'd7) & ~16'd7;
    nop    = (cfg.n_out + 16'd7) & ~16'd7;
    layer2 = job inside {J_FWD2, J_BWD2, J_UPD2, J_MET2};
    kind   = K_FWD;
    unique case (job)
      J_BWD1, J_BWD2, J_ERR: kind = K_BWD;
      J_UPD1, J_UPD2:        kind = K_UPD;
      J_MET1, J_MET2:        kind = K_MET;
      default:               kind = K_FWD;
    endcase
    n_post = layer2 ? cfg.n_out : cfg.n_hid;
    np8    = layer2 ? nop : nhp;
    id_off = layer2 ? nhp : 16'd0;
    syn_base_l = layer2 ? LAW'((32'(cfg.n_in) * 32'(nhp)) >> 3) : '0;
    unique case (job)
      J_FWD1, J_UPD1: begin n_pre = cfg.n_in;          src_vec = in_spk;  end
      J_FWD2, J_UPD2: begin n_pre = cfg.n_hid;         src_vec = hid_spk; end
      J_BWD1, J_BWD2: begin n_pre = cfg.n_out << 1;    src_vec = MAXN'(err_spk); end
      J_MET1:         begin n_pre = cfg.n_in;          src_vec = '1;      end
      J_MET2:         begin n_pre = cfg.n_hid;         src_vec = '1;      end
      default:        begin n_pre = '0;                src_vec = '0;      end
    endcase
    n_tiles = 4'((n_post + 16'd63) >> 6);
  end

  // next job after the current one, given the run flags
  function automatic job_e next_job(input job_e cur, input logic [3:0] fl);
    job_e nj;
    nj = J_NONE;
    for (int i = 8; i >= 0; i--) begin
      job_e c;
      logic en;
      c = job_e'(i);
      unique case (c)
        J_FWD1, J_FWD2:         en = fl[0];
        J_ERR, J_BWD2, J_BWD1:  en = fl[1];
        J_UPD2, J_UPD1:         en = fl[2];
        default:                en = fl[3];
      endcase
      if (en && (cur == J_NONE || i > int'(cur))) nj = c;
    end
    return nj;
  endfunction

  function automatic st_e after_job(input job_e cur, input logic [3:0] fl);
    return (next_job(cur, fl) == J_NONE) ? S_IDLE : S_JOB;
  endfunction

  // addresses
  function automatic logic [LAW-1:0] syn_addr(input logic [15:0] jj, input logic [3:0] tt,
                                              input logic [2:0] kk);
    return syn_base_l + LAW'(32'(jj) * 32'(np8 >> 3)) + LAW'({tt, 3'b000}) + LAW'(kk);
  endfunction
  function automatic logic [LAW-1:0] st_addr(input int base, input logic [3:0] tt,
                                             input logic [2:0] kk);
    return LAW'(base) + LAW'(id_off >> 3) + LAW'({tt, 3'b000}) + LAW'(kk);
  endfunction
  function automatic logic [LAW-1:0] fb_addr(input logic [15:0] e, input logic [3:0] tt,
                                             input logic [2:0] kk);
    return LAW'(FB_BASE) + LAW'(32'(e >> 1) * 32'(nhp >> 3)) + LAW'({tt, 3'b000}) + LAW'(kk);
  endfunction
  function automatic logic col_valid(input logic [3:0] tt, input logic [2:0] kk, input int c);
    return (32'(tt) * 64 + 32'(kk) * 8 + c) < 32'(n_post);
  endfunction

  // --------------------------------------------------------------------------------------------
  // input-trace update while layer-1 spikes are fed (16 neurons per word)
  logic [7:0] itr_new [16];
  for (genvar b = 0; b < 16; b++) begin : g_itr
    trace_calc #(.TW(8)) u_tr (
      .trace_in(itrace[{w[3:0], 4'(b)}]),
      .spike(src_vec[{w[3:0], 4'(b)}] && (16'({w[3:0], 4'(b)}) < n_pre)),
      .cfg_tau(cfg.tr_sh), .cfg_inc(cfg.tr_inc), .trace_out(itr_new[b])
    );
  end

  // --------------------------------------------------------------------------------------------
  // request generation (stage 0) and memory read port
  always_comb begin
    req         = '0;
    b_re        = 1'b0;
    b_raddr     = '0;
    enc_valid   = 1'b0;
    enc_word    = '0;
    enc_widx    = 12'(w);
    fifo_pop    = 1'b0;
    wbq_push    = 1'b0;
    wbq_in      = '0;
    for (int b = 0; b < 16; b++)
      enc_word[b] = src_vec[{w[3:0], 4'(b)}] && (16'({w[3:0], 4'(b)}) < n_pre);
    unique case (st)
      S_FEED: enc_valid = (16'({w, 4'b0000}) < n_pre);
      S_PREOV: begin b_re = 1'b1; b_raddr = LAW'(TU_BASE) + LAW'(q); end
      S_LDT: begin
        b_re = 1'b1; b_raddr = st_addr(TU_BASE, t, 3'(k));
        req.valid = 1'b1; req.op = '{valid: 1'b1, op: OP_LD_TEMP, msel: 1'b0, pre_over: 1'b0};
        req.src = SRC_TU; req.k = 3'(k);
      end
      S_STREAM: if (!fifo_empty) begin
        if (k[3]) begin
          // all 8 words shifted in: compute
          req.valid = 1'b1;
          req.op.valid = 1'b1;
          req.op.op = (kind == K_FWD || kind == K_BWD) ? OP_ACC : OP_META;
          req.op.msel = (kind == K_MET);
          req.op.pre_over = pre_over[fifo_dout[7:0]];
          req.src = SRC_ZERO;
          fifo_pop = 1'b1;
        end else begin
          req.valid = 1'b1;
          req.op = '{valid: 1'b1, op: OP_MV_W, msel: 1'b0, pre_over: 1'b0};
          req.k = 3'(k);
          req.e = fifo_dout[3:0];
          b_re = 1'b1;
          unique case (job)
            J_BWD1: begin req.src = SRC_FB; b_raddr = fb_addr(fifo_dout, t, 3'(k)); end
            J_BWD2: req.src = SRC_ID;
            default: begin req.src = SRC_W; b_raddr = syn_addr(fifo_dout, t, 3'(k)); end
          endcase
          if (kind == K_UPD || kind == K_MET) begin
            wbq_push = 1'b1;
            wbq_in   = '{en: have_prev, addr: syn_addr(prev_j, t, 3'(k)), k: 3'(k)};
          end
        end
      end
      S_FLUSH: begin
        req.valid = 1'b1;
        req.op = '{valid: 1'b1, op: OP_MV_W, msel: 1'b0, pre_over: 1'b0};
        req.src = SRC_ZERO; req.k = 3'(k);
        wbq_push = 1'b1;
        wbq_in   = '{en: 1'b1, addr: syn_addr(prev_j, t, 3'(k)), k: 3'(k)};
      end
      S_DRAIN: begin
        req.valid = 1'b1;
        req.op = '{valid: 1'b1, op: OP_MV_ACC, msel: 1'b0, pre_over: 1'b0};
        req.src = SRC_ZERO;
      end
      S_NEUR: begin
        if (mstep == 3'd0) begin b_re = 1'b1; b_raddr = st_addr(VI_BASE, t, 3'(k)); end
        if (mstep == 3'd1) begin b_re = 1'b1; b_raddr = st_addr(TU_BASE, t, 3'(k)); end
      end
      default: ;
    endcase
    if (st == S_IDLE && h_re) begin
      b_re = 1'b1; b_raddr = LAW'(h_addr >> 3);
    end
  end

  // stage 1: data from the banks joins the instruction on its way to the input buffer
  always_comb begin
    top_op = s1.valid ? s1.op : '0;
    for (int c = 0; c < COLS; c++) begin
      top_a[c] = '0;
      top_b[c] = '0;
      unique case (s1.src)
        SRC_W:  begin top_a[c] = b_rdata[c][15:0]; top_b[c] = b_rdata[c][31:16]; end
        SRC_TU: begin
          top_a[c] = b_rdata[c][31] ? b_rdata[c][15:0] : 16'sd0;   // U * Theta(I)
          top_b[c] = {8'd0, b_rdata[c][23:16]};                     // trace
        end
        SRC_FB: top_a[c] = s1.e[0] ? -b_rdata[c][15:0] : b_rdata[c][31:16];
        SRC_ID: if ((32'(t) * 64 + 32'(s1.k) * 8 + c) == 32'(s1.e >> 1))
                  top_a[c] = s1.e[0] ? -ONE : ONE;
        default: ;
      endcase
    end
  end

  // --------------------------------------------------------------------------------------------
  // write-back queue and bank write port
  assign wbq_empty = (wbq_wr == wbq_rd);
  assign wbq_pop   = bot_op.valid && bot_op.op == OP_MV_W && !wbq_empty;
  assign ob_phase  = (kind == K_UPD || kind == K_MET) && st != S_NEUR;
  assign ob_rd_row = k[2:0];
  assign lif_bwd   = (kind == K_BWD);

  always_comb begin
    b_waddr = '0;
    for (int c = 0; c < COLS; c++) begin
      b_we[c]        = 1'b0;
      b_wdata[c]     = ob_wb_word[c];
      lif_vi[c]      = vi_q[c];
      lif_tu[c]      = tu_q[c];
      ob_lif_word[c] = (mstep == 3'd3) ? lif_vi_out[c] : lif_tu_out[c];
    end
    if (wbq_pop) begin
      b_waddr = wbq[wbq_rd[3:0]].addr;
      for (int c = 0; c < COLS; c++)
        b_we[c] = wbq[wbq_rd[3:0]].en && col_valid(t, wbq[wbq_rd[3:0]].k, c);
    end else if (st == S_NEUR && (mstep == 3'd3 || mstep == 3'd4)) begin
      b_waddr = st_addr(mstep == 3'd3 ? VI_BASE : TU_BASE, t, 3'(k));
      for (int c = 0; c < COLS; c++) b_we[c] = col_valid(t, 3'(k), c);
    end else if (st == S_IDLE && h_we) begin
      b_waddr = LAW'(h_addr >> 3);
      for (int c = 0; c < COLS; c++) begin
        b_we[c]    = (h_addr[2:0] == 3'(c));
        b_wdata[c] = h_wdata;
      end
    end
  end

  // --------------------------------------------------------------------------------------------
  logic [4:0] word_valid_n;   // neurons of the word being fed that exist in the layer
  logic [3:0] spk_cnt;        // spikes produced by the neuron units this cycle
  always_comb begin
    word_valid_n = (n_pre >= 16'({w, 4'b0000}) + 16'd16) ? 5'd16 : 5'(n_pre - 16'({w, 4'b0000}));
    spk_cnt = '0;
    for (int c = 0; c < COLS; c++)
      if (col_valid(t, 3'(k), c) && lif_spike[c]) spk_cnt = spk_cnt + 1'b1;
  end

  always_comb begin
    fifo_clr    = (st == S_JOB);
    fifo_rewind = (st == S_TILE);
    ob_clr      = (st == S_TILE);
    en_clr      = 1'b0;
    en_step     = (st == S_ERR);
    en_idx      = $clog2(NOUT)'(o);
    en_sout     = out_spk[o];
    en_slabel   = lbl[o];
    busy        = (st != S_IDLE);
    out_spikes  = out_spk;
    h_rdata     = b_rdata[h_bank_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; job <= J_NONE; flags <= '0;
      in_spk <= '0; hid_spk <= '0; pre_over <= '0; out_spk <= '0; lbl <= '0; err_spk <= '0;
      for (int i = 0; i < MAXN; i++) itrace[i] <= '0;
      w <= '0; t <= '0; k <= '0; mstep <= '0; prev_j <= '0; have_prev <= 1'b0;
      q <= '0; o <= '0; s1 <= '0; wbq_wr <= '0; wbq_rd <= '0; h_rvalid <= 1'b0; h_bank_q <= '0;
      for (int c = 0; c < COLS; c++) begin vi_q[c] <= '0; tu_q[c] <= '0; end
      for (int i = 0; i < WBQ; i++) wbq[i] <= '0;
      n_stream_ops <= '0; n_skipped <= '0; n_wb <= '0; n_spikes <= '0;
    end else begin
      s1       <= req;
      h_rvalid <= (st == S_IDLE) && h_re;
      h_bank_q <= h_addr[2:0];
      if (wbq_push) begin wbq[wbq_wr[3:0]] <= wbq_in; wbq_wr <= wbq_wr + 1'b1; end
      if (wbq_pop) begin
        wbq_rd <= wbq_rd + 1'b1;
        if (wbq[wbq_rd[3:0]].en) n_wb <= n_wb + 1;
      end
      if (spk_we && st == S_IDLE) in_spk[{spk_widx, 4'b0000} +: 16] <= spk_data;
      if (lbl_we && st == S_IDLE) lbl <= lbl_data;

      unique case (st)
        S_IDLE: if (run) begin
          flags <= run_flags;
          job   <= next_job(J_NONE, run_flags);
          if (next_job(J_NONE, run_flags) != J_NONE) st <= S_JOB;
        end
        S_JOB: begin
          w <= '0; t <= '0; k <= '0; have_prev <= 1'b0; q <= '0; o <= '0;
          if (job == J_FWD1) hid_spk <= '0;
          if (job == J_FWD2) out_spk <= '0;
          if (job == J_ERR) begin
            err_spk <= '0;
            st <= S_ERR;
          end else if (job == J_MET2) st <= S_PREOV;
          else begin
            if (job == J_MET1)
              for (int i = 0; i < MAXN; i++) pre_over[i] <= itrace[i] >= cfg.pre_thr;
            st <= S_FEED;
          end
        end
        S_PREOV: st <= S_PREOV2;   // read of TU word q issued
        S_PREOV2: begin
          for (int c = 0; c < COLS; c++)
            pre_over[{q[4:0], 3'(c)}] <= b_rdata[c][23:16] >= cfg.pre_thr;
          q <= q + 1'b1;
          st <= (16'({q + 6'd1, 3'b000}) >= nhp) ? S_FEED : S_PREOV;
        end
        S_FEED: begin
          if (16'({w, 4'b0000}) >= n_pre) st <= S_FEEDW;
          else if (enc_ready) begin
            if (job == J_FWD1)
              for (int b = 0; b < 16; b++) itrace[{w[3:0], 4'(b)}] <= itr_new[b];
            n_skipped <= n_skipped + 32'(word_valid_n) - 32'($countones(enc_word));
            w <= w + 1'b1;
          end
        end
        S_FEEDW: if (!enc_busy) st <= S_TILE;
        S_TILE: begin
          k <= 4'd7; have_prev <= 1'b0;
          st <= (kind == K_UPD || kind == K_MET) ? S_LDT : S_STREAM;
        end
        S_LDT: begin
          if (k == 0) begin k <= 4'd7; st <= S_STREAM; end
          else k <= k - 1'b1;
        end
        S_STREAM: begin
          if (fifo_empty) begin
            k  <= 4'd7;
            st <= (kind == K_UPD || kind == K_MET) ? (have_prev ? S_FLUSH : S_WBW) : S_DRAIN;
          end else if (k[3]) begin
            prev_j <= fifo_dout; have_prev <= 1'b1; k <= 4'd7;
            n_stream_ops <= n_stream_ops + 1;
          end else k <= k - 1'b1;
        end
        S_FLUSH: begin
          if (k == 0) st <= S_WBW;
          else k <= k - 1'b1;
        end
        S_WBW: if (wbq_empty && !wbq_push && !s1.valid) begin
          // every shifted-out word written back
          if (t + 1 >= n_tiles) begin
            job <= next_job(job, flags);
            st  <= after_job(job, flags);
          end else begin
            t <= t + 1'b1; st <= S_TILE;
          end
        end
        S_DRAIN: begin
          if (k == 0) st <= S_OBW;
          else k <= k - 1'b1;
        end
        S_OBW: if (ob_full) begin k <= '0; mstep <= '0; st <= S_NEUR; end
        S_NEUR: begin
          if (mstep == 3'd1) for (int c = 0; c < COLS; c++) vi_q[c] <= b_rdata[c];
          if (mstep == 3'd2) for (int c = 0; c < COLS; c++) tu_q[c] <= b_rdata[c];
          if (mstep == 3'd3 && kind == K_FWD)
            for (int c = 0; c < COLS; c++)
              if (col_valid(t, 3'(k), c)) begin
                if (layer2) out_spk[4'({t, 3'(k), 3'(c)})] <= lif_spike[c];
                else        hid_spk[8'({t, 3'(k), 3'(c)})] <= lif_spike[c];
              end
          if (mstep == 3'd3 && kind == K_FWD) n_spikes <= n_spikes + 32'(spk_cnt);
          if (mstep == 3'd4) begin
            mstep <= '0;
            if (k == 7) begin
              if (t + 1 >= n_tiles) begin
                job <= next_job(job, flags);
                st  <= after_job(job, flags);
              end else begin
                t <= t + 1'b1; st <= S_TILE;
              end
            end else k <= k + 1'b1;
          end else mstep <= mstep + 1'b1;
        end
        S_ERR: st <= S_ERRW;
        S_ERRW: if (en_done) begin
          err_spk[{o[2:0], 1'b0}] <= en_fp;
          err_spk[{o[2:0], 1'b1}] <= en_fn;
          if (16'(o) + 1 >= cfg.n_out) begin
            job <= next_job(job, flags);
            st  <= after_job(job, flags);
          end else begin
            o <= o + 1'b1; st <= S_ERR;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) wbq_push |-> (wbq_wr - wbq_rd) < 5'(WBQ))
    else $error("write-back queue overflow");
endmodule
