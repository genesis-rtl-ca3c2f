// genesis_top: Genesis spiking continual-learning accelerator, top level.
//
// A two-layer spiking network is trained on chip with surrogate-gradient error feedback and
// activity-dependent metaplasticity. The chip holds an 8x8 systolic array of processing
// elements, eight LIF neuron units below its columns, the output buffers with their phase
// multiplexers, the error-encoding neurons, an address encoder and FIFO that turn spike trains
// into active-neuron indices, eight low-order-interleaved SRAM banks whose 32-bit words pair
// each weight with its metaplasticity parameter, the configuration buffers, the control unit
// and the host interface (16-bit full-duplex bus).
//
// The host processor is off chip: its bus (start/ready/data_in/data_out/dout_valid) is the top's
// port list. The activity counters of the control unit are brought out for observation.
//
// Timing: everything runs on clk (10 MHz in the fabricated chip) with an asynchronous
// active-low reset. The host moves one 16-bit word per cycle while ready is high; busy is high
// while the control unit runs the phases of a run command, during which the bus is not served.
// The set of blocks and how they connect follow the paper's architecture overview; the reset,
// dout_valid, busy and counter ports and the NOUT limit of the error-neuron table are this
// design's choices.
module genesis_top
  import genesis_pkg::*;
#(
  parameter int NOUT = 8     // output neurons the error-neuron block can hold
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        ready,
  input  logic [15:0] data_in,
  output logic [15:0] data_out,
  output logic        dout_valid,
  output logic        busy,
  output logic [31:0] n_stream_ops,
  output logic [31:0] n_skipped,
  output logic [31:0] n_wb,
  output logic [31:0] n_spikes
);
  cfg_t cfg;

  // host interface <-> control / configuration
  logic            cfg_we;
  logic [3:0]      cfg_addr;
  logic [15:0]     cfg_data, cfg_rdata;
  logic            h_we, h_re, h_rvalid;
  logic [GAW-1:0]  h_addr;
  logic [31:0]     h_wdata, h_rdata;
  logic            spk_we, lbl_we, run;
  logic [3:0]      spk_widx, run_flags;
  logic [15:0]     spk_data, lbl_data, out_spikes;

  host_interface u_if (
    .clk, .rst_n, .start, .ready, .data_in, .data_out, .dout_valid,
    .cfg_we, .cfg_addr, .cfg_data,
    .mem_we(h_we), .mem_re(h_re), .mem_addr(h_addr), .mem_wdata(h_wdata),
    .mem_rvalid(h_rvalid), .mem_rdata(h_rdata),
    .spk_we, .spk_widx, .spk_data, .lbl_we, .lbl_data, .run, .run_flags,
    .busy, .out_spikes
  );

  config_regs u_cfg (
    .clk, .rst_n, .we(cfg_we), .waddr(cfg_addr), .wdata(cfg_data),
    .raddr(cfg_addr), .rdata(cfg_rdata), .cfg
  );

  // SRAM banks
  logic            b_re;
  logic [LAW-1:0]  b_raddr, b_waddr;
  logic [31:0]     b_rdata [NBANKS];
  logic            b_we    [NBANKS];
  logic [31:0]     b_wdata [NBANKS];

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    sram_bank #(.DEPTH(BANK_DEPTH), .AW(LAW)) u_bank (
      .clk, .re(b_re), .raddr(b_raddr), .rdata(b_rdata[b]),
      .we(b_we[b]), .waddr(b_waddr), .wdata(b_wdata[b])
    );
  end

  // address encoder and FIFO
  logic            enc_valid, enc_ready, enc_busy, enc_push;
  logic [15:0]     enc_word;
  logic [11:0]     enc_widx;
  logic [IDXW-1:0] enc_idx, fifo_dout;
  logic            fifo_clr, fifo_rewind, fifo_pop, fifo_empty, fifo_full;
  logic [8:0]      fifo_count;

  address_encoder #(.WORD(16)) u_enc (
    .clk, .rst_n, .in_valid(enc_valid), .in_ready(enc_ready), .in_word(enc_word),
    .in_widx(enc_widx), .fifo_full, .out_push(enc_push), .out_idx(enc_idx), .busy(enc_busy)
  );

  spike_fifo #(.DEPTH(MAXN), .W(IDXW)) u_fifo (
    .clk, .rst_n, .clr(fifo_clr), .rewind(fifo_rewind), .push(enc_push), .din(enc_idx),
    .pop(fifo_pop), .dout(fifo_dout), .empty(fifo_empty), .full(fifo_full), .count(fifo_count)
  );

  // PE array
  pe_instr_t          top_op, bot_op;
  logic signed [15:0] top_a [COLS];
  logic signed [15:0] top_b [COLS];
  logic signed [15:0] bot_a [COLS];
  logic signed [15:0] bot_b [COLS];
  logic signed [15:0] acc_mon [ROWS][COLS];

  pe_array #(.NR(ROWS), .NC(COLS)) u_array (
    .clk, .rst_n, .cfg, .top_op, .top_a, .top_b, .bot_op, .bot_a, .bot_b, .acc_o(acc_mon)
  );

  // output buffers and neuron units
  logic               ob_clr, ob_full, ob_phase;
  logic [2:0]         ob_rd_row;
  logic signed [15:0] ob_rd_data [COLS];
  logic [31:0]        ob_lif_word [COLS];
  logic [31:0]        ob_wb_word  [COLS];
  logic               lif_bwd;
  logic [31:0]        lif_vi [COLS];
  logic [31:0]        lif_tu [COLS];
  logic [31:0]        lif_vi_out [COLS];
  logic [31:0]        lif_tu_out [COLS];
  logic               lif_spike [COLS];

  output_buffer #(.NR(ROWS), .NC(COLS)) u_obuf (
    .clk, .rst_n, .clr(ob_clr), .bot_op, .bot_a, .bot_b, .rd_row(ob_rd_row),
    .rd_data(ob_rd_data), .full(ob_full), .phase(ob_phase), .lif_word(ob_lif_word),
    .wb_word(ob_wb_word)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_lif
    lif_unit u_lif (
      .cfg, .bwd(lif_bwd), .acc_in(ob_rd_data[c]), .vi_in(lif_vi[c]), .tu_in(lif_tu[c]),
      .vi_out(lif_vi_out[c]), .tu_out(lif_tu_out[c]), .spike(lif_spike[c])
    );
  end

  // error neurons
  logic                    en_clr, en_step, en_sout, en_slabel, en_fp, en_fn, en_done;
  logic [$clog2(NOUT)-1:0] en_idx;

  error_neuron #(.NOUT(NOUT)) u_err (
    .clk, .rst_n, .cfg, .clr(en_clr), .step(en_step), .idx(en_idx), .s_out(en_sout),
    .s_label(en_slabel), .fp(en_fp), .fn(en_fn), .done(en_done)
  );

  control_unit #(.NOUT(NOUT)) u_ctrl (
    .clk, .rst_n, .cfg,
    .run, .run_flags, .busy, .spk_we, .spk_widx, .spk_data, .lbl_we, .lbl_data, .out_spikes,
    .h_we, .h_re, .h_addr, .h_wdata, .h_rvalid, .h_rdata,
    .b_re, .b_raddr, .b_rdata, .b_we, .b_waddr, .b_wdata,
    .enc_valid, .enc_ready, .enc_word, .enc_widx, .enc_busy,
    .fifo_clr, .fifo_rewind, .fifo_pop, .fifo_dout, .fifo_empty,
    .top_op, .top_a, .top_b, .bot_op,
    .ob_clr, .ob_rd_row, .ob_full, .ob_phase, .ob_lif_word, .ob_wb_word,
    .lif_bwd, .lif_vi, .lif_tu, .lif_vi_out, .lif_tu_out, .lif_spike,
    .en_clr, .en_step, .en_idx, .en_sout, .en_slabel, .en_fp, .en_fn, .en_done,
    .n_stream_ops, .n_skipped, .n_wb, .n_spikes
  );
endmodule
