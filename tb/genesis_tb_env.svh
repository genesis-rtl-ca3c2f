// genesis_tb_env.svh: host-side test environment for the whole accelerator, included into the
// body of a testbench module that first defines the network size as localparams NIN, NHID,
// NOUTN. It holds:
//   - the clock, reset, the chip instance and the host bus tasks (configuration writes, SRAM
//     bursts, spike and label words, run commands);
//   - a model of the two-layer network and of its learning rules, computed from the equations
//     in plain integer arithmetic (tb_ref_pkg), with the same order of saturating additions as
//     an accumulator that adds the active presynaptic neurons in ascending index order;
//   - comparison of every SRAM word the chip uses (synapses {M,W}, neuron states {V,I} and
//     {Theta,T,U}) with the model, including padding words the chip must leave untouched;
//   - counters of the mechanisms that occurred and the expected values of the chip's own
//     activity counters.
// The chip is driven only through its pins; SRAM contents are compared by reading the bank
// arrays hierarchically, which is quicker than reading 100k words back over the bus.

  import genesis_pkg::*;
  import tb_ref_pkg::*;

  // derived sizes: layers are padded to multiples of the 8 array columns, and a layer is
  // processed in tiles of 64 neurons (one per PE)
  localparam int NHP = (NHID + 7) / 8 * 8, NOP = (NOUTN + 7) / 8 * 8;
  localparam int T1 = (NHID + 63) / 64, T2 = (NOUTN + 63) / 64;
  localparam int NW = (NIN + 15) / 16;                   // 16-bit spike words per time step
  localparam int L2_BASE = NIN * NHP;                    // global word address of layer-2 synapses
  localparam int FBG = FB_BASE * 8, VIG = VI_BASE * 8, TUG = TU_BASE * 8;
  localparam logic [31:0] PAD = 32'h5A5A_A5A5;           // content of padding words

  // configuration (variables so that a test may change them between runs)
  int A = 1, B = 2, C = 1, USH = 2, VTH = 96, VREST = 0, RG = 256, IMIN = -300, IMAX = 300;
  int ETA = 1, DSH = 2, TAU = 2, TINC = 20, POST = 30, PRE = 30, MSTEP = 64, ERRTH = 64;

  logic clk = 0, rst_n = 1, start = 0, ready, dout_valid, busy;
  logic [15:0] data_in = 0, data_out;
  logic [31:0] n_stream_ops, n_skipped, n_wb, n_spikes;
  int checks = 0, failures = 0, cyc = 0;

  genesis_top dut (.clk, .rst_n, .start, .ready, .data_in, .data_out, .dout_valid, .busy,
                   .n_stream_ops, .n_skipped, .n_wb, .n_spikes);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  always @(posedge clk) cyc++;

  // ---------------- model state ----------------
  int w1 [NIN][NHID], m1 [NIN][NHID], w2 [NHID][NOUTN], m2 [NHID][NOUTN];
  int wfp [NOUTN][NHID], wfn [NOUTN][NHID];
  int hv [NHID], hi [NHID], ht [NHID], hu [NHID]; bit hth [NHID];
  int ov [NOUTN], oi [NOUTN], ot [NOUTN], ou [NOUTN]; bit oth [NOUTN];
  int it [NIN];
  int ee [NOUTN], evp [NOUTN], evn [NOUTN];
  bit sin [NIN], sh [NHID], so [NOUTN], lab [NOUTN], efp [NOUTN], efn [NOUTN];

  // expected values of the chip's activity counters, and mechanism counters
  longint e_ops = 0, e_skip = 0, e_wb = 0, e_spk = 0;
  int c_skip = 0, c_tiles = 0, c_hspk = 0, c_ospk = 0, c_fp = 0, c_fn = 0, c_th_open = 0;
  int c_th_closed = 0, c_wupd = 0, c_consol = 0, c_mup = 0, c_mdown = 0, c_partial_word = 0;

  int dout_q [$];
  always @(posedge clk) if (dout_valid) dout_q.push_back(int'(data_out));

  // ---------------- host bus ----------------
  task automatic send(input logic [15:0] wd);
    @(negedge clk);
    while (!ready) @(negedge clk);
    start = 1; data_in = wd;
    @(negedge clk); start = 0;
  endtask
  task automatic cfg_wr(input int r, input int v);
    send({CMD_CFG, 12'(r)}); send(16'(v));
  endtask
  // A write burst carries at most 4095 words, so longer regions are cut into bursts of
  // BURST words; mem_word opens a new burst whenever the previous one is used up.
  localparam int BURST = 4000;
  int wr_addr, wr_left, wr_in_burst;
  task automatic mem_burst_begin(input int addr, input int n);
    wr_addr = addr; wr_left = n; wr_in_burst = 0;
  endtask
  task automatic mem_word(input int hi16, input int lo16);
    if (wr_in_burst == 0) begin
      wr_in_burst = (wr_left > BURST) ? BURST : wr_left;
      send({CMD_MWR, 12'(wr_in_burst)}); send(16'(wr_addr >> 16)); send(16'(wr_addr));
    end
    send(16'(hi16)); send(16'(lo16));
    wr_addr++; wr_left--; wr_in_burst--;
  endtask
  task automatic wait_idle();
    @(negedge clk);
    while (busy || !ready) @(negedge clk);
  endtask

  function automatic logic [31:0] bank_word(input int g);
    logic [31:0] r;
    unique case (g % 8)
      0: r = dut.g_bank[0].u_bank.mem[g / 8];
      1: r = dut.g_bank[1].u_bank.mem[g / 8];
      2: r = dut.g_bank[2].u_bank.mem[g / 8];
      3: r = dut.g_bank[3].u_bank.mem[g / 8];
      4: r = dut.g_bank[4].u_bank.mem[g / 8];
      5: r = dut.g_bank[5].u_bank.mem[g / 8];
      6: r = dut.g_bank[6].u_bank.mem[g / 8];
      default: r = dut.g_bank[7].u_bank.mem[g / 8];
    endcase
    return r;
  endfunction

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic expect_true(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int s16(input logic [15:0] x);
    return int'($signed(x));
  endfunction

  // ---------------- configuration and initial network ----------------
  task automatic write_config();
    cfg_wr(0, NIN); cfg_wr(1, NHID); cfg_wr(2, NOUTN);
    cfg_wr(3, (USH << 12) | (C << 8) | (B << 4) | A);
    cfg_wr(4, VTH); cfg_wr(5, VREST); cfg_wr(6, RG); cfg_wr(7, IMIN); cfg_wr(8, IMAX);
    cfg_wr(9, (TAU << 8) | (DSH << 4) | ETA); cfg_wr(10, TINC); cfg_wr(11, (PRE << 8) | POST);
    cfg_wr(12, MSTEP); cfg_wr(13, ERRTH);
  endtask

  task automatic init_network();
    for (int j = 0; j < NIN; j++) for (int h = 0; h < NHID; h++) begin
      w1[j][h] = $urandom_range(0, 80) - 30;
      m1[j][h] = (h % 5 == 0) ? 16000 : $urandom_range(0, 300);  // some synapses consolidated
    end
    for (int j = 0; j < NHID; j++) for (int o = 0; o < NOUTN; o++) begin
      w2[j][o] = $urandom_range(0, 160) - 70; m2[j][o] = $urandom_range(0, 300);
    end
    for (int o = 0; o < NOUTN; o++) for (int h = 0; h < NHID; h++) begin
      wfp[o][h] = $urandom_range(0, 200) - 100; wfn[o][h] = $urandom_range(0, 200) - 100;
    end
    mem_burst_begin(0, NIN * NHP);
    for (int j = 0; j < NIN; j++) for (int h = 0; h < NHP; h++)
      if (h < NHID) mem_word(m1[j][h], w1[j][h]); else mem_word(PAD[31:16], PAD[15:0]);
    mem_burst_begin(L2_BASE, NHID * NOP);
    for (int j = 0; j < NHID; j++) for (int o = 0; o < NOP; o++)
      if (o < NOUTN) mem_word(m2[j][o], w2[j][o]); else mem_word(PAD[31:16], PAD[15:0]);
    mem_burst_begin(FBG, NOUTN * NHP);
    for (int o = 0; o < NOUTN; o++) for (int h = 0; h < NHP; h++)
      if (h < NHID) mem_word(wfp[o][h], wfn[o][h]); else mem_word(0, 0);
    mem_burst_begin(VIG, NHP + NOP);
    for (int n = 0; n < NHP + NOP; n++)
      if (n < NHID || (n >= NHP && n < NHP + NOUTN)) mem_word(0, 0); else mem_word(PAD[31:16], PAD[15:0]);
    mem_burst_begin(TUG, NHP + NOP);
    for (int n = 0; n < NHP + NOP; n++)
      if (n < NHID || (n >= NHP && n < NHP + NOUTN)) mem_word(0, 0); else mem_word(PAD[31:16], PAD[15:0]);
    for (int h = 0; h < NHID; h++) begin hv[h] = 0; hi[h] = 0; ht[h] = 0; hu[h] = 0; hth[h] = 0; end
    for (int o = 0; o < NOUTN; o++) begin
      ov[o] = 0; oi[o] = 0; ot[o] = 0; ou[o] = 0; oth[o] = 0; ee[o] = 0; evp[o] = 0; evn[o] = 0;
    end
    for (int j = 0; j < NIN; j++) it[j] = 0;
  endtask

  // ---------------- reference model of one time step ----------------
  task automatic model_forward();
    int acc;
    bit sp;
    for (int j = 0; j < NIN; j++) it[j] = ref_trace(it[j], sin[j], TAU, TINC);
    for (int h = 0; h < NHID; h++) begin
      acc = 0;
      for (int j = 0; j < NIN; j++) if (sin[j]) acc = sat(longint'(acc) + w1[j][h]);
      ref_lif(hv[h], hi[h], acc, A, B, C, VTH, VREST, hv[h], hi[h], sp);
      sh[h] = sp; ht[h] = ref_trace(ht[h], sp, TAU, TINC);
      c_hspk += sp;
    end
    for (int o = 0; o < NOUTN; o++) begin
      acc = 0;
      for (int j = 0; j < NHID; j++) if (sh[j]) acc = sat(longint'(acc) + w2[j][o]);
      ref_lif(ov[o], oi[o], acc, A, B, C, VTH, VREST, ov[o], oi[o], sp);
      so[o] = sp; ot[o] = ref_trace(ot[o], sp, TAU, TINC);
      c_ospk += sp;
    end
    for (int j = 0; j < NIN; j++) c_skip += !sin[j];
    c_tiles += T1 + T2;
  endtask

  task automatic model_backward();
    int acc, d, ep, vpn, vnn;
    for (int o = 0; o < NOUTN; o++) begin
      d  = (so[o] == lab[o]) ? 0 : (so[o] ? 256 : -256);
      ep = sat(longint'(ee[o]) + fdiv(longint'(d) - ee[o], A));
      vpn = sat(longint'(evp[o]) + fdiv(longint'(VREST) - evp[o], B) + fdiv(ep, C));
      vnn = sat(longint'(evn[o]) + fdiv(longint'(VREST) - evn[o], B) - fdiv(ep, C));
      efp[o] = vpn >= ERRTH; efn[o] = vnn >= ERRTH;
      ee[o] = ep; evp[o] = efp[o] ? VREST : vpn; evn[o] = efn[o] ? VREST : vnn;
      c_fp += efp[o]; c_fn += efn[o];
    end
    for (int o = 0; o < NOUTN; o++) begin
      acc = 0;
      if (efp[o]) acc = sat(longint'(acc) + 256);
      if (efn[o]) acc = sat(longint'(acc) - 256);
      ou[o] = ref_dend(ou[o], acc, RG, USH);
      oth[o] = (oi[o] > IMIN) && (oi[o] < IMAX);
    end
    for (int h = 0; h < NHID; h++) begin
      acc = 0;
      for (int o = 0; o < NOUTN; o++) begin
        if (efp[o]) acc = sat(longint'(acc) + wfp[o][h]);
        if (efn[o]) acc = sat(longint'(acc) - wfn[o][h]);
      end
      hu[h] = ref_dend(hu[h], acc, RG, USH);
      hth[h] = (hi[h] > IMIN) && (hi[h] < IMAX);
      if (hth[h]) c_th_open++; else c_th_closed++;
    end
  endtask

  task automatic model_update();
    int nw, ue;
    for (int j = 0; j < NHID; j++) if (sh[j])
      for (int o = 0; o < NOUTN; o++) begin
        ue = oth[o] ? ou[o] : 0;
        nw = ref_meta(w2[j][o], m2[j][o], ue, DSH, ETA);
        if (nw != w2[j][o]) c_wupd++;
        if (ue != 0 && ref_f(w2[j][o], m2[j][o], DSH) == 0) c_consol++;
        w2[j][o] = nw;
      end
    for (int j = 0; j < NIN; j++) if (sin[j])
      for (int h = 0; h < NHID; h++) begin
        ue = hth[h] ? hu[h] : 0;
        nw = ref_meta(w1[j][h], m1[j][h], ue, DSH, ETA);
        if (nw != w1[j][h]) c_wupd++;
        if (ue != 0 && ref_f(w1[j][h], m1[j][h], DSH) == 0) c_consol++;
        w1[j][h] = nw;
      end
  endtask

  function automatic int m_next(input int m, input bit post, input bit pre);
    int r;
    r = m + (post ? MSTEP : 0) - (pre ? MSTEP : 0);
    if (r < 0) r = 0;
    if (r > 32767) r = 32767;
    return r;
  endfunction

  task automatic model_meta();
    for (int j = 0; j < NHID; j++)
      for (int o = 0; o < NOUTN; o++) begin
        if (ot[o] >= POST) c_mup++;
        if (ht[j] >= PRE) c_mdown++;
        m2[j][o] = m_next(m2[j][o], ot[o] >= POST, ht[j] >= PRE);
      end
    for (int j = 0; j < NIN; j++)
      for (int h = 0; h < NHID; h++) begin
        if (ht[h] >= POST) c_mup++;
        if (it[j] >= PRE) c_mdown++;
        m1[j][h] = m_next(m1[j][h], ht[h] >= POST, it[j] >= PRE);
      end
  endtask

  // Expected activity counters of one run. Each active presynaptic neuron is streamed once per
  // tile of 64 postsynaptic neurons; inactive ones are skipped; every streamed neuron of an
  // update or metaplasticity pass writes back one 8-synapse word per array row.
  task automatic tally_counters(input logic [3:0] fl);
    int a_in, a_h, a_e, a_o;
    a_in = 0; a_h = 0; a_e = 0; a_o = 0;
    foreach (sin[j]) a_in += sin[j];
    foreach (sh[j])  a_h  += sh[j];
    foreach (so[j])  a_o  += so[j];
    foreach (efp[j]) a_e  += efp[j] + efn[j];
    if (fl[0]) begin
      e_ops  += T1 * a_in + T2 * a_h;
      e_skip += (NIN - a_in) + (NHID - a_h);
      e_spk  += a_h + a_o;
    end
    if (fl[1]) begin
      e_ops  += T2 * a_e + T1 * a_e;
      e_skip += 2 * (2 * NOUTN - a_e);
    end
    if (fl[2]) begin
      e_ops  += T2 * a_h + T1 * a_in;
      e_skip += (NIN - a_in) + (NHID - a_h);
      e_wb   += 8 * (T2 * a_h + T1 * a_in);
    end
    if (fl[3]) begin
      e_ops  += T2 * NHID + T1 * NIN;
      e_wb   += 8 * (T2 * NHID + T1 * NIN);
    end
  endtask

  // ---------------- comparison of the chip state with the model ----------------
  task automatic compare_state(input string tag);
    logic [31:0] x;
    for (int h = 0; h < NHP; h++) begin
      if (h >= NHID) begin
        expect_eq({tag, " padding VI"}, int'(bank_word(VIG + h)), int'(PAD));
        expect_eq({tag, " padding TU"}, int'(bank_word(TUG + h)), int'(PAD));
        continue;
      end
      x = bank_word(VIG + h);
      expect_eq({tag, " hidden V"}, s16(x[31:16]), hv[h]);
      expect_eq({tag, " hidden I"}, s16(x[15:0]), hi[h]);
      x = bank_word(TUG + h);
      expect_eq({tag, " hidden T"}, int'(x[23:16]), ht[h]);
      expect_eq({tag, " hidden U"}, s16(x[15:0]), hu[h]);
      expect_eq({tag, " hidden Theta"}, int'(x[31]), int'(hth[h]));
    end
    for (int o = 0; o < NOP; o++) begin
      if (o >= NOUTN) begin
        expect_eq({tag, " padding VI"}, int'(bank_word(VIG + NHP + o)), int'(PAD));
        expect_eq({tag, " padding TU"}, int'(bank_word(TUG + NHP + o)), int'(PAD));
        continue;
      end
      x = bank_word(VIG + NHP + o);
      expect_eq({tag, " out V"}, s16(x[31:16]), ov[o]);
      expect_eq({tag, " out I"}, s16(x[15:0]), oi[o]);
      x = bank_word(TUG + NHP + o);
      expect_eq({tag, " out T"}, int'(x[23:16]), ot[o]);
      expect_eq({tag, " out U"}, s16(x[15:0]), ou[o]);
      expect_eq({tag, " out Theta"}, int'(x[31]), int'(oth[o]));
    end
    for (int j = 0; j < NIN; j++)
      for (int h = 0; h < NHP; h++) begin
        x = bank_word(j * NHP + h);
        if (h >= NHID) expect_eq({tag, " padding W1"}, int'(x), int'(PAD));
        else begin
          expect_eq({tag, " W1"}, s16(x[15:0]), w1[j][h]);
          expect_eq({tag, " M1"}, s16(x[31:16]), m1[j][h]);
        end
      end
    for (int j = 0; j < NHID; j++)
      for (int o = 0; o < NOP; o++) begin
        x = bank_word(L2_BASE + j * NOP + o);
        if (o >= NOUTN) expect_eq({tag, " padding W2"}, int'(x), int'(PAD));
        else begin
          expect_eq({tag, " W2"}, s16(x[15:0]), w2[j][o]);
          expect_eq({tag, " M2"}, s16(x[31:16]), m2[j][o]);
        end
      end
  endtask

  // ---------------- one time step: spikes and labels in, run, compare ----------------
  // density: probability of an input spike in 1/256; returns the cycles from the run command
  // to the end of the run.
  // With use_fixed set, the spikes are taken from fixed_pat instead; with use_label set, the
  // label spikes are taken from fixed_lbl instead of being drawn at random.
  bit use_fixed = 0, use_label = 0;
  logic [NW*16-1:0] fixed_pat;
  logic [15:0] fixed_lbl = '0;
  task automatic time_step(input logic [3:0] fl, input int density, output int cycles);
    logic [15:0] wd;
    logic [15:0] lw;
    int t0;
    send({CMD_SPK, 12'(NW)});
    for (int k = 0; k < NW; k++) begin
      for (int b = 0; b < 16; b++) wd[b] = ($urandom_range(0, 255) < density);
      if (k == 3) wd = '0;                              // one word without any spike
      if (use_fixed) wd = fixed_pat[k * 16 +: 16];
      for (int b = 0; b < 16; b++)
        if (k * 16 + b < NIN) sin[k * 16 + b] = wd[b];
        else if (wd[b]) c_partial_word++;                 // bits beyond the layer are ignored
      send(wd);
    end
    lw = '0;
    for (int o = 0; o < NOUTN; o++) begin
      lab[o] = use_label ? fixed_lbl[o] : 1'($urandom_range(0, 1));
      lw[o] = lab[o];
    end
    send({CMD_LBL, 12'd0}); send(lw);
    t0 = cyc;
    send({CMD_RUN, 8'd0, fl});
    wait_idle();
    cycles = cyc - t0;
    if (fl[0]) model_forward();
    if (fl[1]) model_backward();
    if (fl[2]) model_update();
    if (fl[3]) model_meta();
    tally_counters(fl);
    if (fl[0]) begin
      send({CMD_OUT, 12'd0});
      repeat (4) @(negedge clk);
      lw = '0;
      for (int o = 0; o < NOUTN; o++) lw[o] = so[o];
      expect_eq("output spikes", dout_q.pop_front(), int'(lw));
    end
    compare_state($sformatf("t=%0d", cyc));
  endtask

  task automatic check_counters();
    expect_eq("streamed presynaptic neurons", int'(n_stream_ops), int'(e_ops));
    expect_eq("skipped presynaptic neurons", int'(n_skipped), int'(e_skip));
    expect_eq("synapse words written back", int'(n_wb), int'(e_wb));
    expect_eq("neuron spikes", int'(n_spikes), int'(e_spk));
  endtask

  task automatic check_mechanisms();
    $display("mechanisms: skipped=%0d tiles=%0d hidden_spikes=%0d out_spikes=%0d fp=%0d fn=%0d theta_open=%0d theta_closed=%0d w_updates=%0d consolidated=%0d m_up=%0d m_down=%0d written_back=%0d",
             c_skip, c_tiles, c_hspk, c_ospk, c_fp, c_fn, c_th_open, c_th_closed, c_wupd,
             c_consol, c_mup, c_mdown, n_wb);
    expect_true("no inactive input skipped", c_skip > 0);
    expect_true("no layer with several tiles", c_tiles > 2);
    expect_true("no hidden spike", c_hspk > 0);
    expect_true("no output spike", c_ospk > 0);
    expect_true("no false-positive error spike", c_fp > 0);
    expect_true("no false-negative error spike", c_fn > 0);
    expect_true("boxcar never open", c_th_open > 0);
    expect_true("boxcar never closed", c_th_closed > 0);
    expect_true("no weight update", c_wupd > 0);
    expect_true("no consolidated synapse", c_consol > 0);
    expect_true("metaplasticity never strengthened", c_mup > 0);
    expect_true("metaplasticity never weakened", c_mdown > 0);
    expect_true("no synapse written back", n_wb > 0);
  endtask

  task automatic reset_and_setup();
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_config();
    init_network();
  endtask
