// bishop_top: the Bishop heterogeneous spiking-transformer accelerator. Spike data are
// held as token-time bundles (TTBs): BS_N tokens x BS_T time points of one feature. A
// tile covers NB = 16 bundles and NF = 32 output features. Two tile operations exist:
//
//  OP_PROJ (MLP / linear projection layer, one time bundle of 16 token bundles):
//   1. stratify: every input feature word is read from the spike GLB; the stratifier
//      counts its active bundles and files the feature as dense (> theta_s) or sparse.
//   2. integrate: the dense core streams the dense features (spike word + weight row,
//      one per cycle) through its 32x16 output-stationary array while, at the same time,
//      the sparse core takes the sparse features and processes only their active bundles.
//   3. fire: the spike generator adds the two partial sums of each neuron-time (sparse-
//      dense addition) and runs the LIF update, BV steps of 512 neurons.
//   4. write back: 32 output-feature words go to the other spike GLB bank (ping-pong).
//  OP_ATTN (one head, 16 Q bundles against 32 key tokens):
//   1. ECP: Q and K are read once; Q rows and K tokens with fewer active bundles than
//      theta_q / theta_k are pruned.
//   2. mode 1: Q and K stream through the attention array, S = Q AND K accumulates.
//   3. mode 2: V (32 features) streams through; Y leaves the rows into the Y buffer
//      (overwritten, or added when y_accum for further key tiles).
//   4. if y_fire: Y >> y_shift goes through the spike generator and is written back.
//
// Interface: the DRAM side is outside this design: ld_* ports write the weight GLB and
// either spike GLB bank, rd_* reads a spike GLB word (one cycle latency, only while idle).
// cmd is taken when cmd_valid && cmd_ready (idle); done pulses when the tile is finished.
// st_* are event counters of the last tile for performance monitoring.
// From the paper: the block set and connections of its architecture figure (GLBs, dense,
// sparse and attention cores, stratifier with feature index buffer, spike generator with
// sparse-dense addition, Y buffer with shifter, ECP). Own choices: the tile sizes and GLB
// word layout, the command format and the sequencing (in particular, the attention and
// projection tiles run one at a time, and the membrane state survives only from one tile
// to the next, so tiles of the same neurons must follow each other in time order).
module bishop_top
  import bishop_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // DRAM side
  input  logic                 ld_wgt_we,
  input  logic [WA_W-1:0]      ld_wgt_addr,
  input  logic [WGT_WORD-1:0]  ld_wgt_data,
  input  logic                 ld_spk_we,
  input  logic                 ld_spk_bank,
  input  logic [SA_W-1:0]      ld_spk_addr,
  input  logic [SPK_WORD-1:0]  ld_spk_data,
  input  logic                 rd_spk_re,
  input  logic                 rd_spk_bank,
  input  logic [SA_W-1:0]      rd_spk_addr,
  output logic [SPK_WORD-1:0]  rd_spk_data,
  // command
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  cmd_t                 cmd,
  output logic                 done,
  // statistics of the last tile
  output logic [DI_W:0]        st_n_dense,
  output logic [DI_W:0]        st_n_sparse,
  output logic [15:0]          st_skipped,
  output logic [NB-1:0]        st_q_keep,
  output logic [NK-1:0]        st_k_keep,
  output logic [15:0]          st_spikes,
  output logic [31:0]          st_cycles
);
  typedef enum logic [3:0] {
    S_IDLE, S_STRAT, S_STRAT_W, S_CORE, S_SG, S_SG_W, S_WB,
    S_ECP, S_ECP_W, S_M1, S_M1_W, S_M2, S_M2_W
  } state_e;

  state_e state;
  cmd_t   c;
  logic [DI_W:0] d;          // feature counter
  logic [DI_W:0] pd, ps;     // dense / sparse list pointers
  logic [$clog2(BV+1)-1:0] k;
  logic start;

  // ---------------------------------------------------------------- memories
  logic                spk_we, spk_wbank, spk_rbank;
  logic [SA_W-1:0]     spk_waddr, spk_ra, spk_rb;
  logic [SPK_WORD-1:0] spk_wdata, spk_qa, spk_qb;
  logic                spk_rea, spk_reb;
  logic [WA_W-1:0]     wgt_ra, wgt_rb;
  logic [WGT_WORD-1:0] wgt_qa, wgt_qb;
  logic                wgt_rea, wgt_reb;

  weight_glb u_wglb (
    .clk, .we(ld_wgt_we), .waddr(ld_wgt_addr), .wdata(ld_wgt_data),
    .re_a(wgt_rea), .raddr_a(wgt_ra), .rdata_a(wgt_qa),
    .re_b(wgt_reb), .raddr_b(wgt_rb), .rdata_b(wgt_qb)
  );

  spike_glb u_sglb (
    .clk, .we(spk_we), .wr_bank(spk_wbank), .waddr(spk_waddr), .wdata(spk_wdata),
    .rd_bank(spk_rbank),
    .re_a(spk_rea), .raddr_a(spk_ra), .rdata_a(spk_qa),
    .re_b(spk_reb), .raddr_b(spk_rb), .rdata_b(spk_qb)
  );
  assign rd_spk_data = spk_qa;

  // word unpacking helpers
  bundle_t         a_bun [NB];     // port A word as NB bundles
  bundle_t         b_bun [NB];     // port B word as NB bundles
  logic [BS_T-1:0] b_tok [NK];     // port B word as NK key/value tokens
  weight_t         wa_w  [NF];
  weight_t         wb_w  [NF];
  always_comb begin
    for (int j = 0; j < NB; j++) begin
      a_bun[j] = spk_qa[j*BV +: BV];
      b_bun[j] = spk_qb[j*BV +: BV];
    end
    for (int j = 0; j < NK; j++) b_tok[j] = spk_qb[j*BS_T +: BS_T];
    for (int f = 0; f < NF; f++) begin
      wa_w[f] = wgt_qa[(int'(c.w_half)*NF + f)*W_W +: W_W];
      wb_w[f] = wgt_qb[(int'(c.w_half)*NF + f)*W_W +: W_W];
    end
  end

  // ---------------------------------------------------------------- stratifier
  logic           st_in_v;
  logic [DI_W-1:0] st_in_f;
  logic [DI_W-1:0] dense_feat, sparse_feat;
  logic [DI_W:0]  n_dense, n_sparse;

  stratifier u_strat (
    .clk, .rst_n, .clr(start),
    .in_valid(st_in_v), .in_feat(st_in_f), .in_word(spk_qa), .theta_s(c.theta_s),
    .n_dense, .n_sparse,
    .dense_rd_idx(pd[DI_W-1:0]), .dense_feat,
    .sparse_rd_idx(ps[DI_W-1:0]), .sparse_feat
  );

  // ---------------------------------------------------------------- dense core
  logic dc_in_v, dc_busy;
  acc_t dc_acc [NF][NB][BV];
  dense_core u_dense (
    .clk, .rst_n, .clr(start), .in_valid(dc_in_v), .in_spk(a_bun), .in_w(wa_w),
    .busy(dc_busy), .acc(dc_acc)
  );

  // ---------------------------------------------------------------- sparse core
  logic    sl_pend, sl_hold_v, sl_v, sc_ready, sc_idle, sc_acc_ok;
  bundle_t sl_hold_s [NB];
  weight_t sl_hold_w [NF];
  bundle_t sl_s [NB];
  weight_t sl_w [NF];
  acc_t    sc_acc [NB][NF][BV];
  logic [15:0] sc_skipped;

  assign sl_v = sl_pend || sl_hold_v;
  assign sl_s = sl_hold_v ? sl_hold_s : b_bun;
  assign sl_w = sl_hold_v ? sl_hold_w : wb_w;
  assign sc_acc_ok = sl_v && sc_ready;

  sparse_core u_sparse (
    .clk, .rst_n, .clr(start), .in_valid(sl_v), .in_ready(sc_ready),
    .in_spk(sl_s), .in_w(sl_w), .idle(sc_idle), .n_skipped(sc_skipped), .acc(sc_acc)
  );

  // ---------------------------------------------------------------- ECP + attention
  logic            ecp_in_v;
  logic [NB-1:0]   q_keep;
  logic [NK-1:0]   k_keep;
  ecp_filter u_ecp (
    .clk, .rst_n, .clr(start), .in_valid(ecp_in_v), .q_bun(a_bun), .k_tok(b_tok),
    .theta_q(c.theta_q), .theta_k(c.theta_k), .q_keep, .k_keep
  );

  attn_mode_e      amode;
  logic            ac_in_v, ac_busy;
  logic            ac_y_v [NB];
  logic [Y_W-1:0]  ac_y   [NB][BV];
  logic [S_W-1:0]  ac_s   [NB][NK][BV];
  attn_core u_attn (
    .clk, .rst_n, .clr(start), .mode(amode), .in_valid(ac_in_v),
    .in_q(a_bun), .in_kv(b_tok), .q_keep, .k_keep,
    .y_valid(ac_y_v), .y_out(ac_y), .s(ac_s), .busy(ac_busy)
  );

  logic           yb_start;
  logic [Y_W-1:0] y_scaled [NB][NF][BV];
  y_buffer u_ybuf (
    .clk, .rst_n, .start(yb_start), .accum(c.y_accum), .y_valid(ac_y_v), .y_in(ac_y),
    .shift(c.y_shift), .y_scaled
  );

  // ---------------------------------------------------------------- spike generator
  logic                    sg_in_v, sg_out_v;
  logic [$clog2(BS_N)-1:0] sg_slot;
  logic                    sg_init;
  acc_t                    sg_a [NB*NF];
  acc_t                    sg_b [NB*NF];
  logic [NB*NF-1:0]        sg_spk;
  logic [$clog2(BV+1)-1:0] k_d;
  bundle_t                 out_spk [NB][NF];

  always_comb begin
    for (int j = 0; j < NB; j++)
      for (int f = 0; f < NF; f++) begin
        if (c.op == OP_PROJ) begin
          sg_a[j*NF+f] = dc_acc[f][j][k[$clog2(BV)-1:0]];
          sg_b[j*NF+f] = sc_acc[j][f][k[$clog2(BV)-1:0]];
        end else begin
          sg_a[j*NF+f] = ACC_W'(y_scaled[j][f][k[$clog2(BV)-1:0]]);
          sg_b[j*NF+f] = '0;
        end
      end
  end
  assign sg_in_v = (state == S_SG);
  assign sg_slot = ($clog2(BS_N))'(k % BS_N);
  assign sg_init = c.vm_init && (32'(k) < BS_N);

  spike_gen u_sg (
    .clk, .rst_n, .in_valid(sg_in_v), .init(sg_init), .slot(sg_slot),
    .cur_a(sg_a), .cur_b(sg_b), .v_th(c.v_th), .v_leak(c.v_leak),
    .out_valid(sg_out_v), .spikes(sg_spk)
  );

  logic [$clog2(NB*NF+1)-1:0] spk_pop;
  always_comb begin
    spk_pop = '0;
    for (int p = 0; p < NB*NF; p++) spk_pop += ($clog2(NB*NF+1))'(sg_spk[p]);
  end

  // ---------------------------------------------------------------- read issue / return
  logic rdA_v, rdB_v;        // a controller read is returning this cycle
  logic rdW_v;               // a dense-core fetch is returning this cycle
  logic sp_issue;
  logic ac_phase;            // returning port-B reads feed the attention array

  assign cmd_ready = (state == S_IDLE);
  assign start     = cmd_valid && cmd_ready;

  always_comb begin
    spk_rea = 1'b0; spk_ra = rd_spk_addr;
    spk_reb = 1'b0; spk_rb = '0;
    wgt_rea = 1'b0; wgt_ra = '0;
    wgt_reb = 1'b0; wgt_rb = '0;
    spk_rbank = (state == S_IDLE) ? rd_spk_bank : c.src_bank;
    sp_issue = 1'b0;
    case (state)
      S_IDLE: spk_rea = rd_spk_re;
      S_STRAT: begin
        spk_rea = 1'b1; spk_ra = c.in_base + SA_W'(d);
      end
      S_CORE: begin
        if (pd < n_dense) begin
          spk_rea = 1'b1; spk_ra = c.in_base + SA_W'(dense_feat);
          wgt_rea = 1'b1; wgt_ra = c.w_base + WA_W'(dense_feat);
        end
        if (ps < n_sparse && (!sl_v || sc_acc_ok)) begin
          sp_issue = 1'b1;
          spk_reb = 1'b1; spk_rb = c.in_base + SA_W'(sparse_feat);
          wgt_reb = 1'b1; wgt_rb = c.w_base + WA_W'(sparse_feat);
        end
      end
      S_ECP, S_M1: begin
        spk_rea = 1'b1; spk_ra = c.in_base + SA_W'(d);
        spk_reb = 1'b1; spk_rb = c.k_base + SA_W'(d);
      end
      S_M2: begin
        spk_reb = 1'b1; spk_rb = c.v_base + SA_W'(d);
      end
      default: ;
    endcase
  end

  assign st_in_v  = rdA_v && (c.op == OP_PROJ) && !rdW_v;
  assign dc_in_v  = rdW_v;
  assign ecp_in_v = rdA_v && (c.op == OP_ATTN) && (amode == MODE_S) && !ac_phase;
  assign ac_in_v  = rdB_v && ac_phase;

  logic [DI_W-1:0] st_f_q;
  assign st_in_f = st_f_q;

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; d <= '0; pd <= '0; ps <= '0; k <= '0; k_d <= '0;
      rdA_v <= 1'b0; rdB_v <= 1'b0; rdW_v <= 1'b0; st_f_q <= '0;
      sl_pend <= 1'b0; sl_hold_v <= 1'b0;
      for (int j = 0; j < NB; j++) sl_hold_s[j] <= '0;
      for (int f = 0; f < NF; f++) sl_hold_w[f] <= '0;
      amode <= MODE_S; ac_phase <= 1'b0; yb_start <= 1'b0; done <= 1'b0;
      spk_we <= 1'b0; spk_wbank <= 1'b0; spk_waddr <= '0; spk_wdata <= '0;
      for (int j = 0; j < NB; j++) for (int f = 0; f < NF; f++) out_spk[j][f] <= '0;
      st_spikes <= '0; st_cycles <= '0;
    end else begin
      done     <= 1'b0;
      yb_start <= 1'b0;
      rdA_v    <= 1'b0;
      rdB_v    <= 1'b0;
      rdW_v    <= 1'b0;
      // DRAM-side loads while idle, write-back otherwise
      spk_we    <= (state == S_IDLE) && ld_spk_we;
      spk_wbank <= ld_spk_bank;
      spk_waddr <= ld_spk_addr;
      spk_wdata <= ld_spk_data;
      if (state != S_IDLE) st_cycles <= st_cycles + 1'b1;

      // spike generator output capture
      k_d <= k;
      if (sg_out_v) begin
        for (int j = 0; j < NB; j++)
          for (int f = 0; f < NF; f++) out_spk[j][f][k_d[$clog2(BV)-1:0]] <= sg_spk[j*NF+f];
        st_spikes <= st_spikes + 16'(spk_pop);
      end

      // sparse-core feed slot: read data waits in the hold register if not accepted
      if (state == S_CORE) begin
        sl_pend <= sp_issue;
        if (sp_issue) begin
          ps <= ps + 1'b1;
          sl_hold_v <= 1'b0;
        end else if (sl_v && !sc_ready) begin
          sl_hold_v <= 1'b1;
          if (!sl_hold_v) begin sl_hold_s <= b_bun; sl_hold_w <= wb_w; end
        end else begin
          sl_hold_v <= 1'b0;
        end
      end

      case (state)
        S_IDLE: if (start) begin
          c <= cmd; d <= '0; pd <= '0; ps <= '0; k <= '0;
          sl_pend <= 1'b0; sl_hold_v <= 1'b0;
          st_spikes <= '0; st_cycles <= '0;
          amode <= MODE_S; ac_phase <= 1'b0;
          state <= (cmd.op == OP_PROJ) ? S_STRAT : S_ECP;
        end
        // ---- projection tile
        S_STRAT: begin
          rdA_v <= 1'b1; st_f_q <= d[DI_W-1:0];
          d <= d + 1'b1;
          if (d + 1'b1 >= c.n_feat) state <= S_STRAT_W;
        end
        S_STRAT_W: if (!rdA_v) state <= S_CORE;
        S_CORE: begin
          if (pd < n_dense) begin pd <= pd + 1'b1; rdW_v <= 1'b1; end
          if (pd >= n_dense && !rdW_v && !dc_busy &&
              ps >= n_sparse && !sl_v && sc_idle && !sp_issue) begin
            state <= S_SG; k <= '0;
          end
        end
        S_SG: begin
          k <= k + 1'b1;
          if (k == ($clog2(BV+1))'(BV - 1)) state <= S_SG_W;
        end
        S_SG_W: if (!sg_out_v) begin state <= S_WB; d <= '0; end
        S_WB: begin
          spk_we    <= 1'b1;
          spk_wbank <= !c.src_bank;
          spk_waddr <= c.out_base + SA_W'(d);
          for (int j = 0; j < NB; j++) spk_wdata[j*BV +: BV] <= out_spk[j][d[$clog2(NF)-1:0]];
          d <= d + 1'b1;
          if (d == (DI_W+1)'(NF - 1)) begin state <= S_IDLE; done <= 1'b1; end
        end
        // ---- attention tile
        S_ECP: begin
          rdA_v <= 1'b1;
          d <= d + 1'b1;
          if (d + 1'b1 >= c.n_feat) state <= S_ECP_W;
        end
        S_ECP_W: if (!rdA_v) begin state <= S_M1; d <= '0; ac_phase <= 1'b1; end
        S_M1: begin
          rdB_v <= 1'b1;
          d <= d + 1'b1;
          if (d + 1'b1 >= c.n_feat) state <= S_M1_W;
        end
        S_M1_W: if (!rdB_v && !ac_busy) begin
          state <= S_M2; d <= '0; amode <= MODE_Y; yb_start <= 1'b1;
        end
        S_M2: begin
          rdB_v <= 1'b1;
          d <= d + 1'b1;
          if (d == (DI_W+1)'(NF - 1)) state <= S_M2_W;
        end
        S_M2_W: if (!rdB_v && !ac_busy) begin
          ac_phase <= 1'b0;
          if (c.y_fire) begin state <= S_SG; k <= '0; end
          else begin state <= S_IDLE; done <= 1'b1; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign st_n_dense  = n_dense;
  assign st_n_sparse = n_sparse;
  assign st_skipped  = sc_skipped;
  assign st_q_keep   = q_keep;
  assign st_k_keep   = k_keep;
endmodule
