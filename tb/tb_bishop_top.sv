// tb_bishop_top: end-to-end test of the accelerator at its default sizes. It loads the
// weight GLB and spike GLB bank 0 through the DRAM-side ports, then runs
//  1. a projection tile (48 input features of mixed density, upper weight half),
//  2. the next time bundle of the same neurons (membranes carried over),
//  3. two attention key tiles of one head: the first overwrites the Y buffer, the second
//     accumulates into it and fires,
// reads every output word back from bank 1 and compares it with a reference computed
// here directly from the equations (stratification cannot change a result, so the
// reference is a plain X*W; ECP is modelled by its keep rule). It also counts the
// mechanisms the design has - dense and sparse strata, skipped inactive bundles, pruned Q
// rows and K tokens, Y accumulation, spikes and the ping-pong write to the other bank -
// and fails if any never happened.
module tb_bishop_top;
  import bishop_pkg::*;
  localparam int DIN = 48;
  localparam int DH  = 24;
  logic clk = 0, rst_n = 0;
  logic ld_wgt_we = 0, ld_spk_we = 0, ld_spk_bank = 0, rd_spk_re = 0, rd_spk_bank = 0;
  logic [WA_W-1:0] ld_wgt_addr = '0;
  logic [WGT_WORD-1:0] ld_wgt_data = '0;
  logic [SA_W-1:0] ld_spk_addr = '0, rd_spk_addr = '0;
  logic [SPK_WORD-1:0] ld_spk_data = '0, rd_spk_data;
  logic cmd_valid = 0, cmd_ready, done;
  cmd_t cmd;
  logic [DI_W:0] st_n_dense, st_n_sparse;
  logic [15:0] st_skipped, st_spikes;
  logic [NB-1:0] st_q_keep;
  logic [NK-1:0] st_k_keep;
  logic [31:0] st_cycles;

  int checks = 0, failures = 0;
  // loop bounds held in variables so that the reference loops stay loops when compiled
  int n_b = NB, n_f = NF, n_bv = BV, n_k = NK, n_din = DIN, n_dh = DH, n_w32 = WGT_WORD / 32;
  int ev_dense = 0, ev_sparse = 0, ev_skip = 0, ev_qprune = 0, ev_kprune = 0, ev_spikes = 0, ev_yacc = 0, ev_pingpong = 0;

  logic [SPK_WORD-1:0] x0 [DIN], x1 [DIN];
  logic [WGT_WORD-1:0] wrow [DIN];
  logic [SPK_WORD-1:0] qw [DH], kw0 [DH], kw1 [DH], vw0 [NF], vw1 [NF];
  longint vm [NB][NF][BS_N];
  logic [SPK_WORD-1:0] exp_out [NF];
  longint yref [NB][NF][BV];

  always #5 clk = ~clk;

  bishop_top dut (.clk, .rst_n, .ld_wgt_we, .ld_wgt_addr, .ld_wgt_data, .ld_spk_we, .ld_spk_bank,
    .ld_spk_addr, .ld_spk_data, .rd_spk_re, .rd_spk_bank, .rd_spk_addr, .rd_spk_data,
    .cmd_valid, .cmd_ready, .cmd, .done, .st_n_dense, .st_n_sparse, .st_skipped, .st_q_keep,
    .st_k_keep, .st_spikes, .st_cycles);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a feature word whose NB bundles are active with probability pct %
  function automatic logic [SPK_WORD-1:0] spk_word(int pct, int bits);
    logic [SPK_WORD-1:0] w = '0;
    for (int j = 0; j < bits / BV; j++)
      if ($urandom_range(99) < pct) w[j*BV +: BV] = BV'($urandom) | BV'(1 << $urandom_range(BV-1));
    return w;
  endfunction
  function automatic logic [SPK_WORD-1:0] tok_word(int pct, int nact);
    logic [SPK_WORD-1:0] w = '0;
    for (int j = 0; j < nact; j++)
      if ($urandom_range(99) < pct) w[j*BS_T +: BS_T] = BS_T'($urandom_range(1, 3));
    return w;
  endfunction

  task automatic load_spk(input int addr, input logic [SPK_WORD-1:0] data);
    @(negedge clk); ld_spk_we = 1; ld_spk_bank = 0; ld_spk_addr = SA_W'(addr); ld_spk_data = data;
    @(negedge clk); ld_spk_we = 0;
  endtask

  task automatic run(input cmd_t c_in);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c_in; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic read_check(input int base, input string what);
    for (int f = 0; f < n_f; f++) begin
      @(negedge clk); rd_spk_re = 1; rd_spk_bank = 1; rd_spk_addr = SA_W'(base + f);
      @(negedge clk); rd_spk_re = 0;
      checks++;
      if (rd_spk_data !== exp_out[f]) begin
        failures++;
        $display("%s: output feature %0d got %h exp %h", what, f, rd_spk_data, exp_out[f]);
      end
    end
  endtask

  // reference LIF over one tile given currents cur[j][f][lane]
  task automatic ref_fire(input longint cur [NB][NF][BV], input bit init, input longint vth, input longint vleak);
    for (int f = 0; f < n_f; f++) exp_out[f] = '0;
    for (int j = 0; j < n_b; j++)
      for (int f = 0; f < n_f; f++)
        for (int k = 0; k < n_bv; k++) begin
          int t, n;
          longint v;
          t = k / BS_N; n = k % BS_N;
          v = ((init && t == 0) ? 0 : vm[j][f][n]) + cur[j][f][k] - vleak;
          if (v > vth) begin exp_out[f][j*BV + k] = 1'b1; vm[j][f][n] = 0; end
          else vm[j][f][n] = v;
        end
  endtask

  task automatic proj_ref(input logic [SPK_WORD-1:0] x [DIN], input bit init);
    longint cur [NB][NF][BV];
    for (int j = 0; j < n_b; j++)
      for (int f = 0; f < n_f; f++)
        for (int k = 0; k < n_bv; k++) begin
          cur[j][f][k] = 0;
          for (int d = 0; d < n_din; d++)
            if (x[d][j*BV + k]) cur[j][f][k] += longint'($signed(wrow[d][(NF + f)*W_W +: W_W]));
        end
    ref_fire(cur, init, 40, 3);
  endtask

  // one key tile of attention, added into yref
  task automatic attn_ref(input logic [SPK_WORD-1:0] kw [DH], input logic [SPK_WORD-1:0] vw [NF], input bit acc);
    bit qk [NB], kk [NK];
    int cnt;
    for (int i = 0; i < n_b; i++) begin
      cnt = 0;
      for (int d = 0; d < n_dh; d++) if (|qw[d][i*BV +: BV]) cnt++;
      qk[i] = (cnt >= 6);
      if (!qk[i]) ev_qprune++;
    end
    for (int j = 0; j < n_k; j++) begin
      cnt = 0;
      for (int d = 0; d < n_dh; d++) if (|kw[d][j*BS_T +: BS_T]) cnt++;
      kk[j] = (cnt >= 6);
      if (!kk[j]) ev_kprune++;
    end
    for (int i = 0; i < n_b; i++)
      for (int f = 0; f < n_f; f++)
        for (int k = 0; k < n_bv; k++) begin
          longint y;
          y = 0;
          for (int j = 0; j < n_k; j++)
            if (qk[i] && kk[j] && vw[f][j*BS_T + k / BS_N]) begin
              int s;
              s = 0;
              for (int d = 0; d < n_dh; d++) if (qw[d][i*BV + k] && kw[d][j*BS_T + k / BS_N]) s++;
              y += s;
            end
          yref[i][f][k] = (acc ? yref[i][f][k] : 0) + y;
        end
  endtask

  task automatic check_keep(input logic [SPK_WORD-1:0] kw [DH]);
    int cnt;
    for (int i = 0; i < n_b; i++) begin
      cnt = 0;
      for (int d = 0; d < n_dh; d++) if (|qw[d][i*BV +: BV]) cnt++;
      checks++;
      if (st_q_keep[i] != (cnt >= 6)) begin failures++; $display("q_keep[%0d] wrong", i); end
    end
    for (int j = 0; j < n_k; j++) begin
      cnt = 0;
      for (int d = 0; d < n_dh; d++) if (|kw[d][j*BS_T +: BS_T]) cnt++;
      checks++;
      if (st_k_keep[j] != (cnt >= 6)) begin failures++; $display("k_keep[%0d] wrong", j); end
    end
  endtask

  initial begin
    cmd_t c;
    longint cur [NB][NF][BV];
    cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- data: input features of mixed density, weights
    for (int d = 0; d < n_din; d++) begin
      int pct;
      pct = (d % 3 == 0) ? 80 : (d % 3 == 1) ? 15 : 0;
      x0[d] = spk_word(pct, SPK_WORD);
      x1[d] = spk_word(pct, SPK_WORD);
      for (int b = 0; b < n_w32; b++) wrow[d][b*32 +: 32] = $urandom;
      @(negedge clk); ld_wgt_we = 1; ld_wgt_addr = WA_W'(10 + d); ld_wgt_data = wrow[d];
      @(negedge clk); ld_wgt_we = 0;
      load_spk(d, x0[d]);
      load_spk(100 + d, x1[d]);
    end
    for (int d = 0; d < n_dh; d++) begin
      qw[d]  = spk_word((d % 2) ? 60 : 20, SPK_WORD);
      // row 0 and 5 nearly silent so that ECP prunes them
      qw[d][0*BV +: BV] = (d < 3) ? BV'(1) : '0;
      qw[d][5*BV +: BV] = '0;
      kw0[d] = tok_word(40, NK);
      kw1[d] = tok_word(40, NK);
      kw0[d][3*BS_T +: BS_T] = '0;
      load_spk(200 + d, qw[d]);
      load_spk(240 + d, kw0[d]);
      load_spk(320 + d, kw1[d]);
    end
    for (int f = 0; f < n_f; f++) begin
      vw0[f] = tok_word(50, NK);
      vw1[f] = tok_word(50, NK);
      load_spk(280 + f, vw0[f]);
      load_spk(360 + f, vw1[f]);
    end

    // ---- tile 1: projection, first time bundle
    c = '0;
    c.op = OP_PROJ; c.src_bank = 0; c.in_base = 0; c.n_feat = (DI_W+1)'(DIN); c.w_base = 10;
    c.w_half = 1; c.out_base = 0; c.theta_s = 6; c.vm_init = 1; c.v_th = 40; c.v_leak = 3;
    run(c);
    $display("proj tile 1: %0d dense, %0d sparse features, %0d bundles skipped, %0d spikes, %0d cycles",
             st_n_dense, st_n_sparse, st_skipped, st_spikes, st_cycles);
    ev_dense += int'(st_n_dense); ev_sparse += int'(st_n_sparse); ev_skip += int'(st_skipped);
    ev_spikes += int'(st_spikes);
    checks++;
    if (int'(st_n_dense) + int'(st_n_sparse) != DIN) failures++;
    proj_ref(x0, 1);
    read_check(0, "proj tile 1");

    // ---- tile 2: next time bundle of the same neurons
    c.in_base = 100; c.vm_init = 0; c.out_base = 32;
    run(c);
    ev_spikes += int'(st_spikes);
    proj_ref(x1, 0);
    read_check(32, "proj tile 2");

    // ---- ping-pong: bank 0 input is untouched by the writes to bank 1
    @(negedge clk); rd_spk_re = 1; rd_spk_bank = 0; rd_spk_addr = SA_W'(0);
    @(negedge clk); rd_spk_re = 0;
    checks++;
    if (rd_spk_data !== x0[0]) failures++; else ev_pingpong++;

    // ---- attention: two key tiles of one head
    c = '0;
    c.op = OP_ATTN; c.src_bank = 0; c.in_base = 200; c.n_feat = (DI_W+1)'(DH); c.k_base = 240;
    c.v_base = 280; c.out_base = 64; c.theta_q = 6; c.theta_k = 6; c.y_shift = 2;
    c.y_accum = 0; c.y_fire = 0; c.vm_init = 1; c.v_th = 6; c.v_leak = 1;
    run(c);
    check_keep(kw0);
    $display("attn tile 1: %0d cycles", st_cycles);
    attn_ref(kw0, vw0, 0);
    c.k_base = 320; c.v_base = 360; c.y_accum = 1; c.y_fire = 1;
    run(c);
    check_keep(kw1);
    $display("attn tile 2: %0d cycles, %0d spikes", st_cycles, st_spikes);
    attn_ref(kw1, vw1, 1);
    ev_yacc++;
    ev_spikes += int'(st_spikes);
    checks++;
    if (st_spikes == 0) begin failures++; $display("attention tile fired no spike"); end
    for (int i = 0; i < n_b; i++)
      for (int f = 0; f < n_f; f++)
        for (int k = 0; k < n_bv; k++) cur[i][f][k] = yref[i][f][k] >>> 2;
    // membranes: the attention tile starts fresh (vm_init)
    ref_fire(cur, 1, 6, 1);
    read_check(64, "attention");

    $display("events: dense=%0d sparse=%0d skipped=%0d q_pruned=%0d k_pruned=%0d y_accum=%0d spikes=%0d pingpong=%0d",
             ev_dense, ev_sparse, ev_skip, ev_qprune, ev_kprune, ev_yacc, ev_spikes, ev_pingpong);
    checks += 8;
    if (ev_dense == 0)    failures++;
    if (ev_sparse == 0)   failures++;
    if (ev_skip == 0)     failures++;
    if (ev_qprune == 0)   failures++;
    if (ev_kprune == 0)   failures++;
    if (ev_yacc == 0)     failures++;
    if (ev_spikes == 0)   failures++;
    if (ev_pingpong == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
