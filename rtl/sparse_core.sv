// sparse_core: the TT-bundle sparse core, which integrates the sparse stratum X_S * W_S.
// It takes one sparse input feature at a time: the feature's NBUN spike bundles and its
// weights for NFEAT output features. Inactive bundles (no spike) are skipped outright.
// A distribution stage hands the active bundles, lowest index first, to NGRP = UNITS/NFEAT
// unit groups per cycle (default 128/32 = 4 bundles per cycle); each unit is a
// select-accumulate over the BV lanes of its bundle with one weight reused by all lanes
// (intra-bundle reuse). Results accumulate into the output buffer acc[bundle][feature][lane].
// A feature with k active bundles thus occupies the units for ceil(k/NGRP) cycles, and a
// feature with none costs only its input handshake.
// Interface: valid/ready on the input (a feature is taken when in_valid && in_ready);
// clr zeroes the output buffer; idle is high when no feature is in progress.
// From the paper: a SIGMA-like core of up to 128 parallel TT-bundle units with intra-bundle
// weight reuse, working in parallel with the dense core. Own choices: the mapping of units
// to (bundle, output feature) pairs and the priority distribution. SIGMA's configurable
// adder-tree reduction network is not built: with one input feature per step, no two
// units ever produce terms of the same output, so each unit adds straight into its
// output-buffer entry.
module sparse_core
  import bishop_pkg::*;
#(
  parameter int unsigned NBUN  = NB,
  parameter int unsigned NFEAT = NF,
  parameter int unsigned UNITS = SC_UNITS,
  localparam int unsigned NGRP = UNITS / NFEAT,
  localparam int unsigned CW = $clog2(NBUN + 1)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr,
  input  logic     in_valid,
  output logic     in_ready,
  input  bundle_t  in_spk [NBUN],
  input  weight_t  in_w   [NFEAT],
  output logic     idle,
  output logic [15:0] n_skipped,     // inactive bundles skipped since clr
  output acc_t     acc    [NBUN][NFEAT][BV]
);
  logic            cur_v;
  logic [NBUN-1:0] rem;
  bundle_t         cur_s [NBUN];
  weight_t         cur_w [NFEAT];
  logic [NBUN-1:0] pick;
  logic [NBUN-1:0] in_mask;
  logic [CW-1:0]   n_in_active;
  logic            last_step;

  // distribution: the first NGRP active bundles of the current feature get a unit group
  always_comb begin
    logic [CW-1:0] rank;
    rank = '0;
    pick = '0;
    for (int j = 0; j < NBUN; j++) begin
      if (rem[j]) begin
        if (rank < CW'(NGRP)) pick[j] = 1'b1;
        rank = rank + 1'b1;
      end
    end
    last_step = cur_v && (rank <= CW'(NGRP));
  end

  always_comb begin
    n_in_active = '0;
    for (int j = 0; j < NBUN; j++) begin
      in_mask[j] = |in_spk[j];
      n_in_active += CW'(in_mask[j]);
    end
  end

  assign in_ready = !cur_v || last_step;
  assign idle     = !cur_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_v     <= 1'b0;
      rem       <= '0;
      n_skipped <= '0;
      for (int j = 0; j < NBUN; j++) cur_s[j] <= '0;
      for (int f = 0; f < NFEAT; f++) cur_w[f] <= '0;
    end else begin
      if (clr) n_skipped <= '0;
      if (in_valid && in_ready) begin
        cur_v <= |in_mask;
        rem   <= in_mask;
        cur_s <= in_spk;
        cur_w <= in_w;
        if (!clr) n_skipped <= n_skipped + 16'(NBUN - n_in_active);
      end else if (cur_v) begin
        rem   <= rem & ~pick;
        if (last_step) cur_v <= 1'b0;
      end
    end
  end

  // SAC units writing into the output buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NBUN; j++)
        for (int f = 0; f < NFEAT; f++)
          for (int k = 0; k < BV; k++) acc[j][f][k] <= '0;
    end else begin
      for (int j = 0; j < NBUN; j++)
        for (int f = 0; f < NFEAT; f++)
          for (int k = 0; k < BV; k++) begin
            if (clr) acc[j][f][k] <= '0;
            else if (cur_v && pick[j] && cur_s[j][k]) acc[j][f][k] <= acc[j][f][k] + ACC_W'(cur_w[f]);
          end
    end
  end
endmodule
