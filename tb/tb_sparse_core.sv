// tb_sparse_core: offers random sparse features (each with 0..NB active bundles) through
// the valid/ready input of the full-size sparse core, then checks every output-buffer sum
// against a direct sum, the count of skipped inactive bundles, and that the core took
// exactly one cycle per group of up to 4 active bundles (an all-inactive feature costs
// only its handshake cycle).
module tb_sparse_core;
  import bishop_pkg::*;
  localparam int DF = 40;
  localparam int NG = SC_UNITS / NF;
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0, in_ready, idle;
  bundle_t in_spk [NB];
  weight_t in_w [NF];
  logic [15:0] n_skipped;
  acc_t acc [NB][NF][BV];
  bundle_t xs [DF][NB];
  weight_t ws [DF][NF];
  int checks = 0, failures = 0, cyc, exp_cyc, exp_skip;
  always #5 clk = ~clk;
  sparse_core dut (.clk, .rst_n, .clr, .in_valid, .in_ready, .in_spk, .in_w, .idle, .n_skipped, .acc);
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    foreach (in_spk[j]) in_spk[j] = '0;
    foreach (in_w[i]) in_w[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    exp_cyc = 0; exp_skip = 0;
    for (int d = 0; d < DF; d++) begin
      int na, act;
      na = 0; act = (d % 5 == 0) ? 0 : $urandom_range(NB);
      for (int j = 0; j < NB; j++) begin
        xs[d][j] = '0;
        if ($urandom_range(NB-1) < act) begin xs[d][j] = BV'($urandom) | BV'(1); na++; end
      end
      for (int f = 0; f < NF; f++) ws[d][f] = W_W'($urandom);
      exp_skip += NB - na;
      // the next feature is taken in the last unit cycle of this one; an all-inactive
      // feature only takes its handshake cycle
      if (d < DF - 1) exp_cyc += (na == 0) ? 1 : (na + NG - 1) / NG;
      else            exp_cyc += 1 + (na + NG - 1) / NG;
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    cyc = 0;
    for (int d = 0; d < DF; d++) begin
      in_valid = 1; in_spk = xs[d]; in_w = ws[d];
      #1;
      while (!in_ready) begin @(negedge clk); cyc++; #1; end
      @(negedge clk); cyc++;
    end
    in_valid = 0;
    while (!idle) begin @(negedge clk); cyc++; end
    checks += 2;
    if (cyc != exp_cyc) begin failures++; $display("cycles %0d exp %0d", cyc, exp_cyc); end
    if (n_skipped != 16'(exp_skip)) begin failures++; $display("skipped %0d exp %0d", n_skipped, exp_skip); end
    for (int j = 0; j < NB; j++)
      for (int f = 0; f < NF; f++)
        for (int k = 0; k < BV; k++) begin
          int r;
          r = 0;
          for (int d = 0; d < DF; d++) if (xs[d][j][k]) r += int'(ws[d][f]);
          checks++;
          if (int'(acc[j][f][k]) != r) begin failures++; if (failures < 10) $display("acc[%0d][%0d][%0d]=%0d exp %0d", j, f, k, acc[j][f][k], r); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
