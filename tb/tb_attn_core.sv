// tb_attn_core: one full-size attention tile. Random Q (16 bundles), K and V (32 tokens)
// over DH features and random ECP keep masks. After mode 1 it checks every score
// S = sum_d Q AND K (zero for pruned rows/tokens); in mode 2 it collects the Y output of
// each row in arrival order and checks Y[i][f][lane] = sum over kept keys of
// S * V, and that row i's first Y appears i+COLS+1 cycles after the first V input.
module tb_attn_core;
  import bishop_pkg::*;
  localparam int DH = 20;
  localparam int DV = 8;
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0, busy;
  attn_mode_e mode;
  bundle_t in_q [NB];
  logic [BS_T-1:0] in_kv [NK];
  logic [NB-1:0] q_keep;
  logic [NK-1:0] k_keep;
  logic y_valid [NB];
  logic [Y_W-1:0] y_out [NB][BV];
  logic [S_W-1:0] s [NB][NK][BV];
  bundle_t qs [DH][NB];
  logic [BS_T-1:0] ks [DH][NK];
  logic [BS_T-1:0] vs [DV][NK];
  int sref [NB][NK][BV];
  int ycnt [NB];
  int first_y [NB];
  int checks = 0, failures = 0, cyc;
  always #5 clk = ~clk;
  attn_core dut (.clk, .rst_n, .clr, .mode, .in_valid, .in_q, .in_kv, .q_keep, .k_keep,
                 .y_valid, .y_out, .s, .busy);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // Y collector and reference check
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < NB; i++)
      if (y_valid[i]) begin
        if (ycnt[i] == 0) first_y[i] = cyc;
        for (int k = 0; k < BV; k++) begin
          int r;
          r = 0;
          for (int j = 0; j < NK; j++) if (vs[ycnt[i]][j][k / BS_N] && k_keep[j]) r += sref[i][j][k];
          checks++;
          if (int'(y_out[i][k]) != r) begin failures++; if (failures < 10) $display("Y[%0d][%0d][%0d]=%0d exp %0d", i, ycnt[i], k, y_out[i][k], r); end
        end
        ycnt[i]++;
      end
  end

  initial begin
    int v0;
    cyc = 0;
    mode = MODE_S;
    foreach (in_q[i]) in_q[i] = '0;
    foreach (in_kv[j]) in_kv[j] = '0;
    foreach (ycnt[i]) ycnt[i] = 0;
    q_keep = 16'hFFFF ^ 16'h0421;
    k_keep = 32'hFFFF_FFFF ^ 32'h8001_0010;
    for (int d = 0; d < DH; d++) begin
      foreach (qs[d][i]) qs[d][i] = BV'($urandom);
      foreach (ks[d][j]) ks[d][j] = BS_T'($urandom);
    end
    foreach (vs[d, j]) vs[d][j] = BS_T'($urandom);
    for (int i = 0; i < NB; i++)
      for (int j = 0; j < NK; j++)
        for (int k = 0; k < BV; k++) begin
          sref[i][j][k] = 0;
          if (q_keep[i] && k_keep[j])
            for (int d = 0; d < DH; d++) if (qs[d][i][k] && ks[d][j][k / BS_N]) sref[i][j][k]++;
        end
    repeat (2) @(negedge clk); rst_n = 1;
    clr = 1; @(negedge clk); clr = 0;
    for (int d = 0; d < DH; d++) begin in_valid = 1; in_q = qs[d]; in_kv = ks[d]; @(negedge clk); end
    in_valid = 0;
    while (busy) @(negedge clk);
    for (int i = 0; i < NB; i++)
      for (int j = 0; j < NK; j++)
        for (int k = 0; k < BV; k++) begin
          checks++;
          if (int'(s[i][j][k]) != sref[i][j][k]) begin failures++; if (failures < 10) $display("S[%0d][%0d][%0d]=%0d exp %0d", i, j, k, s[i][j][k], sref[i][j][k]); end
        end
    mode = MODE_Y;
    @(negedge clk);
    v0 = cyc;
    for (int d = 0; d < DV; d++) begin in_valid = 1; in_kv = vs[d]; @(negedge clk); end
    in_valid = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    for (int i = 0; i < NB; i++) begin
      checks += 2;
      if (ycnt[i] != DV) begin failures++; $display("row %0d got %0d Y outputs", i, ycnt[i]); end
      if (first_y[i] - v0 != i + NK + 1) begin failures++; $display("row %0d latency %0d", i, first_y[i] - v0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
