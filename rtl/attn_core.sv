// attn_core: the TT-bundle attention core, an S-stationary systolic array of ROWS x COLS
// attn_pe (default 16 Q bundles x 32 key tokens = 512 PEs). Row i holds Q bundle i,
// column j key token j. One feature per valid cycle enters:
//  mode MODE_S: the Q bundles' spikes of feature d from the left, the key tokens' spikes
//  of feature d from the top; each PE accumulates S = Q AND K over all features of the
//  head (feature-first tiling). A key token is reused by all tokens of a Q bundle inside
//  a PE and by all Q bundles down its column.
//  mode MODE_Y: the value tokens' spikes of feature d from the top; a zero partial sum
//  enters each row and collects S-selected terms across the row, leaving at the right as
//  y_out[i] = Y of Q bundle i, feature d. V is reused the same way as K.
// Edge registers skew row i by i cycles and column j by j cycles, so PE(i,j) sees feature
// d at cycle d+i+j (after the input register) and row i's Y of feature d leaves
// i+COLS+1 cycles after it was offered. q_keep/k_keep come from the ECP filter: a pruned
// Q row or key token is fed zeros, so its PEs never accumulate and its Y is zero; a pruned
// key also prunes the matching value token. busy covers the drain after the last input.
// From the paper: 512 PEs, Q left-to-right, K/V top-to-bottom, Y left-to-right, S kept
// in PE registers between the modes, and ECP removing Q/K rows and the V they imply. Own
// choices: edge skew registers, zero feeding of pruned rows/columns, the mode input.
module attn_core
  import bishop_pkg::*;
#(
  parameter int unsigned ROWS = NB,
  parameter int unsigned COLS = NK
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  attn_mode_e        mode,
  input  logic              in_valid,
  input  bundle_t           in_q   [ROWS],
  input  logic [BS_T-1:0]   in_kv  [COLS],
  input  logic [ROWS-1:0]   q_keep,
  input  logic [COLS-1:0]   k_keep,
  output logic              y_valid [ROWS],
  output logic [Y_W-1:0]    y_out   [ROWS][BV],
  output logic [S_W-1:0]    s       [ROWS][COLS][BV],
  output logic              busy
);
  localparam int unsigned SKEW = (ROWS > COLS ? ROWS : COLS);
  localparam int unsigned DRAIN = ROWS + COLS + 1;

  bundle_t         sk_q  [ROWS][SKEW];
  logic            sk_v  [ROWS][SKEW];
  logic [BS_T-1:0] sk_kv [COLS][SKEW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int t = 0; t < SKEW; t++) begin sk_q[i][t] <= '0; sk_v[i][t] <= 1'b0; end
      for (int j = 0; j < COLS; j++)
        for (int t = 0; t < SKEW; t++) sk_kv[j][t] <= '0;
    end else begin
      for (int i = 0; i < ROWS; i++) begin
        sk_q[i][0] <= (in_valid && q_keep[i]) ? in_q[i] : '0;
        sk_v[i][0] <= in_valid;
        for (int t = 1; t < SKEW; t++) begin
          sk_q[i][t] <= sk_q[i][t-1];
          sk_v[i][t] <= sk_v[i][t-1];
        end
      end
      for (int j = 0; j < COLS; j++) begin
        sk_kv[j][0] <= (in_valid && k_keep[j]) ? in_kv[j] : '0;
        for (int t = 1; t < SKEW; t++) sk_kv[j][t] <= sk_kv[j][t-1];
      end
    end
  end

  // mesh nets: [i][j] is the input of PE(i,j)
  bundle_t         q_net  [ROWS][COLS+1];
  logic            v_net  [ROWS][COLS+1];
  logic [Y_W-1:0]  y_net  [ROWS][COLS+1][BV];
  logic [BS_T-1:0] kv_net [ROWS+1][COLS];

  for (genvar i = 0; i < ROWS; i++) begin : g_left
    assign q_net[i][0] = sk_q[i][i];
    assign v_net[i][0] = sk_v[i][i];
    for (genvar k = 0; k < BV; k++) begin : g_y0
      assign y_net[i][0][k] = '0;
    end
    assign y_valid[i] = v_net[i][COLS] && (mode == MODE_Y);
    assign y_out[i]   = y_net[i][COLS];
  end
  for (genvar j = 0; j < COLS; j++) begin : g_top
    assign kv_net[0][j] = sk_kv[j][j];
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      attn_pe u_pe (
        .clk, .rst_n, .clr, .mode,
        .h_valid_in (v_net[i][j]),
        .q_in       (q_net[i][j]),
        .y_in       (y_net[i][j]),
        .kv_in      (kv_net[i][j]),
        .h_valid_out(v_net[i][j+1]),
        .q_out      (q_net[i][j+1]),
        .y_out      (y_net[i][j+1]),
        .kv_out     (kv_net[i+1][j]),
        .s          (s[i][j])
      );
    end
  end

  logic [$clog2(DRAIN+2)-1:0] drain_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              drain_cnt <= '0;
    else if (in_valid)       drain_cnt <= ($clog2(DRAIN+2))'(DRAIN);
    else if (drain_cnt != 0) drain_cnt <= drain_cnt - 1'b1;
  end
  assign busy = in_valid || (drain_cnt != 0);
endmodule
