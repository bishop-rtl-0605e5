// ecp_filter: run-time part of error-constrained TT-bundle pruning (ECP). While the Q and
// K tiles of one attention head stream past, one feature per valid cycle, it counts for
// every Q bundle row the active Q bundles (bundles holding at least one spike) and for
// every K token the features in which that token spikes at any of the bundle's time
// points. A Q row whose count n_ab is below theta_q is pruned: since K is binary, every
// score in that row of S = Q K^T is below theta_q. K tokens are pruned the same way
// against theta_k. q_keep/k_keep are valid once the last feature has been counted (one
// cycle after it was offered); clr restarts the counts.
// From the paper: the count of active bundle tags per row across all features and the
// "n_ab < theta" rule for Q and for K. Own choices: the K count is per key token (the
// unit the attention array streams) rather than per K bundle row, and counter widths.
module ecp_filter
  import bishop_pkg::*;
#(
  parameter int unsigned NQ = NB,
  parameter int unsigned NKT = NK,
  localparam int unsigned CW = DI_W + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              in_valid,
  input  bundle_t           q_bun  [NQ],
  input  logic [BS_T-1:0]   k_tok  [NKT],
  input  logic [CW-1:0]     theta_q,
  input  logic [CW-1:0]     theta_k,
  output logic [NQ-1:0]     q_keep,
  output logic [NKT-1:0]    k_keep
);
  logic [CW-1:0] cnt_q [NQ];
  logic [CW-1:0] cnt_k [NKT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NQ; i++)  cnt_q[i] <= '0;
      for (int j = 0; j < NKT; j++) cnt_k[j] <= '0;
    end else if (clr) begin
      for (int i = 0; i < NQ; i++)  cnt_q[i] <= '0;
      for (int j = 0; j < NKT; j++) cnt_k[j] <= '0;
    end else if (in_valid) begin
      for (int i = 0; i < NQ; i++)  if (|q_bun[i]) cnt_q[i] <= cnt_q[i] + 1'b1;
      for (int j = 0; j < NKT; j++) if (|k_tok[j]) cnt_k[j] <= cnt_k[j] + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < NQ; i++)  q_keep[i] = !(cnt_q[i] < theta_q);
    for (int j = 0; j < NKT; j++) k_keep[j] = !(cnt_k[j] < theta_k);
  end
endmodule
