// stratifier: splits the input features of a layer tile into a dense and a sparse stratum
// (Algorithm 1 of the paper). For each input feature d it receives the feature's NB
// spike bundles, tags each bundle active if it holds at least one spike, counts the active
// tags, and appends d to the dense index list if the count exceeds theta_s, else to the
// sparse list. The two lists form the feature index buffer; the dense and sparse cores
// read them to fetch the matching spike words and weight rows.
// Interface: pulse clr before a tile, then one feature per cycle on in_valid (no back
// pressure). The lists and counts are updated one cycle after the feature is offered.
// From the paper: active-TTB tagging, the count against theta_s with "> theta_s" meaning
// dense, and the index buffer. Own choices: one feature per cycle, per-tile counts over
// the NB bundles of one word, and the list depth D_MAX.
module stratifier
  import bishop_pkg::*;
#(
  parameter int unsigned NBUN  = NB,
  parameter int unsigned DEPTH = D_MAX,
  localparam int unsigned IW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(NBUN + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  logic                in_valid,
  input  logic [IW-1:0]       in_feat,
  input  logic [NBUN*BV-1:0]  in_word,
  input  logic [CW-1:0]       theta_s,
  output logic [IW:0]         n_dense,
  output logic [IW:0]         n_sparse,
  input  logic [IW-1:0]       dense_rd_idx,
  output logic [IW-1:0]       dense_feat,
  input  logic [IW-1:0]       sparse_rd_idx,
  output logic [IW-1:0]       sparse_feat
);
  logic [IW-1:0] dense_list  [DEPTH];
  logic [IW-1:0] sparse_list [DEPTH];
  logic [CW-1:0] n_active;

  // active-bundle tag count of the offered feature
  always_comb begin
    n_active = '0;
    for (int j = 0; j < NBUN; j++)
      n_active += CW'(|in_word[j*BV +: BV]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_dense  <= '0;
      n_sparse <= '0;
    end else if (clr) begin
      n_dense  <= '0;
      n_sparse <= '0;
    end else if (in_valid) begin
      if (n_active > theta_s) n_dense  <= n_dense + 1'b1;
      else                    n_sparse <= n_sparse + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!clr && in_valid) begin
      if (n_active > theta_s) dense_list[n_dense[IW-1:0]]   <= in_feat;
      else                    sparse_list[n_sparse[IW-1:0]] <= in_feat;
    end
  end

  assign dense_feat  = dense_list[dense_rd_idx];
  assign sparse_feat = sparse_list[sparse_rd_idx];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (n_dense + n_sparse) < (IW+1)'(DEPTH));
endmodule
