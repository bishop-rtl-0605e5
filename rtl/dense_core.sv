// dense_core: the TT-bundle dense core, an output-stationary systolic array of ROWS x COLS
// dense_pe (default 32 x 16 = 512 PEs). Column j holds TT bundle j, row i output feature i.
// One input feature per valid cycle enters: the NB bundles' spikes from the top (one bundle
// per column) and the feature's weights for the ROWS output features from the left (one
// per row). Spikes move down and weights right, so a weight is reused by every bundle of
// its row and a bundle by every feature of its column. Edge skew registers (the spike
// TT-bundle buffer and weight buffer of the figure, reduced to delay lines) delay column j
// by j cycles and row i by i cycles so that PE(i,j) sees the operands of feature d at
// cycle d+i+j. The last feature reaches the far corner ROWS+COLS-1 cycles after it is offered;
// busy falls ROWS+COLS cycles after the last input cycle. acc[i][j][k] is the partial sum of feature i, bundle j, lane k.
// From the paper: 512 PEs, 32 features by 16 bundles, top-to-bottom spikes, left-to-right
// weights, output-stationary SAC. Text and figure differ on orientation: the text says
// each column computes an output feature, while the flow it gives (weights passed left to
// right and reused across a row) makes a row share one output feature; this design follows
// the flow. The output buffer is the acc array itself, read by the spike generator.
module dense_core
  import bishop_pkg::*;
#(
  parameter int unsigned ROWS = NF,
  parameter int unsigned COLS = NB
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr,
  input  logic     in_valid,
  input  bundle_t  in_spk [COLS],
  input  weight_t  in_w   [ROWS],
  output logic     busy,
  output acc_t     acc    [ROWS][COLS][BV]
);
  localparam int unsigned SKEW = (ROWS > COLS ? ROWS : COLS);
  localparam int unsigned DRAIN = ROWS + COLS;

  // skew delay lines
  bundle_t sk_s [COLS][SKEW];
  logic    sk_v [COLS][SKEW];
  weight_t sk_w [ROWS][SKEW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < COLS; j++)
        for (int t = 0; t < SKEW; t++) begin sk_s[j][t] <= '0; sk_v[j][t] <= 1'b0; end
      for (int i = 0; i < ROWS; i++)
        for (int t = 0; t < SKEW; t++) sk_w[i][t] <= '0;
    end else begin
      for (int j = 0; j < COLS; j++) begin
        sk_s[j][0] <= in_spk[j];
        sk_v[j][0] <= in_valid;
        for (int t = 1; t < SKEW; t++) begin
          sk_s[j][t] <= sk_s[j][t-1];
          sk_v[j][t] <= sk_v[j][t-1];
        end
      end
      for (int i = 0; i < ROWS; i++) begin
        sk_w[i][0] <= in_w[i];
        for (int t = 1; t < SKEW; t++) sk_w[i][t] <= sk_w[i][t-1];
      end
    end
  end

  // PE mesh wiring: index [i][j] is the input of PE(i,j)
  bundle_t s_net [ROWS+1][COLS];
  logic    v_net [ROWS+1][COLS];
  weight_t w_net [ROWS][COLS+1];

  for (genvar j = 0; j < COLS; j++) begin : g_top
    assign s_net[0][j] = sk_s[j][j];
    assign v_net[0][j] = sk_v[j][j];
  end
  for (genvar i = 0; i < ROWS; i++) begin : g_left
    assign w_net[i][0] = sk_w[i][i];
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      dense_pe u_pe (
        .clk, .rst_n, .clr,
        .s_valid_in (v_net[i][j]),
        .s_in       (s_net[i][j]),
        .w_in       (w_net[i][j]),
        .s_valid_out(v_net[i+1][j]),
        .s_out      (s_net[i+1][j]),
        .w_out      (w_net[i][j+1]),
        .acc        (acc[i][j])
      );
    end
  end

  // drain tracking: busy until the last offered feature has reached PE(ROWS-1,COLS-1)
  logic [$clog2(DRAIN+2)-1:0] drain_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           drain_cnt <= '0;
    else if (in_valid)    drain_cnt <= ($clog2(DRAIN+2))'(DRAIN);
    else if (drain_cnt != 0) drain_cnt <= drain_cnt - 1'b1;
  end
  assign busy = in_valid || (drain_cnt != 0);
endmodule
