// y_buffer: the Y TT-bundle buffer of the attention core plus the output scaler. During a
// mode-2 pass each row of the attention array delivers, on y_valid, the Y partial sums of
// one output feature (features arrive in order 0,1,..., each row on its own skewed cycle);
// a per-row counter places them at y[row][feature][lane]. With accum=0 the buffer entry is
// overwritten (first key tile), with accum=1 the new partial sum is added (further key
// tiles). start resets the row counters before a pass. y_scaled is the buffer shifted
// right by shift bits, the power-of-two scale s of the attention equation, and feeds the
// spike generator.
// From the paper: aggregation of Y read-outs into partial sums held in the Y buffers and a
// shifter applying the power-of-two factor. Own choices: overwrite/accumulate control,
// the arrival-order addressing, unsigned Y and a right shift (s <= 1).
module y_buffer
  import bishop_pkg::*;
#(
  parameter int unsigned ROWS  = NB,
  parameter int unsigned NFEAT = NF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              accum,
  input  logic              y_valid [ROWS],
  input  logic [Y_W-1:0]    y_in    [ROWS][BV],
  input  logic [3:0]        shift,
  output logic [Y_W-1:0]    y_scaled [ROWS][NFEAT][BV]
);
  localparam int unsigned FW = $clog2(NFEAT);
  logic [Y_W-1:0] y   [ROWS][NFEAT][BV];
  logic [FW-1:0]  cnt [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++) begin
        cnt[i] <= '0;
        for (int f = 0; f < NFEAT; f++)
          for (int k = 0; k < BV; k++) y[i][f][k] <= '0;
      end
    end else begin
      for (int i = 0; i < ROWS; i++) begin
        if (start) cnt[i] <= '0;
        else if (y_valid[i]) begin
          cnt[i] <= cnt[i] + 1'b1;
          for (int k = 0; k < BV; k++)
            y[i][cnt[i]][k] <= accum ? y[i][cnt[i]][k] + y_in[i][k] : y_in[i][k];
        end
      end
    end
  end

  always_comb
    for (int i = 0; i < ROWS; i++)
      for (int f = 0; f < NFEAT; f++)
        for (int k = 0; k < BV; k++) y_scaled[i][f][k] = y[i][f][k] >> shift;
endmodule
