// attn_pe: one PE of the TT-bundle attention core, reconfigurable between two modes with
// a stationary score register S per bundle lane (BS_N tokens x BS_T time points of one Q
// bundle, against one key token).
//  Mode 1 (MODE_S, And-ACcumulate): each valid cycle brings the Q bundle's spikes of one
//  feature from the left and the key token's BS_T spikes of the same feature from above;
//  lane (t,n) adds Q[t,n] AND K[t] to S[t,n]. The key spikes are reused by all BS_N
//  tokens of the bundle.
//  Mode 2 (MODE_Y, Select-ACcumulate): the value token's BS_T spikes of one feature come
//  from above and a partial sum Y[t,n] from the left; lane (t,n) adds S[t,n] if V[t] is 1
//  and passes the sum right.
// Q/Y move right and K/V move down through one register each per PE hop. S is kept
// between modes; clr zeroes it.
// From the paper: the two modes, AND gates plus accumulators (mode 1), multiplexers plus
// adders (mode 2), per-time-point gate groups and S-stationary flow. Own choices: widths
// (S_W is the paper's upper bound of 10 bits), the valid bits, S saturating at its maximum.
module attn_pe
  import bishop_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  attn_mode_e          mode,
  input  logic                h_valid_in,
  input  bundle_t             q_in,
  input  logic [Y_W-1:0]      y_in   [BV],
  input  logic [BS_T-1:0]     kv_in,
  output logic                h_valid_out,
  output bundle_t             q_out,
  output logic [Y_W-1:0]      y_out  [BV],
  output logic [BS_T-1:0]     kv_out,
  output logic [S_W-1:0]      s      [BV]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_valid_out <= 1'b0;
      q_out       <= '0;
      kv_out      <= '0;
      for (int k = 0; k < BV; k++) begin y_out[k] <= '0; s[k] <= '0; end
    end else begin
      h_valid_out <= h_valid_in;
      q_out       <= q_in;
      kv_out      <= kv_in;
      for (int k = 0; k < BV; k++) begin
        // mode 2 select-accumulate on the flowing partial sum
        y_out[k] <= (mode == MODE_Y && kv_in[k / BS_N]) ? y_in[k] + Y_W'(s[k]) : y_in[k];
        // mode 1 and-accumulate into the stationary score
        if (clr) s[k] <= '0;
        else if (mode == MODE_S && h_valid_in && q_in[k] && kv_in[k / BS_N] && s[k] != '1)
          s[k] <= s[k] + 1'b1;
      end
    end
  end
endmodule
