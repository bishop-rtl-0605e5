// dense_pe: one processing element of the TT-bundle dense core. It holds the
// output-stationary partial sums of one TT bundle (BV neuron-time lanes) for one output
// feature. Each valid cycle it receives the bundle's spikes for one input feature from
// above and that feature's weight from the left; every lane performs a select-accumulate
// (SAC): a spike selects the weight, no spike selects 0, and the result is added to the
// lane's register. One weight is reused by all BV lanes (intra-bundle reuse). Spikes are
// passed down and the weight right, each through one register (one cycle per PE hop).
// From the paper: the SAC made of one multiplexer and one accumulator per lane, the
// spike/weight pass-through registers and the local partial-sum registers. Own choices:
// a valid bit travelling with the spikes, a synchronous clear, and widths.
module dense_pe
  import bishop_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr,
  input  logic     s_valid_in,
  input  bundle_t  s_in,
  input  weight_t  w_in,
  output logic     s_valid_out,
  output bundle_t  s_out,
  output weight_t  w_out,
  output acc_t     acc [BV]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid_out <= 1'b0;
      s_out       <= '0;
      w_out       <= '0;
      for (int k = 0; k < BV; k++) acc[k] <= '0;
    end else begin
      s_valid_out <= s_valid_in;
      s_out       <= s_in;
      w_out       <= w_in;
      for (int k = 0; k < BV; k++) begin
        if (clr)                           acc[k] <= '0;
        else if (s_valid_in && s_in[k])    acc[k] <= acc[k] + ACC_W'(w_in);
      end
    end
  end
endmodule
