// spike_gen_pe: one PE of the spike generator: sparse-dense addition followed by a leaky
// integrate-and-fire update, V = V + (a + b) - v_leak; the neuron fires when V > v_th and
// V is then reset to 0, else V is kept (Eq. 1-2 of the paper). The PE serves the BS_N
// tokens of a bundle one after another, so it keeps one membrane register per token slot
// (slot selects it); time points of a token must be presented in order. init treats the
// selected membrane as 0 before the update (first time point of a sequence). The spike and
// the new membrane value are registered: one cycle latency, one neuron-time per cycle.
// From the paper: the adder, V_mem register, comparator against a V_th register and reset
// of the figure, and the LIF equations. Own choices: per-slot membranes, widths, no clamp.
module spike_gen_pe
  import bishop_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     init,
  input  logic [$clog2(BS_N)-1:0]  slot,
  input  acc_t                     cur_a,
  input  acc_t                     cur_b,
  input  logic signed [VM_W-1:0]   v_th,
  input  logic signed [VM_W-1:0]   v_leak,
  output logic                     spike,
  output logic signed [VM_W-1:0]   vmem [BS_N]
);
  logic signed [VM_W-1:0] v_prev, v_next;

  always_comb begin
    v_prev = init ? '0 : vmem[slot];
    v_next = v_prev + VM_W'(cur_a) + VM_W'(cur_b) - v_leak;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spike <= 1'b0;
      for (int n = 0; n < BS_N; n++) vmem[n] <= '0;
    end else begin
      spike <= 1'b0;
      if (in_valid) begin
        spike      <= (v_next > v_th);
        vmem[slot] <= (v_next > v_th) ? '0 : v_next;
      end
    end
  end
endmodule
