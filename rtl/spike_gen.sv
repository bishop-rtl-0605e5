// spike_gen: the spike generator array, NPE spike_gen_pe (default 512, the paper's
// figure). Each cycle with in_valid it takes one neuron-time point for every PE: two
// synaptic partial sums (dense-core and sparse-core results, or the scaled attention
// output and zero), the token slot, and init for the first time point. Spikes appear one
// cycle later with out_valid. v_th and v_leak are shared registers set by the controller.
module spike_gen
  import bishop_pkg::*;
#(
  parameter int unsigned NPE = NB * NF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     init,
  input  logic [$clog2(BS_N)-1:0]  slot,
  input  acc_t                     cur_a [NPE],
  input  acc_t                     cur_b [NPE],
  input  logic signed [VM_W-1:0]   v_th,
  input  logic signed [VM_W-1:0]   v_leak,
  output logic                     out_valid,
  output logic [NPE-1:0]           spikes
);
  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic signed [VM_W-1:0] vm [BS_N];
    spike_gen_pe u_pe (
      .clk, .rst_n, .in_valid, .init, .slot,
      .cur_a (cur_a[p]), .cur_b (cur_b[p]),
      .v_th, .v_leak,
      .spike (spikes[p]),
      .vmem  (vm)
    );
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
endmodule
