// spike_glb: the ping-pong pair of spiking TT-bundle global buffers (GLB0/GLB1, 12KB
// each, per the paper). A word holds one feature of NB bundles (NB*BV bits). The bank
// selected by rd_bank is read by the cores while the other bank takes the layer's output
// spikes or a DRAM load; which bank is which is chosen per operation. Two synchronous read
// ports (one cycle latency, both on rd_bank) and one write port, a choice of this design.
module spike_glb #(
  parameter int unsigned WIDTH = bishop_pkg::SPK_WORD,
  parameter int unsigned DEPTH = bishop_pkg::SPK_DEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic             wr_bank,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rd_bank,
  input  logic             re_a,
  input  logic [AW-1:0]    raddr_a,
  output logic [WIDTH-1:0] rdata_a,
  input  logic             re_b,
  input  logic [AW-1:0]    raddr_b,
  output logic [WIDTH-1:0] rdata_b
);
  logic [WIDTH-1:0] bank0 [DEPTH];
  logic [WIDTH-1:0] bank1 [DEPTH];

  always_ff @(posedge clk) begin
    if (we && !wr_bank) bank0[waddr] <= wdata;
    if (we &&  wr_bank) bank1[waddr] <= wdata;
    if (re_a) rdata_a <= rd_bank ? bank1[raddr_a] : bank0[raddr_a];
    if (re_b) rdata_b <= rd_bank ? bank1[raddr_b] : bank0[raddr_b];
  end
endmodule
