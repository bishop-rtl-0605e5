// weight_glb: the 144KB weight global buffer. Word d holds the 8-bit weights of input
// feature d for 64 output features (512 bits); the paper gives the size and the 512-bit
// port width, the word layout and the second read port are this design's choices (the
// dense and sparse cores fetch weights concurrently). One write port (loaded from DRAM),
// two synchronous read ports with one cycle of latency.
module weight_glb #(
  parameter int unsigned WIDTH = bishop_pkg::WGT_WORD,
  parameter int unsigned DEPTH = bishop_pkg::WGT_DEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re_a,
  input  logic [AW-1:0]    raddr_a,
  output logic [WIDTH-1:0] rdata_a,
  input  logic             re_b,
  input  logic [AW-1:0]    raddr_b,
  output logic [WIDTH-1:0] rdata_b
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re_a) rdata_a <= mem[raddr_a];
    if (re_b) rdata_b <= mem[raddr_b];
  end
endmodule
