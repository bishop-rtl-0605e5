// tb_weight_glb: writes random 512-bit rows to random addresses of the weight GLB, then
// reads them back through both read ports, checking data and the one-cycle read latency.
module tb_weight_glb;
  import bishop_pkg::*;
  logic clk = 0, we = 0, re_a = 0, re_b = 0;
  logic [WA_W-1:0] waddr, ra, rb;
  logic [WGT_WORD-1:0] wdata, qa, qb;
  int checks = 0, failures = 0;
  logic [WGT_WORD-1:0] shadow [int];
  int addrs [$];
  always #5 clk = ~clk;
  weight_glb dut (.clk, .we, .waddr, .wdata, .re_a, .raddr_a(ra), .rdata_a(qa),
                  .re_b, .raddr_b(rb), .rdata_b(qb));
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic logic [WGT_WORD-1:0] rnd();
    logic [WGT_WORD-1:0] v;
    for (int i = 0; i < WGT_WORD/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  initial begin
    for (int n = 0; n < 200; n++) begin
      int a;
      a = $urandom_range(WGT_DEPTH-1);
      @(negedge clk); we = 1; waddr = WA_W'(a); wdata = rnd();
      if (!shadow.exists(a)) addrs.push_back(a);
      shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n + 1 < addrs.size(); n += 2) begin
      @(negedge clk); re_a = 1; re_b = 1; ra = WA_W'(addrs[n]); rb = WA_W'(addrs[n+1]);
      @(negedge clk); re_a = 0; re_b = 0;
      checks += 2;
      if (qa !== shadow[addrs[n]])   begin failures++; $display("port A mismatch at %0d", addrs[n]); end
      if (qb !== shadow[addrs[n+1]]) begin failures++; $display("port B mismatch at %0d", addrs[n+1]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
