// tb_spike_glb: fills both ping-pong banks with different random words at the same
// addresses, then reads each bank through both ports and checks that the banks are
// independent and that a write to one bank leaves the other untouched.
module tb_spike_glb;
  import bishop_pkg::*;
  logic clk = 0, we = 0, wr_bank = 0, rd_bank = 0, re_a = 0, re_b = 0;
  logic [SA_W-1:0] waddr, ra, rb;
  logic [SPK_WORD-1:0] wdata, qa, qb;
  logic [SPK_WORD-1:0] ref0 [SPK_DEPTH];
  logic [SPK_WORD-1:0] ref1 [SPK_DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  spike_glb dut (.clk, .we, .wr_bank, .waddr, .wdata, .rd_bank, .re_a, .raddr_a(ra), .rdata_a(qa),
                 .re_b, .raddr_b(rb), .rdata_b(qb));
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic logic [SPK_WORD-1:0] rnd();
    logic [SPK_WORD-1:0] v;
    for (int i = 0; i < SPK_WORD; i++) v[i] = 1'($urandom);
    return v;
  endfunction
  initial begin
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < SPK_DEPTH; a++) begin
        @(negedge clk); we = 1; wr_bank = 1'(b); waddr = SA_W'(a); wdata = rnd();
        if (b == 0) ref0[a] = wdata; else ref1[a] = wdata;
      end
    @(negedge clk); we = 0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < SPK_DEPTH; a += 3) begin
        @(negedge clk); rd_bank = 1'(b); re_a = 1; re_b = 1; ra = SA_W'(a); rb = SA_W'(SPK_DEPTH-1-a);
        @(negedge clk); re_a = 0; re_b = 0;
        checks += 2;
        if (qa !== (b ? ref1[a] : ref0[a])) begin failures++; $display("bank %0d A mismatch at %0d", b, a); end
        if (qb !== (b ? ref1[SPK_DEPTH-1-a] : ref0[SPK_DEPTH-1-a])) begin failures++; $display("bank %0d B mismatch", b); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
