// tb_dense_pe: drives random spike bundles and weights into one dense PE and checks the
// per-lane select-accumulate sums, the one-cycle pass-through of spikes, valid and weight,
// and the synchronous clear.
module tb_dense_pe;
  import bishop_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, vi = 0, vo;
  bundle_t si, so;
  weight_t wi, wo;
  acc_t acc [BV];
  int ref_acc [BV];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  dense_pe dut (.clk, .rst_n, .clr, .s_valid_in(vi), .s_in(si), .w_in(wi), .s_valid_out(vo), .s_out(so), .w_out(wo), .acc);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    si = '0; wi = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      clr = 1; @(negedge clk); clr = 0;
      foreach (ref_acc[k]) ref_acc[k] = 0;
      for (int n = 0; n < 200; n++) begin
        vi = 1'($urandom_range(3) != 0); si = BV'($urandom); wi = W_W'($urandom);
        if (vi) for (int k = 0; k < BV; k++) if (si[k]) ref_acc[k] += int'(wi);
        @(negedge clk);
        checks += 3;
        if (so !== si) failures++;
        if (wo !== wi) failures++;
        if (vo !== vi) failures++;
      end
      vi = 0; @(negedge clk);
      for (int k = 0; k < BV; k++) begin
        checks++;
        if (int'(acc[k]) != ref_acc[k]) begin failures++; $display("lane %0d got %0d exp %0d", k, acc[k], ref_acc[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
