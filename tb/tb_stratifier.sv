// tb_stratifier: offers random feature words whose bundle activity ranges from none to
// all NB bundles, and checks the dense/sparse counts and both index lists against a
// count of active bundles compared with theta_s (dense when the count exceeds it).
module tb_stratifier;
  import bishop_pkg::*;
  localparam int IW = $clog2(D_MAX);
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0;
  logic [IW-1:0] in_feat, dri, sri, dfeat, sfeat;
  logic [NB*BV-1:0] in_word;
  logic [$clog2(NB+1)-1:0] theta_s;
  logic [IW:0] n_dense, n_sparse;
  int checks = 0, failures = 0;
  int exp_d [$], exp_s [$];
  always #5 clk = ~clk;
  stratifier dut (.clk, .rst_n, .clr, .in_valid, .in_feat, .in_word, .theta_s, .n_dense, .n_sparse,
                  .dense_rd_idx(dri), .dense_feat(dfeat), .sparse_rd_idx(sri), .sparse_feat(sfeat));
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    theta_s = 6; dri = '0; sri = '0; in_feat = '0; in_word = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      exp_d.delete(); exp_s.delete();
      theta_s = rep ? 3 : 6;
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int d = 0; d < 300; d++) begin
        int na, act;
        na = 0; act = $urandom_range(NB);
        in_word = '0;
        for (int j = 0; j < NB; j++)
          if ($urandom_range(NB-1) < act) begin
            in_word[j*BV + $urandom_range(BV-1)] = 1'b1; na++;
          end
        in_feat = IW'(d); in_valid = 1;
        if (na > theta_s) exp_d.push_back(d); else exp_s.push_back(d);
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      checks += 2;
      if (n_dense != (IW+1)'(exp_d.size()))  begin failures++; $display("n_dense %0d exp %0d", n_dense, exp_d.size()); end
      if (n_sparse != (IW+1)'(exp_s.size())) begin failures++; $display("n_sparse %0d exp %0d", n_sparse, exp_s.size()); end
      foreach (exp_d[i]) begin dri = IW'(i); #1; checks++; if (dfeat != IW'(exp_d[i])) failures++; end
      foreach (exp_s[i]) begin sri = IW'(i); #1; checks++; if (sfeat != IW'(exp_s[i])) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
