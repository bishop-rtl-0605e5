// tb_ecp_filter: streams random Q bundles and K tokens of a head with per-row activity
// rates, then checks the keep masks against active-bundle counts compared with theta_q
// and theta_k (kept when the count is not below the threshold), for two thresholds.
module tb_ecp_filter;
  import bishop_pkg::*;
  localparam int DH = 48;
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0;
  bundle_t q_bun [NB];
  logic [BS_T-1:0] k_tok [NK];
  logic [DI_W:0] theta_q, theta_k;
  logic [NB-1:0] q_keep;
  logic [NK-1:0] k_keep;
  int cq [NB], ck [NK];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ecp_filter dut (.clk, .rst_n, .clr, .in_valid, .q_bun, .k_tok, .theta_q, .theta_k, .q_keep, .k_keep);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    foreach (q_bun[i]) q_bun[i] = '0;
    foreach (k_tok[j]) k_tok[j] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      theta_q = rep ? 10 : 6; theta_k = rep ? 6 : 10;
      foreach (cq[i]) cq[i] = 0;
      foreach (ck[j]) ck[j] = 0;
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int d = 0; d < DH; d++) begin
        for (int i = 0; i < NB; i++) begin
          q_bun[i] = ($urandom_range(DH-1) < i * 3) ? (BV'($urandom) | BV'(1)) : '0;
          if (|q_bun[i]) cq[i]++;
        end
        for (int j = 0; j < NK; j++) begin
          k_tok[j] = ($urandom_range(DH-1) < j) ? BS_T'($urandom_range(1, 3)) : '0;
          if (|k_tok[j]) ck[j]++;
        end
        in_valid = 1; @(negedge clk);
      end
      in_valid = 0; @(negedge clk);
      for (int i = 0; i < NB; i++) begin checks++; if (q_keep[i] != (cq[i] >= int'(theta_q))) begin failures++; $display("q row %0d cnt %0d keep %0b", i, cq[i], q_keep[i]); end end
      for (int j = 0; j < NK; j++) begin checks++; if (k_keep[j] != (ck[j] >= int'(theta_k))) begin failures++; $display("k tok %0d cnt %0d keep %0b", j, ck[j], k_keep[j]); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
