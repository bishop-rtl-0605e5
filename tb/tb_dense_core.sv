// tb_dense_core: streams DF random input features (spike bundles for the 16 columns,
// weights for the 32 rows) into the full-size dense core, then checks every partial sum
// acc[feature][bundle][lane] against a direct sum over features, and that busy falls
// exactly ROWS+COLS cycles after the last input (the array's fill/drain latency).
module tb_dense_core;
  import bishop_pkg::*;
  localparam int DF = 24;
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0, busy;
  bundle_t in_spk [NB];
  weight_t in_w [NF];
  acc_t acc [NF][NB][BV];
  bundle_t xs [DF][NB];
  weight_t ws [DF][NF];
  int checks = 0, failures = 0, lat;
  always #5 clk = ~clk;
  dense_core dut (.clk, .rst_n, .clr, .in_valid, .in_spk, .in_w, .busy, .acc);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic run(input int dens);
    for (int d = 0; d < DF; d++) begin
      for (int j = 0; j < NB; j++)
        for (int k = 0; k < BV; k++) xs[d][j][k] = ($urandom_range(99) < dens);
      for (int i = 0; i < NF; i++) ws[d][i] = W_W'($urandom);
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int d = 0; d < DF; d++) begin
      in_valid = 1; in_spk = xs[d]; in_w = ws[d];
      @(negedge clk);
      // a gap cycle now and then
      if (d % 7 == 3) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0; lat = 0;
    while (busy) begin @(negedge clk); lat++; end
    checks++;
    if (lat != NF + NB) begin failures++; $display("drain latency %0d", lat); end
    for (int i = 0; i < NF; i++)
      for (int j = 0; j < NB; j++)
        for (int k = 0; k < BV; k++) begin
          int r;
          r = 0;
          for (int d = 0; d < DF; d++) if (xs[d][j][k]) r += int'(ws[d][i]);
          checks++;
          if (int'(acc[i][j][k]) != r) begin
            failures++;
            if (failures < 10) $display("acc[%0d][%0d][%0d]=%0d exp %0d", i, j, k, acc[i][j][k], r);
          end
        end
  endtask
  initial begin
    foreach (in_spk[j]) in_spk[j] = '0;
    foreach (in_w[i]) in_w[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(50);
    run(15);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
