// tb_y_buffer: delivers Y rows with a per-row skew like the attention array does, first
// overwriting (accum=0) and then adding a second key tile (accum=1); checks every entry of
// the scaled output against the sum of both tiles shifted right by shift.
module tb_y_buffer;
  import bishop_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, accum = 0;
  logic y_valid [NB];
  logic [Y_W-1:0] y_in [NB][BV];
  logic [3:0] shift;
  logic [Y_W-1:0] y_scaled [NB][NF][BV];
  int ref_y [NB][NF][BV];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  y_buffer dut (.clk, .rst_n, .start, .accum, .y_valid, .y_in, .shift, .y_scaled);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    foreach (y_valid[i]) y_valid[i] = 0;
    foreach (y_in[i, k]) y_in[i][k] = '0;
    shift = 3;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int tile = 0; tile < 2; tile++) begin
      accum = 1'(tile);
      start = 1; @(negedge clk); start = 0;
      // row i delivers feature f at cycle f + i
      for (int c = 0; c < NF + NB; c++) begin
        for (int i = 0; i < NB; i++) begin
          int f;
          f = c - i;
          y_valid[i] = (f >= 0 && f < NF);
          for (int k = 0; k < BV; k++) begin
            y_in[i][k] = Y_W'($urandom_range(20000));
            if (y_valid[i]) ref_y[i][f][k] = (tile ? ref_y[i][f][k] : 0) + int'(y_in[i][k]);
          end
        end
        @(negedge clk);
      end
      foreach (y_valid[i]) y_valid[i] = 0;
    end
    @(negedge clk);
    for (int i = 0; i < NB; i++)
      for (int f = 0; f < NF; f++)
        for (int k = 0; k < BV; k++) begin
          checks++;
          if (int'(y_scaled[i][f][k]) != (ref_y[i][f][k] >> 3)) begin failures++; if (failures < 10) $display("y[%0d][%0d][%0d]=%0d exp %0d", i, f, k, y_scaled[i][f][k], ref_y[i][f][k] >> 3); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
