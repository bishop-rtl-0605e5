// tb_attn_pe: mode 1 - random Q bundle and key spikes over DH features, checks each score
// S[t,n] = sum over features of Q[t,n] AND K[t]; then mode 2 - random value spikes and
// partial sums, checks y_out = y_in + (V[t] ? S : 0) one cycle later and the
// pass-through of Q, K/V and valid.
module tb_attn_pe;
  import bishop_pkg::*;
  localparam int DH = 60;
  logic clk = 0, rst_n = 0, clr = 0, hv = 0, hvo;
  attn_mode_e mode;
  bundle_t q, qo;
  logic [Y_W-1:0] yi [BV], yo [BV];
  logic [BS_T-1:0] kv, kvo;
  logic [S_W-1:0] s [BV];
  int ref_s [BV];
  int exp_y [BV];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  attn_pe dut (.clk, .rst_n, .clr, .mode, .h_valid_in(hv), .q_in(q), .y_in(yi), .kv_in(kv),
               .h_valid_out(hvo), .q_out(qo), .y_out(yo), .kv_out(kvo), .s);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    mode = MODE_S; q = '0; kv = '0; foreach (yi[k]) yi[k] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    clr = 1; @(negedge clk); clr = 0;
    foreach (ref_s[k]) ref_s[k] = 0;
    for (int d = 0; d < DH; d++) begin
      hv = 1'($urandom_range(4) != 0); q = BV'($urandom); kv = BS_T'($urandom);
      if (hv) for (int k = 0; k < BV; k++) if (q[k] && kv[k / BS_N]) ref_s[k]++;
      @(negedge clk);
      checks += 3;
      if (qo !== q) failures++;
      if (kvo !== kv) failures++;
      if (hvo !== hv) failures++;
    end
    hv = 0; kv = '0;
    for (int k = 0; k < BV; k++) begin checks++; if (int'(s[k]) != ref_s[k]) begin failures++; $display("S[%0d]=%0d exp %0d", k, s[k], ref_s[k]); end end
    mode = MODE_Y;
    for (int d = 0; d < 40; d++) begin
      hv = 1; kv = BS_T'($urandom);
      for (int k = 0; k < BV; k++) begin
        yi[k] = Y_W'($urandom_range(5000));
        exp_y[k] = int'(yi[k]) + (kv[k / BS_N] ? ref_s[k] : 0);
      end
      @(negedge clk);
      for (int k = 0; k < BV; k++) begin checks++; if (int'(yo[k]) != exp_y[k]) failures++; end
    end
    // scores are kept through mode 2
    for (int k = 0; k < BV; k++) begin checks++; if (int'(s[k]) != ref_s[k]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
