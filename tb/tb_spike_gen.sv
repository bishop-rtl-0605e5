// tb_spike_gen: drives all 512 PEs of the spike generator through random bundles of
// currents (BS_T time points for each of the BS_N token slots, with init on the first
// time point) and checks every spike against a direct LIF model: V += a + b - leak, fire
// and reset to 0 when V > v_th. Spikes must appear exactly one cycle after their input.
module tb_spike_gen;
  import bishop_pkg::*;
  localparam int NPE = NB * NF;
  logic clk = 0, rst_n = 0, in_valid = 0, init = 0, out_valid;
  logic [$clog2(BS_N)-1:0] slot;
  acc_t cur_a [NPE], cur_b [NPE];
  logic signed [VM_W-1:0] v_th, v_leak;
  logic [NPE-1:0] spikes;
  longint vref [NPE][BS_N];
  logic [NPE-1:0] exp_spk;
  int checks = 0, failures = 0, fired = 0;
  always #5 clk = ~clk;
  spike_gen dut (.clk, .rst_n, .in_valid, .init, .slot, .cur_a, .cur_b, .v_th, .v_leak, .out_valid, .spikes);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    v_th = 300; v_leak = 7; slot = '0;
    foreach (cur_a[p]) begin cur_a[p] = '0; cur_b[p] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int tile = 0; tile < 4; tile++)
      for (int t = 0; t < BS_T; t++)
        for (int n = 0; n < BS_N; n++) begin
          in_valid = 1; slot = ($clog2(BS_N))'(n); init = (tile == 0 && t == 0);
          for (int p = 0; p < NPE; p++) begin
            longint v;
            cur_a[p] = ACC_W'($urandom_range(400) - 150);
            cur_b[p] = ACC_W'($urandom_range(200) - 100);
            v = (init ? 0 : vref[p][n]) + longint'(cur_a[p]) + longint'(cur_b[p]) - longint'(v_leak);
            exp_spk[p] = (v > longint'(v_th));
            vref[p][n] = exp_spk[p] ? 0 : v;
          end
          @(negedge clk);
          in_valid = 0;
          checks++;
          if (!out_valid) failures++;
          for (int p = 0; p < NPE; p++) begin
            checks++;
            if (spikes[p] != exp_spk[p]) begin failures++; if (failures < 10) $display("pe %0d spike %0b exp %0b", p, spikes[p], exp_spk[p]); end
            fired += int'(spikes[p]);
          end
        end
    checks++;
    if (fired == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
