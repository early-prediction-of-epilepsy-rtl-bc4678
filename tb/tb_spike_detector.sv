// tb_spike_detector: self-checking test of the spike detector.  A reference
// model keeps the same running baseline and mean absolute deviation per
// channel and predicts the spike mask, the dominant channel, its polarity,
// the aligned coefficient output and the baseline feedback.  The stimulus is
// low-level noise with a DC offset and occasional spikes on chosen channels,
// so both quiet and spiking vectors are checked.
module tb_spike_detector;
  import sig_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  sample_vec_t in_data = '0, out_data;
  spike_info_t info;
  sample_t baseline_fb;

  spike_detector dut (.*);

  int base_m[NCH], mdev_m[NCH];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_spk = 0;
  initial begin
    for (int c = 0; c < NCH; c++) begin base_m[c] = 0; mdev_m[c] = 64; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      sample_vec_t x;
      spike_info_t e;
      int best;
      int bsum;
      for (int c = 0; c < NCH; c++) x[c] = 16'(300 + int'($urandom_range(0, 100)) - 50);
      if (k % 37 == 20) x[k % NCH] = 16'(k % 2 ? 3000 : -2500);
      if (k % 101 == 50) begin x[0] = 16'(2000); x[2] = 16'(-2600); end
      @(negedge clk); in_valid = 1; in_data = x;
      // model
      e = '0; best = 0;
      for (int c = 0; c < NCH; c++) begin
        int d, a;
        d = int'($signed(x[c])) - base_m[c];
        a = d < 0 ? -d : d;
        e.mask[c] = (a > 4 * mdev_m[c]) && (a >= 64);
        if (a > best) begin best = a; e.dom_ch = 2'(c); e.neg = d < 0; end
        base_m[c] = base_m[c] + (d >>> 6);
        mdev_m[c] = mdev_m[c] + ((a - mdev_m[c]) >>> 5);
      end
      e.any = |e.mask;
      bsum = 0;
      for (int c = 0; c < NCH; c++) bsum += base_m[c];
      @(negedge clk); in_valid = 0;
      checks += 3;
      if (!out_valid) begin failures++; $display("k=%0d no out_valid", k); end
      if (info != e) begin failures++; $display("k=%0d info %b exp %b", k, info, e); end
      if (out_data != x) begin failures++; $display("k=%0d data", k); end
      if (e.any) n_spk++;
      @(negedge clk);
      checks++;
      if (int'($signed(baseline_fb)) != (bsum >>> 2)) begin
        failures++; $display("k=%0d baseline %0d exp %0d", k, $signed(baseline_fb), bsum >>> 2);
      end
    end
    checks++;
    if (n_spk < 50) begin failures++; $display("too few spikes %0d", n_spk); end
    $display("spiking vectors: %0d", n_spk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
