// tb_seizure_detection: self-checking test of the synchronisation-likelihood
// seizure detector.  A reference model recomputes the per-channel deviation
// events, the six pair counts, the maximum likelihood, the td comparison and
// the duration rule for every window.  The stimulus alternates quiet,
// independent noise with a synchronous large-amplitude rhythm on all
// channels (a seizure), a burst on only two channels and one on a single
// channel (which must leave every pair count at zero), and changes td on
// the fly; the test checks every window's result and likelihood, that the
// seizure flag rises only after DUR = 2 windows over threshold and that it
// falls again.
module tb_seizure_detection;
  import sig_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int L = 64;
  logic in_valid = 0, win_valid;
  sample_vec_t in_data = '0;
  logic [7:0] td_q8 = TD_DEFAULT, likelihood_q8;
  det_result_t result;

  seizure_detection dut (.*);

  int mu_m[NCH], mdf_m[NCH], cnt_m[6], run_m;
  det_result_t res_m;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_rise = 0, n_fall = 0;
  logic prev_seiz = 0;
  initial begin
    for (int c = 0; c < NCH; c++) begin mu_m[c] = 0; mdf_m[c] = 64 << 8; end
    for (int p = 0; p < 6; p++) cnt_m[p] = 0;
    run_m = 0; res_m = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 40; w++) begin
      int phase;
      int smax, lk;
      logic [3:0] smask;
      bit over;
      phase = (w >= 10 && w < 16) ? 1 : (w >= 24 && w < 27) ? 2 : (w >= 32 && w < 36) ? 1 : (w >= 37) ? 3 : 0;
      if (w == 30) td_q8 = 8'd100;
      for (int t = 0; t < L; t++) begin
        sample_vec_t x;
        logic [3:0] ev;
        int p;
        for (int c = 0; c < NCH; c++) begin
          int v;
          v = int'($urandom_range(0, 120)) - 60;
          if (phase == 1) v += (((t / 4) % 2) != 0) ? 3000 : -3000;
          if (phase == 2 && c < 2) v += (((t / 4) % 2) != 0) ? 3000 : -3000;
          if (phase == 3 && c == 0) v += (((t / 4) % 2) != 0) ? 3000 : -3000;
          x[c] = 16'(v);
        end
        for (int c = 0; c < NCH; c++) begin
          int d, a;
          d = int'($signed(x[c])) - mu_m[c];
          a = d < 0 ? -d : d;
          ev[c] = a > 2 * (mdf_m[c] >> 8);
          mu_m[c] += d >>> 6;
          mdf_m[c] += (((ev[c] ? 2 * (mdf_m[c] >> 8) : a) << 8) - mdf_m[c]) >>> 10;
        end
        p = 0;
        for (int i = 0; i < NCH; i++)
          for (int j = i + 1; j < NCH; j++) begin
            cnt_m[p] += ev[i] & ev[j];
            p++;
          end
        @(negedge clk); in_valid = 1; in_data = x;
        @(negedge clk); in_valid = 0;
        checks++;
        if (win_valid != (t == L - 1)) begin failures++; $display("w=%0d t=%0d win_valid", w, t); end
      end
      smax = 0; smask = 0;
      begin
        int p;
        p = 0;
        for (int i = 0; i < NCH; i++)
          for (int j = i + 1; j < NCH; j++) begin
            if (cnt_m[p] > smax) begin smax = cnt_m[p]; smask = 4'((1 << i) | (1 << j)); end
            cnt_m[p] = 0;
            p++;
          end
      end
      over = (smax * 256) > (int'(td_q8) * L);
      if (w < 4) begin
        res_m.seizure = 0;
      end else if (over) begin
        if (run_m < 2) run_m++;
        res_m.seizure = (run_m >= 2);
      end else begin
        run_m = 0;
        res_m.seizure = 0;
      end
      res_m.pair_mask = smask;
      lk = smax * 256 / L;
      if (lk > 255) lk = 255;
      checks += 2;
      if (result != res_m) begin failures++; $display("w=%0d result %b exp %b", w, result, res_m); end
      if (int'(likelihood_q8) != lk) begin failures++; $display("w=%0d lk %0d exp %0d", w, likelihood_q8, lk); end
      if (result.seizure && !prev_seiz) n_rise++;
      if (!result.seizure && prev_seiz) n_fall++;
      prev_seiz = result.seizure;
      // phase expectations independent of the model details
      if (w == 10 || w == 24) begin checks++; if (result.seizure) begin failures++; $display("w=%0d seizure too early", w); end end
      if (w == 11 || w == 15) begin checks++; if (!result.seizure) begin failures++; $display("w=%0d seizure missed", w); end end
      if (w >= 38) begin checks++; if (likelihood_q8 > 8'd8) begin failures++; $display("w=%0d single-channel burst counted as synchrony", w); end end
      if (w == 20) begin checks++; if (result.seizure) begin failures++; $display("w=%0d seizure not cleared", w); end end
    end
    checks++;
    if (n_rise < 2 || n_fall < 2) begin failures++; $display("rises %0d falls %0d", n_rise, n_fall); end
    $display("onsets %0d ends %0d", n_rise, n_fall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
