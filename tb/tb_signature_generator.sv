// tb_signature_generator: self-checking test of the signature generator.
// Windows of 8 random coefficient vectors with random spike masks are fed
// in; for each window the expected 165-bit signature (dominant channel by
// spike count, else by peak magnitude; its 8 coefficients; per-channel peak
// >> 4 saturated to 8 bits; control fields) is built independently and
// compared, together with the one-cycle timing of sig_valid, the window
// spike flag and the window count.
module tb_signature_generator;
  import sig_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, sig_valid, win_spiky;
  sample_vec_t in_data = '0;
  spike_info_t in_info = '0;
  signature_t sig;
  logic [31:0] win_count;

  signature_generator dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_peak = 0, n_spk = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 200; w++) begin
      sample_vec_t v [W];
      logic [NCH-1:0] m [W];
      int cnt[NCH], pk[NCH];
      int dom, bc, bp, dp;
      bit any;
      signature_t e;
      any = 0;
      for (int c = 0; c < NCH; c++) begin cnt[c] = 0; pk[c] = 0; end
      for (int i = 0; i < W; i++) begin
        for (int c = 0; c < NCH; c++) begin
          int a;
          v[i][c] = (w % 3 == 0) ? 16'($urandom_range(0, 2000) - 1000) : 16'($urandom);
          a = int'($signed(v[i][c]));
          a = a < 0 ? -a : a;
          if (a > pk[c]) pk[c] = a;
        end
        m[i] = (w % 4 == 1) ? 4'b0 : 4'($urandom_range(0, 15) & $urandom_range(0, 15));
        for (int c = 0; c < NCH; c++) cnt[c] += m[i][c];
        any |= |m[i];
      end
      bc = 0; dom = 0; bp = 0; dp = 0;
      for (int c = 0; c < NCH; c++) begin
        if (cnt[c] > bc) begin bc = cnt[c]; dom = c; end
        if (pk[c] > bp) begin bp = pk[c]; dp = c; end
      end
      if (bc == 0) begin dom = dp; n_peak++; end else n_spk++;
      e = '0;
      for (int i = 0; i < W; i++) e.local_sig[i] = v[i][dom];
      for (int c = 0; c < NCH; c++) e.global_sig[c] = 8'((pk[c] >> 4) > 255 ? 255 : (pk[c] >> 4));
      e.order = 2'(dom);
      e.valid = 1'b1;
      for (int i = 0; i < W; i++) begin
        @(negedge clk);
        in_valid = 1;
        in_data  = v[i];
        in_info  = '0;
        in_info.mask = m[i];
        in_info.any  = |m[i];
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (sig_valid != (i == W - 1)) begin failures++; $display("w=%0d i=%0d sig_valid=%b", w, i, sig_valid); end
        if ($urandom_range(0, 1)) @(negedge clk);
      end
      checks += 3;
      if (sig != e) begin failures++; $display("w=%0d sig mismatch\n got %h\n exp %h", w, sig, e); end
      if (win_spiky != any) begin failures++; $display("w=%0d spiky", w); end
      if (win_count != 32'(w + 1)) begin failures++; $display("w=%0d count %0d", w, win_count); end
    end
    checks++;
    if (n_peak == 0 || n_spk == 0) begin failures++; $display("both dominance rules must occur"); end
    $display("windows by spikes %0d, by peak %0d", n_spk, n_peak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
