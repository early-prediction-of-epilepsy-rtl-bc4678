// tb_artifact_removal: self-checking test of the Cauchy artifact removal unit.
// A reference model in 64-bit integers recomputes, per channel, the weight
// floor(g^2 * 2^16 / (g^2 + d^2)) with g = 4 m, the output x0 + (d * w >> 16)
// and the running location x0 and mean absolute deviation m (kept with 4 and
// 5 fraction bits), and every output vector is compared with it.
// The stimulus is a slow sine-like ramp with noise plus large spikes; the test
// also checks the 72-cycle latency and that a spike is strongly attenuated.
module tb_artifact_removal;
  import sig_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid;
  sample_vec_t in_data = '0, out_data;

  artifact_removal dut (.*);

  longint loc_m[NCH], scl_m[NCH];
  longint exp_y[NCH];

  function automatic longint sat16(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  task automatic model(input sample_vec_t x);
    for (int c = 0; c < NCH; c++) begin
      longint d, g2, d2, w, step;
      longint g;
      d  = longint'($signed(x[c])) - (loc_m[c] >>> 4);
      g  = scl_m[c] >> 3;
      if (g < 16) g = 16;
      g2 = g * g;
      d2 = d * d;
      w  = (g2 << 16) / (g2 + d2);
      exp_y[c] = sat16((loc_m[c] >>> 4) + ((d * w) >>> 16));
      loc_m[c] = loc_m[c] + ((longint'($signed(x[c])) * 16 - loc_m[c]) >>> 4);
      step = ((d < 0 ? -d : d) * 32 - scl_m[c]) >>> 5;
      scl_m[c] = scl_m[c] + step;
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_att = 0;
  initial begin
    for (int c = 0; c < NCH; c++) begin loc_m[c] = 0; scl_m[c] = 2048; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int k = 0; k < 400; k++) begin
      sample_vec_t x;
      int lat;
      bit spike;
      spike = (k % 50 == 37);
      for (int c = 0; c < NCH; c++) begin
        int v;
        v = ((k * (c + 3)) % 64 - 32) * 8 + int'($urandom_range(0, 40)) - 20;
        if (spike) v = ((c % 2) != 0) ? 20000 : -20000;
        x[c] = 16'(v);
      end
      while (!in_ready) @(posedge clk);
      #1 in_valid = 1; in_data = x;
      @(posedge clk);
      #1 in_valid = 0;
      model(x);
      lat = 0;
      while (!out_valid) begin @(posedge clk); lat++; #1; end
      checks++;
      if (lat != 72) begin failures++; $display("latency %0d", lat); end
      for (int c = 0; c < NCH; c++) begin
        checks++;
        if (longint'($signed(out_data[c])) != exp_y[c]) begin
          failures++;
          if (failures < 10) $display("k=%0d ch=%0d got %0d exp %0d", k, c, $signed(out_data[c]), exp_y[c]);
        end
        if (spike) begin
          checks++;
          if (($signed(out_data[c]) < 0 ? -int'($signed(out_data[c])) : int'($signed(out_data[c]))) > 4000) begin
            failures++;
            $display("spike not attenuated: %0d", $signed(out_data[c]));
          end else n_att++;
        end
      end
      @(posedge clk);
    end
    $display("attenuated spikes: %0d", n_att);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
