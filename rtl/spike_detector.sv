// spike_detector: finds spiking channels and the dominant channel in the
// DWT coefficient stream, and produces the adaptive baseline fed back to the
// analog front end.
//
// The paper's block diagrams give this unit its name and its buses: 64 bits
// of DWT coefficients in, 8 bits of spike information to the signature
// generator and a 16-bit "adaptive baseline feedback" to the AFE.  How it
// works is this design's choice:
//   * each channel keeps a running baseline b (b += (x - b) >>> BASE_SHIFT)
//     and a running mean absolute deviation m (m += (|x-b| - m) >>> DEV_SHIFT);
//   * channel c spikes when |x - b| > K * m and |x - b| >= MIN_DEV;
//   * the dominant channel is the one with the largest |x - b|;
//   * the baseline feedback is the mean of the four channel baselines.
// Spike decisions use the estimates from before the current sample.
//
// Timing: one coefficient vector per in_valid; info, out_data (the same
// coefficients) and out_valid appear on the next cycle, registered.
module spike_detector
  import sig_pkg::*;
#(
  parameter int unsigned BASE_SHIFT = 6,
  parameter int unsigned DEV_SHIFT  = 5,
  parameter int unsigned K          = 4,
  parameter int unsigned MIN_DEV    = 64,
  parameter int unsigned DEV_INIT   = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  sample_vec_t in_data,
  output logic        out_valid,
  output spike_info_t info,
  output sample_vec_t out_data,     // the coefficients, aligned with info
  output sample_t     baseline_fb
);
  sample_t [NCH-1:0]       base;
  logic    [NCH-1:0][15:0] mdev;

  logic signed [NCH-1:0][16:0] dev;
  logic        [NCH-1:0][16:0] adev;
  spike_info_t                 info_c;

  always_comb begin
    logic [16:0] best;
    info_c = '0;
    best   = '0;
    for (int c = 0; c < NCH; c++) begin
      dev[c]  = 17'($signed(in_data[c])) - 17'($signed(base[c]));
      adev[c] = dev[c][16] ? 17'(-dev[c]) : 17'(dev[c]);
      info_c.mask[c] = (22'(adev[c]) > 22'(K) * 22'(mdev[c])) && (adev[c] >= 17'(MIN_DEV));
      if (adev[c] > best) begin
        best          = adev[c];
        info_c.dom_ch = 2'(c);
        info_c.neg    = dev[c][16];
      end
    end
    info_c.any = |info_c.mask;
  end

  logic signed [17:0] base_sum;
  always_comb begin
    base_sum = '0;
    for (int c = 0; c < NCH; c++) base_sum = base_sum + 18'($signed(base[c]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base        <= '0;
      mdev        <= {NCH{16'(DEV_INIT)}};
      out_valid   <= 1'b0;
      info        <= '0;
      out_data    <= '0;
      baseline_fb <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        info     <= info_c;
        out_data <= in_data;
        for (int c = 0; c < NCH; c++) begin
          logic signed [17:0] mstep;
          base[c] <= sample_t'($signed(17'($signed(base[c]))) + ($signed(dev[c]) >>> BASE_SHIFT));
          mstep    = $signed(18'(adev[c]) - 18'(mdev[c])) >>> DEV_SHIFT;
          mdev[c] <= 16'(18'(mdev[c]) + mstep);
        end
      end
      baseline_fb <= sample_t'(base_sum >>> 2);
    end
  end
endmodule
