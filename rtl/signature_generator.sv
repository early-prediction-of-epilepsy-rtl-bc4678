// signature_generator: builds one 165-bit neural signature per window of
// W = 8 DWT coefficient vectors.
//
// The paper fixes the window (W = 8 signature units, chosen from its
// width/accuracy/area study) and the word layout: a local signature of
// 8 x 16 bits from the dominant spiking channel, a global signature of
// 4 x 8 bits covering all channels, and 5 control bits (priority, ordering,
// control).  Which channel is dominant and what the global genes measure are
// this design's choices:
//   * dominant channel = the channel with most spikes in the window (ties to
//     the lower index); with no spike at all, the channel with the largest
//     peak magnitude;
//   * local genes = the dominant channel's 8 coefficients, oldest first;
//   * global gene c = min(255, peak |coefficient| of channel c >> GSHIFT);
//   * priority = 0 (assigned later by the population manager), ordering =
//     dominant channel, control = 1 (valid row).
// Windows are consecutive and do not overlap.
//
// Timing: one vector per in_valid (with the spike information of the same
// vector); sig_valid pulses on the cycle after the W-th vector, and sig,
// win_spiky and win_count hold until the next window ends.
module signature_generator
  import sig_pkg::*;
#(
  parameter int unsigned GSHIFT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  sample_vec_t in_data,
  input  spike_info_t in_info,
  output logic        sig_valid,
  output signature_t  sig,
  output logic        win_spiky,     // a spike occurred in the window
  output logic [31:0] win_count      // windows emitted so far
);
  sample_vec_t [W-1:0]           buffer;
  logic [$clog2(W)-1:0]          pos;
  logic [NCH-1:0][$clog2(W):0]   spikes;
  logic [NCH-1:0][15:0]          peak;
  logic                          any_spike;

  // running statistics including the current vector
  logic [NCH-1:0][$clog2(W):0]   spikes_n;
  logic [NCH-1:0][15:0]          peak_n;
  sample_vec_t [W-1:0]           buffer_n;
  logic [1:0]                    dom;
  signature_t                    sig_n;

  always_comb begin
    logic [$clog2(W):0] best_cnt;
    logic [15:0]        best_peak;
    logic [1:0]         dom_peak;
    buffer_n      = buffer;
    buffer_n[pos] = in_data;
    for (int c = 0; c < NCH; c++) begin
      logic [16:0] a;
      a = in_data[c][SW-1] ? 17'(-17'($signed(in_data[c]))) : 17'($signed(in_data[c]));
      spikes_n[c] = (pos == 0 ? '0 : spikes[c]) + ($clog2(W)+1)'(in_info.mask[c]);
      peak_n[c]   = (pos == 0) ? 16'(a > 17'hFFFF ? 17'hFFFF : a)
                                : ((17'(peak[c]) > a) ? peak[c] : 16'(a > 17'hFFFF ? 17'hFFFF : a));
    end
    best_cnt  = '0;
    best_peak = '0;
    dom       = '0;
    dom_peak  = '0;
    for (int c = 0; c < NCH; c++) begin
      if (spikes_n[c] > best_cnt) begin
        best_cnt = spikes_n[c];
        dom      = 2'(c);
      end
      if (peak_n[c] > best_peak) begin
        best_peak = peak_n[c];
        dom_peak  = 2'(c);
      end
    end
    if (best_cnt == 0) dom = dom_peak;

    sig_n = '0;
    for (int i = 0; i < W; i++) sig_n.local_sig[i] = buffer_n[i][dom];
    for (int c = 0; c < NCH; c++) begin
      logic [15:0] g;
      g = peak_n[c] >> GSHIFT;
      sig_n.global_sig[c] = (g > 16'd255) ? 8'd255 : g[7:0];
    end
    sig_n.prio  = 2'd0;
    sig_n.order = dom;
    sig_n.valid = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buffer    <= '0;
      pos       <= '0;
      spikes    <= '0;
      peak      <= '0;
      any_spike <= 1'b0;
      sig_valid <= 1'b0;
      sig       <= '0;
      win_spiky <= 1'b0;
      win_count <= '0;
    end else begin
      sig_valid <= 1'b0;
      if (in_valid) begin
        buffer    <= buffer_n;
        spikes    <= spikes_n;
        peak      <= peak_n;
        any_spike <= (pos == 0 ? 1'b0 : any_spike) | in_info.any;
        pos       <= pos + 1'b1;
        if (pos == $clog2(W)'(W-1)) begin
          sig_valid <= 1'b1;
          sig       <= sig_n;
          win_spiky <= any_spike | in_info.any;
          win_count <= win_count + 1;
        end
      end
    end
  end
endmodule
