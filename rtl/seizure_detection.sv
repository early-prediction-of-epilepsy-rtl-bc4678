// seizure_detection: seizure detection unit (SDU), a synchronisation
// likelihood detector over all channel pairs.
//
// Following the paper, the unit measures how the channels deviate from their
// normal spread, combines the channels into an N x N matrix of pairwise
// likelihood values (N = 4 channels), takes the maximum and compares it with
// the adaptive threshold td; a seizure is declared only when the threshold is
// exceeded for a minimum duration.  The paper does not give the likelihood
// formula; this design uses the simplest hardware form of it:
//   * per channel, a running mean mu and mean absolute deviation m are kept;
//     a sample is a deviation event e_c when |x - mu| > K * m; m learns
//     from |x - mu| clipped at K * m (m += (min(|x-mu|, K*m) - m) >>> DEV_SHIFT,
//     kept with 8 fraction bits so that the update has no downward drift);
//   * over a window of L samples, S_ij = #(e_i and e_j) / L for the six
//     pairs i < j (the upper triangle of the symmetric matrix);
//   * at the end of a window the maximum S_ij is compared with td (Q0.8):
//     S_max * 256 > td * L;
//   * `seizure` is set once DUR consecutive windows exceed td and cleared by
//     the first window that does not; the first WARMUP windows after reset
//     only train the running estimates and never raise it.
// The 5-bit result (seizure flag and the channel mask of the strongest pair)
// matches the 5-bit bus of the paper's system diagram.
//
// Timing: one coefficient vector per in_valid; result and win_valid are
// updated on the cycle after the L-th sample of a window.
module seizure_detection
  import sig_pkg::*;
#(
  parameter int unsigned L         = 64,
  parameter int unsigned DUR       = 2,
  parameter int unsigned K         = 2,
  parameter int unsigned MU_SHIFT  = 6,
  parameter int unsigned DEV_SHIFT = 10,
  parameter int unsigned DEV_INIT  = 64,
  parameter int unsigned WARMUP    = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  sample_vec_t in_data,
  input  logic [7:0]  td_q8,
  output logic        win_valid,
  output logic [7:0]  likelihood_q8,   // S_max in Q0.8 for the last window
  output det_result_t result
);
  localparam int unsigned NPAIR = NCH * (NCH - 1) / 2;
  localparam int unsigned CW    = $clog2(L + 1);

  sample_t [NCH-1:0]       mu;
  logic    [NCH-1:0][23:0] mdev_f;   // m with 8 fraction bits
  logic    [NCH-1:0][15:0] mdev;
  always_comb for (int c = 0; c < NCH; c++) mdev[c] = mdev_f[c][23:8];
  logic    [NPAIR-1:0][CW-1:0] cnt;
  logic    [CW-1:0]        pos;
  logic    [$clog2(DUR+1)-1:0] run;
  logic    [$clog2(WARMUP+1)-1:0] warm;

  logic [NCH-1:0]        ev;
  logic [NCH-1:0][16:0]  adev;
  logic [NCH-1:0][16:0]  dev;

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      dev[c]  = 17'($signed(in_data[c])) - 17'($signed(mu[c]));
      adev[c] = dev[c][16] ? 17'(-$signed(dev[c])) : dev[c];
      ev[c]   = 22'(adev[c]) > 22'(K) * 22'(mdev[c]);
    end
  end

  // pair counts including the current sample, and the window maximum
  logic [NPAIR-1:0][CW-1:0] cnt_n;
  logic [CW-1:0]            smax;
  logic [NCH-1:0]           smask;
  always_comb begin
    int p;
    p     = 0;
    smax  = '0;
    smask = '0;
    for (int i = 0; i < NCH; i++) begin
      for (int j = i + 1; j < NCH; j++) begin
        cnt_n[p] = cnt[p] + CW'(ev[i] & ev[j]);
        if (cnt_n[p] > smax) begin
          smax  = cnt_n[p];
          smask = NCH'((1 << i) | (1 << j));
        end
        p++;
      end
    end
  end

  logic over;
  assign over = (32'(smax) << 8) > (32'(td_q8) * 32'(L));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu            <= '0;
      mdev_f        <= {NCH{24'(DEV_INIT) << 8}};
      cnt           <= '0;
      pos           <= '0;
      run           <= '0;
      warm          <= '0;
      win_valid     <= 1'b0;
      likelihood_q8 <= '0;
      result        <= '0;
    end else begin
      win_valid <= 1'b0;
      if (in_valid) begin
        for (int c = 0; c < NCH; c++) begin
          logic signed [25:0] mstep;
          mu[c]   <= sample_t'($signed(17'($signed(mu[c]))) + ($signed(dev[c]) >>> MU_SHIFT));
          // the deviation is clipped at K * m so that a long seizure raises
          // its own reference only slowly
          mstep     = $signed(((ev[c] ? 26'(K * mdev[c]) : 26'(adev[c])) << 8) - 26'(mdev_f[c])) >>> DEV_SHIFT;
          mdev_f[c] <= 24'(26'(mdev_f[c]) + mstep);
        end
        if (pos == CW'(L - 1)) begin
          pos           <= '0;
          cnt           <= '0;
          win_valid     <= 1'b1;
          likelihood_q8 <= 8'(((32'(smax) << 8) / L > 255) ? 255 : (32'(smax) << 8) / L);
          if (32'(warm) < WARMUP) begin
            // running estimates still settling: no decision yet
            warm             <= warm + 1'b1;
            result.seizure   <= 1'b0;
            result.pair_mask <= smask;
          end else if (over) begin
            if (run < ($clog2(DUR+1))'(DUR)) run <= run + 1'b1;
            result.seizure   <= (32'(run) + 1 >= DUR);
            result.pair_mask <= smask;
          end else begin
            run            <= '0;
            result.seizure <= 1'b0;
            result.pair_mask <= smask;
          end
        end else begin
          pos <= pos + 1'b1;
          cnt <= cnt_n;
        end
      end
    end
  end
endmodule
