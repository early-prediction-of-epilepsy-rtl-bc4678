// artifact_removal: Cauchy-based artifact removal unit (ARU).
//
// Each channel keeps a running location x0 and a running mean absolute
// deviation m; the Cauchy scale is g = G_MUL * m.  A sample x with deviation
// d = x - x0 is replaced by
//     y = x0 + d * g^2 / (g^2 + d^2)
// which is d times the Cauchy density (eq. 3 of the paper) normalised to 1 at
// its peak: small deviations pass almost unchanged, while large, heavy-tailed
// excursions (eye blinks, muscle bursts) are pulled back towards x0.  With
// G_MUL = 4 ordinary EEG keeps more than 90 % of its deviation while a
// deviation of 100 m keeps less than 0.2 %.  The paper takes the unit from
// the literature and gives only the Cauchy model; the influence-function
// form above, the exponential running estimates and the fixed-point widths
// are this design's choices:
//   x0 += (x - x0) >>> LOC_SHIFT,  m += (|d| - m) >>> SCALE_SHIFT,  g >= G_MIN,
// with x0 kept with LOC_SHIFT and m with SCALE_SHIFT fraction bits, so that
// the averages do not drift below the true mean (a plain shift rounds every
// update down, which would add a DC offset to the output).
//
// Interface: in_valid/in_ready accept one 4 x 16-bit sample vector; the
// four channels are processed one after the other with a bit-serial divider
// (17 division steps and one update cycle each): out_valid pulses for one
// cycle with the cleaned vector 4 * 18 = 72 cycles after the vector is
// accepted, and in_ready returns on the cycle after.  At the EEG
// sample rate (250/500 Hz) this is far below the clock budget.
module artifact_removal
  import sig_pkg::*;
#(
  parameter int unsigned LOC_SHIFT   = 4,
  parameter int unsigned SCALE_SHIFT = 5,
  parameter int unsigned G_MUL_LOG2  = 2,     // g = m << G_MUL_LOG2
  parameter int unsigned G_MIN       = 16,
  parameter int unsigned G_INIT      = 256    // g after reset
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  sample_vec_t in_data,
  output logic        out_valid,
  output sample_vec_t out_data
);
  localparam int unsigned FRAC = 16;   // weight precision (Q0.16)

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_APPLY} state_e;
  state_e state;

  localparam int unsigned LW = SW + 1 + LOC_SHIFT;    // x0 with fraction bits
  localparam int unsigned MW = SW + 1 + SCALE_SHIFT;  // m with fraction bits

  logic signed [NCH-1:0][LW-1:0] loc_f;  // x0 * 2^LOC_SHIFT per channel
  logic        [NCH-1:0][MW-1:0] mad_f;  // m * 2^SCALE_SHIFT per channel
  sample_vec_t             x_hold;
  logic [1:0]              ch;
  localparam int unsigned IW = $clog2(FRAC+2);
  logic [IW-1:0]           it;

  sample_t            x0;              // location of current channel
  logic [17:0]        g;               // Cauchy scale of current channel
  logic signed [16:0] d;               // deviation of current channel
  logic [16:0]        dabs;
  logic [35:0]        dd, gg;          // d^2, g^2
  logic [36:0]        den;
  logic [36:0]        rem;
  logic [FRAC:0]      quo;             // weight, Q0.16 (<= 1.0)

  always_comb begin
    logic [MW:0] gs;
    x0 = sample_t'($signed(loc_f[ch]) >>> LOC_SHIFT);
    gs = (MW+1)'(mad_f[ch] >> (SCALE_SHIFT - G_MUL_LOG2));
    g  = (gs < (MW+1)'(G_MIN)) ? 18'(G_MIN) : (gs > (MW+1)'(18'h3FFFF)) ? 18'h3FFFF : 18'(gs);
  end
  assign d    = 17'($signed(x_hold[ch])) - 17'($signed(x0));
  assign dabs = d[16] ? 17'(-d) : 17'(d);
  assign dd   = 36'(dabs) * 36'(dabs);
  assign gg   = 36'(g) * 36'(g);
  assign den  = 37'(gg) + 37'(dd);

  // y = x0 + d * w >> FRAC, saturated to 16 bits
  logic signed [34:0] corr;
  logic signed [17:0] ysum;
  sample_t            y;
  assign corr = (35'(d) * $signed({18'd0, quo})) >>> FRAC;
  assign ysum = 18'($signed(x0)) + 18'(corr);
  assign y    = (ysum > 18'sd32767) ? 16'sh7FFF :
                (ysum < -18'sd32768) ? 16'sh8000 : ysum[15:0];

  // next running estimates
  logic signed [LW:0] loc_step;
  logic signed [MW:0] mad_step;
  assign loc_step = ($signed((LW+1)'($signed(x_hold[ch])) <<< LOC_SHIFT) - (LW+1)'($signed(loc_f[ch]))) >>> LOC_SHIFT;
  assign mad_step = $signed(((MW+1)'(dabs) << SCALE_SHIFT) - (MW+1)'(mad_f[ch])) >>> SCALE_SHIFT;

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      loc_f     <= '0;
      mad_f     <= {NCH{MW'((G_INIT << SCALE_SHIFT) >> G_MUL_LOG2)}};
      x_hold    <= '0;
      ch        <= '0;
      it        <= '0;
      rem       <= '0;
      quo       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          x_hold <= in_data;
          ch     <= '0;
          it     <= '0;
          rem    <= '0;
          quo    <= '0;
          state  <= S_DIV;
        end
        // restoring division: quo = floor(gg * 2^FRAC / den), FRAC+1 bits
        S_DIV: begin
          logic [37:0] trial;
          trial = {rem, 1'b0};
          if (it == 0) begin
            // first step brings in the integer bit: gg / den (0 or 1)
            if (37'(gg) >= den) begin
              rem <= 37'(gg) - den;
              quo <= {quo[FRAC-1:0], 1'b1};
            end else begin
              rem <= 37'(gg);
              quo <= {quo[FRAC-1:0], 1'b0};
            end
          end else begin
            if (trial >= 38'(den)) begin
              rem <= 37'(trial - 38'(den));
              quo <= {quo[FRAC-1:0], 1'b1};
            end else begin
              rem <= 37'(trial);
              quo <= {quo[FRAC-1:0], 1'b0};
            end
          end
          it <= it + 1'b1;
          if (it == IW'(FRAC)) state <= S_APPLY;
        end
        S_APPLY: begin
          out_data[ch] <= y;
          loc_f[ch]    <= LW'((LW+1)'($signed(loc_f[ch])) + loc_step);
          mad_f[ch]    <= MW'((MW+1)'(mad_f[ch]) + mad_step);
          it  <= '0;
          rem <= '0;
          quo <= '0;
          if (ch == 2'(NCH-1)) begin
            out_valid <= 1'b1;
            state     <= S_IDLE;
          end else begin
            ch    <= ch + 1'b1;
            state <= S_DIV;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
