// dwt_haar: discrete wavelet transform (DWT) stage, one Haar level per channel.
//
// The paper places a DWT after artifact removal to smooth the EEG and to
// reduce the sample space; it does not name the wavelet or the depth.  This
// unit uses the simplest choice, one level of the Haar wavelet: for each pair
// of input vectors (x0, x1) it emits the approximation a = (x0 + x1) >>> 1
// and the detail d = (x0 - x1) >>> 1 for all four channels at once, halving
// the rate.  The approximation (4 x 16 = 64 bits, as in the paper's block
// diagram) feeds the spike detector, the signature generator and the seizure
// detection unit; the detail is brought out for completeness.
//
// Timing: in_valid is sampled every cycle; out_valid pulses one cycle after
// every second accepted vector.
module dwt_haar
  import sig_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  sample_vec_t in_data,
  output logic        out_valid,
  output sample_vec_t out_approx,
  output sample_vec_t out_detail
);
  sample_vec_t first;
  logic        have_first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first      <= '0;
      have_first <= 1'b0;
      out_valid  <= 1'b0;
      out_approx <= '0;
      out_detail <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (!have_first) begin
          first      <= in_data;
          have_first <= 1'b1;
        end else begin
          for (int c = 0; c < NCH; c++) begin
            logic signed [SW:0] s, df;
            s  = (SW+1)'($signed(first[c])) + (SW+1)'($signed(in_data[c]));
            df = (SW+1)'($signed(first[c])) - (SW+1)'($signed(in_data[c]));
            out_approx[c] <= sample_t'(s >>> 1);
            out_detail[c] <= sample_t'(df >>> 1);
          end
          have_first <= 1'b0;
          out_valid  <= 1'b1;
        end
      end
    end
  end
endmodule
