// decision_controller: decision-making unit and configuration registers.
//
// Following the paper, this unit compares what the seizure detection unit and
// the AIS prediction unit report and either raises an alarm for a seizure in
// progress (ictal) or a warning for a predicted one (pre-ictal), stating the
// time and the window that caused it; it also holds the sensitivity
// thresholds that the doctor's device sets over the wireless link, and
// forwards EEG data to that device when asked to.  The message format, the
// register map and the arbitration between messages are this design's:
//   * register 0: td (detection threshold, Q0.8, reset 0.23)
//     register 1: tp (prediction threshold, Q0.8, reset 0.09)
//     register 2: rem (negative-selection remove threshold, Q0.8, reset 0.3)
//     register 3: mode, bit 0 = stream DWT coefficients to the device;
//   * an alarm is sent on each seizure onset (rising edge of the detection
//     flag); a warning is sent for each prediction made while no seizure is
//     in progress; a prediction during a seizure only counts as suppressed;
//   * one message register feeds the link (out_valid / out_ready); pending
//     alarm, warning and data wait in one slot each and go out in that order
//     of priority; a newer message of the same kind replaces a waiting one,
//     and for alarms and warnings the replaced one is counted in `lost`.
// `alarm` and `warning` are level outputs: alarm while the seizure lasts,
// warning from a prediction until the next window without one.
module decision_controller
  import sig_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // configuration from the external device
  input  logic        cfg_we,
  input  logic [1:0]  cfg_addr,
  input  logic [7:0]  cfg_wdata,
  output logic [7:0]  td_q8,
  output logic [7:0]  tp_q8,
  output logic [7:0]  rem_q8,
  output logic        stream_en,
  // detection unit
  input  det_result_t det,
  // prediction unit
  input  logic        pred_valid,
  input  pred_result_t pred,
  input  logic [15:0] pred_id,       // SLT row of the winning signature
  // time base and data
  input  logic [31:0] time_stamp,    // signature window count
  input  logic        data_valid,
  input  sample_vec_t data,
  // link to the wireless module
  output logic        out_valid,
  input  logic        out_ready,
  output out_msg_t    out_msg,
  output logic        alarm,
  output logic        warning,
  output logic [15:0] lost,
  output logic [15:0] suppressed
);
  logic     seizure_q;
  logic     alarm_p, warn_p, data_p;
  out_msg_t alarm_m, warn_m, data_m;

  assign alarm = det.seizure;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      td_q8      <= TD_DEFAULT;
      tp_q8      <= TP_DEFAULT;
      rem_q8     <= REM_DEFAULT;
      stream_en  <= 1'b0;
      seizure_q  <= 1'b0;
      alarm_p    <= 1'b0;
      warn_p     <= 1'b0;
      data_p     <= 1'b0;
      alarm_m    <= '0;
      warn_m     <= '0;
      data_m     <= '0;
      out_valid  <= 1'b0;
      out_msg    <= '0;
      warning    <= 1'b0;
      lost       <= '0;
      suppressed <= '0;
    end else begin
      if (cfg_we) begin
        unique case (cfg_addr)
          2'd0: td_q8     <= cfg_wdata;
          2'd1: tp_q8     <= cfg_wdata;
          2'd2: rem_q8    <= cfg_wdata;
          2'd3: stream_en <= cfg_wdata[0];
        endcase
      end

      seizure_q <= det.seizure;

      // pending slots (a slot freed below this cycle may be refilled)
      if (det.seizure && !seizure_q) begin
        if (alarm_p) lost <= lost + 1'b1;
        alarm_p <= 1'b1;
        alarm_m <= '{kind: MSG_ALARM, time_stamp: time_stamp,
                     window_id: 16'(det.pair_mask), data: data};
      end
      if (pred_valid) begin
        warning <= pred.predict && !det.seizure;
        if (pred.predict && det.seizure) suppressed <= suppressed + 1'b1;
        if (pred.predict && !det.seizure) begin
          if (warn_p) lost <= lost + 1'b1;
          warn_p <= 1'b1;
          warn_m <= '{kind: MSG_WARNING, time_stamp: time_stamp,
                      window_id: pred_id, data: data};
        end
      end
      if (data_valid && stream_en) begin
        data_p <= 1'b1;
        data_m <= '{kind: MSG_DATA, time_stamp: time_stamp,
                    window_id: 16'd0, data: data};
      end

      // output register
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!out_valid || out_ready) begin
        if (alarm_p) begin
          out_msg   <= alarm_m;
          out_valid <= 1'b1;
          if (!(det.seizure && !seizure_q)) alarm_p <= 1'b0;
        end else if (warn_p) begin
          out_msg   <= warn_m;
          out_valid <= 1'b1;
          if (!(pred_valid && pred.predict && !det.seizure)) warn_p <= 1'b0;
        end else if (data_p) begin
          out_msg   <= data_m;
          out_valid <= 1'b1;
          if (!(data_valid && stream_en)) data_p <= 1'b0;
        end
      end
    end
  end

  // a message offered to the link stays unchanged until it is taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_msg));
endmodule
