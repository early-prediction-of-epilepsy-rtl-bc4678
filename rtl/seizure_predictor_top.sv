// seizure_predictor_top: the digital part of the seizure prediction chip.
//
// Digitised EEG (four channels of 16 bits, from the analog front end) goes
// through three stages, as in the paper's system diagram:
//   signal conditioning   artifact_removal -> dwt_haar -> spike_detector
//                         -> signature_generator (one 165-bit signature per
//                         window of 8 coefficients), with the spike
//                         detector's baseline returned to the front end;
//   adaptive analysis     seizure_detection on the coefficient stream, and
//                         ais_prediction matching signatures against the
//                         Signatures Lookup Table (SLT, 512 x 165), served by
//                         population_manager and signature_mutation, the
//                         latter filtering clones against the Neural
//                         Reference Signature table (NRS, 128 x 165);
//   decision making       decision_controller: alarms, warnings, data
//                         upload and the threshold registers.
// The analog front end and the Bluetooth radio are not part of this RTL:
// their signals are the top's ports (adc_*, baseline_fb, cfg_*, nrs_*,
// out_*).  The SLT port is shared through slt_arbiter.
//
// Timing: the front end offers a vector with adc_valid and holds it until
// adc_ready; the artifact removal takes 72 cycles per vector, so the clock
// must be at least ~80 x the sample rate (40 kHz at 500 Hz; any practical
// clock is far above).  Signatures come every 16 input vectors; a SLT scan
// takes ROWS + ~4 cycles.
module seizure_predictor_top
  import sig_pkg::*;
#(
  parameter int unsigned SLT_ROWS   = 512,
  parameter int unsigned NRS_ROWS   = 128,
  parameter int unsigned NCLONES    = 25,
  parameter int unsigned MUT_CYCLES = 83,
  parameter int unsigned SL_WINDOW  = 64,
  parameter int unsigned SL_DUR     = 2,
  parameter int unsigned HIST       = 64,
  parameter int unsigned SUSTAIN    = 4,
  localparam int unsigned AW        = $clog2(SLT_ROWS),
  localparam int unsigned NW        = $clog2(NRS_ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // analog front end
  input  logic          adc_valid,
  output logic          adc_ready,
  input  sample_vec_t   adc_data,
  output sample_t       baseline_fb,
  // configuration from the wireless link
  input  logic          cfg_we,
  input  logic [1:0]    cfg_addr,
  input  logic [7:0]    cfg_wdata,
  input  logic          nrs_we,
  input  logic [NW-1:0] nrs_addr,
  input  signature_t    nrs_wdata,
  // messages to the wireless link
  output logic          out_valid,
  input  logic          out_ready,
  output out_msg_t      out_msg,
  output logic          alarm,
  output logic          warning,
  // status
  output logic [15:0]   sig_overflow,
  output logic [15:0]   prio_updates,
  output logic [15:0]   clones_accepted,
  output logic [15:0]   clones_rejected,
  output logic [15:0]   msgs_lost,
  output logic [15:0]   warnings_suppressed
);
  // signal conditioning
  logic        aru_valid;
  sample_vec_t aru_data;
  logic        dwt_valid;
  sample_vec_t dwt_approx, dwt_detail;
  logic        spk_valid;
  spike_info_t spk_info;
  sample_vec_t spk_data;
  logic        sig_valid;
  signature_t  sig;
  logic        win_spiky;
  logic [31:0] win_count;

  artifact_removal u_aru (
    .clk, .rst_n,
    .in_valid (adc_valid), .in_ready (adc_ready), .in_data (adc_data),
    .out_valid(aru_valid), .out_data (aru_data)
  );

  dwt_haar u_dwt (
    .clk, .rst_n,
    .in_valid (aru_valid), .in_data (aru_data),
    .out_valid(dwt_valid), .out_approx(dwt_approx), .out_detail(dwt_detail)
  );

  spike_detector u_spk (
    .clk, .rst_n,
    .in_valid (dwt_valid), .in_data (dwt_approx),
    .out_valid(spk_valid), .info (spk_info), .out_data (spk_data),
    .baseline_fb
  );

  signature_generator u_sgu (
    .clk, .rst_n,
    .in_valid (spk_valid), .in_data (spk_data), .in_info (spk_info),
    .sig_valid, .sig, .win_spiky, .win_count
  );

  // configuration / decision
  logic [7:0] td_q8, tp_q8, rem_q8;
  logic       stream_en;

  // detection
  det_result_t det;
  logic        det_win_valid;
  logic [7:0]  det_likelihood;

  seizure_detection #(.L(SL_WINDOW), .DUR(SL_DUR)) u_sdu (
    .clk, .rst_n,
    .in_valid (dwt_valid), .in_data (dwt_approx), .td_q8,
    .win_valid(det_win_valid), .likelihood_q8 (det_likelihood), .result (det)
  );

  // SLT and its users
  logic [2:0]          slt_req, slt_gnt, slt_we_v;
  logic [2:0][AW-1:0]  slt_rd_addr_v, slt_wr_addr_v;
  signature_t [2:0]    slt_wr_data_v;
  logic [AW-1:0]       t_rd_addr, t_wr_addr;
  logic                t_we, slt_busy;
  signature_t          t_wr_data, slt_rd_data;

  signature_table #(.ROWS(SLT_ROWS)) u_slt (
    .clk, .rst_n,
    .we (t_we), .wr_addr (t_wr_addr), .wr_data (t_wr_data),
    .rd_addr (t_rd_addr), .rd_data (slt_rd_data), .busy (slt_busy)
  );

  slt_arbiter #(.N(3), .ROWS(SLT_ROWS)) u_arb (
    .clk, .rst_n, .table_busy (slt_busy),
    .req (slt_req), .gnt (slt_gnt),
    .rd_addr (slt_rd_addr_v), .we (slt_we_v), .wr_addr (slt_wr_addr_v), .wr_data (slt_wr_data_v),
    .t_rd_addr, .t_we, .t_wr_addr, .t_wr_data
  );

  logic          pred_valid;
  pred_result_t  pred;
  logic [AW-1:0] pred_row, pred_src;
  logic          ais_busy;

  ais_prediction #(.ROWS(SLT_ROWS)) u_ais (
    .clk, .rst_n,
    .sig_valid, .sig, .tp_q8,
    .slt_req (slt_req[0]), .slt_gnt (slt_gnt[0]), .slt_rd_addr (slt_rd_addr_v[0]),
    .slt_rd_data, .slt_we (slt_we_v[0]), .slt_wr_addr (slt_wr_addr_v[0]),
    .slt_wr_data (slt_wr_data_v[0]),
    .res_valid (pred_valid), .res (pred), .res_row (pred_row), .src_row (pred_src),
    .busy (ais_busy), .overflow (sig_overflow)
  );

  logic mut_trigger, mut_sustained, mut_busy;

  population_manager #(.ROWS(SLT_ROWS), .H(HIST), .SUSTAIN(SUSTAIN),
                       .MUT_CYCLES(MUT_CYCLES)) u_pm (
    .clk, .rst_n,
    .res_valid (pred_valid), .res (pred), .res_row (pred_row), .src_row (pred_src),
    .ovr_we (slt_we_v[2] && slt_gnt[2]), .ovr_row (slt_wr_addr_v[2]),
    .seizure (det.seizure),
    .slt_req (slt_req[1]), .slt_gnt (slt_gnt[1]), .slt_rd_addr (slt_rd_addr_v[1]),
    .slt_rd_data, .slt_we (slt_we_v[1]), .slt_wr_addr (slt_wr_addr_v[1]),
    .slt_wr_data (slt_wr_data_v[1]),
    .mut_trigger, .mut_sustained, .updates (prio_updates)
  );

  logic [NW-1:0] nrs_rd_addr;
  signature_t    nrs_rd_data;
  logic          nrs_busy;

  signature_table #(.ROWS(NRS_ROWS)) u_nrs (
    .clk, .rst_n,
    .we (nrs_we), .wr_addr (nrs_addr), .wr_data (nrs_wdata),
    .rd_addr (nrs_rd_addr), .rd_data (nrs_rd_data), .busy (nrs_busy)
  );

  signature_mutation #(.ROWS(SLT_ROWS), .NRS_ROWS(NRS_ROWS), .NCLONES(NCLONES)) u_mut (
    .clk, .rst_n,
    .trigger (mut_trigger && !nrs_busy), .rem_q8,
    .slt_req (slt_req[2]), .slt_gnt (slt_gnt[2]), .slt_rd_addr (slt_rd_addr_v[2]),
    .slt_rd_data, .slt_we (slt_we_v[2]), .slt_wr_addr (slt_wr_addr_v[2]),
    .slt_wr_data (slt_wr_data_v[2]),
    .nrs_rd_addr, .nrs_rd_data,
    .busy (mut_busy), .accepted (clones_accepted), .rejected (clones_rejected)
  );

  decision_controller u_dec (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata,
    .td_q8, .tp_q8, .rem_q8, .stream_en,
    .det,
    .pred_valid, .pred, .pred_id (16'(pred_src)),
    .time_stamp (win_count),
    .data_valid (dwt_valid), .data (dwt_approx),
    .out_valid, .out_ready, .out_msg,
    .alarm, .warning, .lost (msgs_lost), .suppressed (warnings_suppressed)
  );
endmodule
