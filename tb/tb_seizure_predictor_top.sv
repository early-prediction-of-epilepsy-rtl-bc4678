// tb_seizure_predictor_top: end-to-end test of the whole predictor at its
// default sizes (512-row SLT, 128-row reference table, 25 clones, 83-window
// mutation cycle).  It plays the analog front end and the phone:
//   * EEG: four channels of a DC offset plus independent noise ("normal"),
//     a repeated rhythmic pattern on channel 1 ("pre-ictal"), and a
//     synchronous large rhythm on all channels ("seizure"); the sequence is
//     normal, pre-ictal, seizure, a long normal stretch, the same pre-ictal
//     pattern, the same seizure, normal;
//   * phone: sets the thresholds, loads a reference signature into the
//     reference table, turns coefficient streaming on for a while, and takes
//     every message.
// Checks made independently of the design's internals: an alarm during each
// seizure and none before the first, a warning before the second alarm
// (the prediction learnt from the first seizure), data messages only while
// streaming, non-decreasing time stamps, and the baseline feedback near the
// DC offset.  It also counts how often each mechanism occurred (front-end
// stall, artifact attenuation, match, append, swap to the top, priority
// update, mutation by window count and by sustained match, clone accepted
// and rejected, suppressed warning, alarm, warning, data upload) and counts a
// failure for any that never did.
module tb_seizure_predictor_top;
  import sig_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic adc_valid = 0, adc_ready;
  sample_vec_t adc_data = '0;
  sample_t baseline_fb;
  logic cfg_we = 0; logic [1:0] cfg_addr = '0; logic [7:0] cfg_wdata = '0;
  logic nrs_we = 0; logic [6:0] nrs_addr = '0; signature_t nrs_wdata = '0;
  logic out_valid, out_ready = 1, alarm, warning;
  out_msg_t out_msg;
  logic [15:0] sig_overflow, prio_updates, clones_accepted, clones_rejected, msgs_lost, warnings_suppressed;

  seizure_predictor_top dut (.*);

  localparam int DC = 40;
  int vec_no = 0;
  int phase = 0;          // 0 normal, 1 pre-ictal, 2 seizure
  int episode = 0;
  int seiz_start [2];
  int first_alarm [2], first_warn [2];
  int n_alarm = 0, n_warn = 0, n_data = 0, n_data_bad = 0, n_stall = 0;
  int n_match = 0, n_append = 0, n_swap = 0, n_mut_win = 0, n_mut_sus = 0, n_atten = 0;
  logic [31:0] last_ts = 0;
  bit streaming = 0;

  // message sink
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (out_msg.time_stamp < last_ts) begin failures++; $display("time stamp went back"); end
    checks++;
    last_ts = out_msg.time_stamp;
    case (out_msg.kind)
      MSG_ALARM: begin
        n_alarm++;
        if (episode < 2 && first_alarm[episode] < 0) first_alarm[episode] = vec_no;
        if (vec_no < seiz_start[0]) begin failures++; $display("alarm before any seizure at vector %0d", vec_no); end
      end
      MSG_WARNING: begin
        n_warn++;
        if (episode < 2 && first_warn[episode] < 0) first_warn[episode] = vec_no;
      end
      MSG_DATA: begin
        n_data++;
        if (!streaming) n_data_bad++;
      end
      default: begin failures++; $display("empty message"); end
    endcase
  end

  // mechanism counters, observed at the units' outputs
  always @(posedge clk) if (rst_n) begin
    if (adc_valid && !adc_ready) n_stall++;
    if (dut.pred_valid && dut.pred.match) n_match++;
    if (dut.pred_valid && dut.pred.appended) n_append++;
    if (dut.pred_valid && dut.pred.match && dut.pred_src != 0) n_swap++;
    if (dut.mut_trigger && !dut.mut_sustained) n_mut_win++;
    if (dut.mut_trigger && dut.mut_sustained) n_mut_sus++;
  end

  function automatic int noise();
    return int'($urandom_range(0, 100)) - 50;
  endfunction

  task automatic send(sample_vec_t x);
    @(negedge clk);
    adc_valid = 1; adc_data = x;
    @(posedge clk);
    while (!adc_ready) @(posedge clk);
    @(negedge clk);
    adc_valid = 0;
    vec_no++;
  endtask

  task automatic segment(int kind, int n);
    phase = kind;
    for (int t = 0; t < n; t++) begin
      sample_vec_t x;
      for (int c = 0; c < NCH; c++) begin
        int v;
        v = DC + noise();
        if (kind == 1 && c == 1) v += (t % 16 < 8) ? 700 * ((t % 8) - 3) : -300;
        if (kind == 2) v += (((t / 6) % 2) != 0) ? 2500 : -2500;
        if (kind == 0 && t % 397 == 200 && c == 3) v += 12000;   // an artifact spike
        x[c] = 16'(v);
      end
      send(x);
      if (kind == 0 && t % 397 == 200) begin
        int dev;
        while (!dut.aru_valid) @(posedge clk);
        dev = int'($signed(dut.aru_data[3])) - DC;
        if (dev < 0) dev = -dev;
        checks++;
        if (dev > 3000) begin failures++; $display("artifact passed: %0d", dev); end
        else n_atten++;
      end
    end
  endtask

  task automatic cfg(logic [1:0] a, logic [7:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired at vector %0d", vec_no);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    first_alarm = '{-1, -1}; first_warn = '{-1, -1};
    seiz_start = '{1 << 30, 1 << 30};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (600) @(posedge clk);
    cfg(0, TD_DEFAULT); cfg(1, TP_DEFAULT); cfg(2, REM_DEFAULT);
    // normal activity, with coefficient upload for a while
    cfg(3, 8'd1); streaming = 1;
    segment(0, 64);
    cfg(3, 8'd0);
    repeat (4) @(negedge clk);
    streaming = 0;
    segment(0, 1536);
    segment(1, 256);
    seiz_start[0] = vec_no;
    segment(2, 1024);
    episode = 1;
    segment(0, 2400);
    segment(1, 256);
    seiz_start[1] = vec_no;
    fork
      segment(2, 1024);
      begin
        // when a mutation run starts, the phone loads its parent signature
        // into the reference table, so the clones still to come are rejected
        @(posedge clk iff dut.mut_busy);
        @(posedge clk iff dut.u_mut.state == dut.u_mut.S_SCAN);
        @(negedge clk); nrs_we = 1; nrs_addr = 7'd5; nrs_wdata = dut.u_slt.mem[0];
        @(negedge clk); nrs_we = 0;
        checks++;
        if (!dut.u_nrs.mem[5].valid) begin failures++; $display("reference not loaded"); end
      end
    join
    episode = 2;
    segment(0, 512);
    repeat (2000) @(posedge clk);

    // expected behaviour
    checks += 6;
    if (first_alarm[0] < 0) begin failures++; $display("first seizure not detected"); end
    if (first_alarm[1] < 0) begin failures++; $display("second seizure not detected"); end
    if (first_warn[1] < 0 || (first_alarm[1] >= 0 && first_warn[1] > first_alarm[1]))
      begin failures++; $display("second seizure not predicted before its alarm"); end
    if (n_data == 0) begin failures++; $display("no data upload"); end
    if (n_data_bad != 0) begin failures++; $display("%0d data messages while streaming off", n_data_bad); end
    if ((int'($signed(baseline_fb)) - DC) > 40 || (int'($signed(baseline_fb)) - DC) < -40)
      begin failures++; $display("baseline %0d", $signed(baseline_fb)); end
    $display("seizure 1 at vector %0d: alarm at %0d", seiz_start[0], first_alarm[0]);
    $display("seizure 2 at vector %0d: warning at %0d, alarm at %0d", seiz_start[1], first_warn[1], first_alarm[1]);
    $display("stalls %0d attenuated %0d matches %0d appends %0d swaps %0d prio-updates %0d",
             n_stall, n_atten, n_match, n_append, n_swap, prio_updates);
    $display("mutations: by window %0d sustained %0d; clones accepted %0d rejected %0d",
             n_mut_win, n_mut_sus, clones_accepted, clones_rejected);
    $display("alarms %0d warnings %0d suppressed %0d data %0d lost %0d overflow %0d baseline %0d",
             n_alarm, n_warn, warnings_suppressed, n_data, msgs_lost, sig_overflow, $signed(baseline_fb));
    begin
      int counts [14];
      string names [14];
      counts = '{n_stall, n_atten, n_match, n_append, n_swap, int'(prio_updates), n_mut_win, n_mut_sus,
                 int'(clones_accepted), int'(clones_rejected), int'(warnings_suppressed), n_alarm, n_warn, n_data};
      names = '{"stall", "attenuation", "match", "append", "swap", "priority update", "window mutation",
                "sustained mutation", "clone accepted", "clone rejected", "suppressed warning",
                "alarm", "warning", "data upload"};
      for (int i = 0; i < 14; i++) begin
        checks++;
        if (counts[i] == 0) begin failures++; $display("mechanism never happened: %s", names[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
