// tb_patient_run: a five-minute recording of one synthetic patient through
// the whole predictor at its default sizes, the length of the test runs the
// design was evaluated with.  Time is counted in ADC vectors at 250 Hz
// (75,000 vectors = 300 s); the testbench offers each vector as soon as the
// chip is ready, which is faster than real time but does not change what
// the chip computes.
//
// The patient: four channels of independent background noise with an
// occasional artifact spike, and four seizures.  Each seizure (6 s of a
// synchronous rhythm on all channels, amplitude varying from seizure to
// seizure) is preceded by 2 s of the same patient-specific pre-ictal pattern
// on channel 1.  The chip starts with an empty signature table and learns
// from the first seizure.
//
// Checks: every seizure raises an alarm during the seizure, no alarm comes
// outside a seizure, and every seizure after the first is warned during its
// pre-ictal stretch.  The run prints, like a per-patient result table, the
// number of seizures, how many were detected and predicted, the lead time of
// the first warning within 20 s of each onset and of the first one in the
// pre-ictal stretch (in seconds), and the warnings outside those 20 s.
// Warnings earlier than the pre-ictal stretch are false warnings: background
// signatures that happened to precede a seizure also receive priority.
module tb_patient_run;
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

  localparam int FS      = 250;           // vectors per second
  localparam int TOTAL   = 300 * FS;      // five minutes
  localparam int NSEIZ   = 4;
  localparam int PRE     = 2 * FS;        // pre-ictal stretch
  localparam int ICTAL   = 6 * FS;        // seizure length
  localparam int HORIZON = 20 * FS;       // a warning this far ahead counts

  int onset [NSEIZ] = '{40 * FS, 110 * FS, 185 * FS, 255 * FS};
  int amp   [NSEIZ] = '{2500, 2000, 3000, 2300};
  int first_alarm [NSEIZ], first_warn [NSEIZ], first_pre [NSEIZ];
  int vec_no = 0, n_alarm = 0, n_warn = 0, n_warn_outside = 0;

  // which seizure (if any) a vector number belongs to, for alarms
  function automatic int in_seizure(int v);
    for (int s = 0; s < NSEIZ; s++)
      if (v >= onset[s] && v < onset[s] + ICTAL + FS) return s;   // 1 s for the decision
    return -1;
  endfunction

  // which seizure a warning at vector v points ahead to
  function automatic int ahead_of(int v);
    for (int s = 0; s < NSEIZ; s++)
      if (v < onset[s] && v >= onset[s] - HORIZON) return s;
    return -1;
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (out_msg.kind == MSG_ALARM) begin
      int s;
      n_alarm++;
      s = in_seizure(vec_no);
      checks++;
      if (s < 0) begin failures++; $display("false alarm at %0d s", vec_no / FS); end
      else if (first_alarm[s] < 0) first_alarm[s] = vec_no;
    end
    if (out_msg.kind == MSG_WARNING) begin
      int s;
      n_warn++;
      s = ahead_of(vec_no);
      if (s < 0) n_warn_outside++;
      else begin
        if (first_warn[s] < 0) first_warn[s] = vec_no;
        if (first_pre[s] < 0 && vec_no >= onset[s] - PRE) first_pre[s] = vec_no;
      end
    end
  end

  task automatic send(sample_vec_t x);
    @(negedge clk);
    adc_valid = 1; adc_data = x;
    @(posedge clk);
    while (!adc_ready) @(posedge clk);
    @(negedge clk);
    adc_valid = 0;
    vec_no++;
  endtask

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired at vector %0d", vec_no);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NSEIZ; s++) begin first_alarm[s] = -1; first_warn[s] = -1; first_pre[s] = -1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (600) @(posedge clk);
    for (int v = 0; v < TOTAL; v++) begin
      sample_vec_t x;
      int kind, t, s_amp;
      kind = 0; t = 0; s_amp = 0;
      for (int s = 0; s < NSEIZ; s++) begin
        if (v >= onset[s] - PRE && v < onset[s]) begin kind = 1; t = v - (onset[s] - PRE); end
        if (v >= onset[s] && v < onset[s] + ICTAL) begin kind = 2; t = v - onset[s]; s_amp = amp[s]; end
      end
      for (int c = 0; c < NCH; c++) begin
        int val;
        val = int'($urandom_range(0, 100)) - 50;
        if (kind == 1 && c == 1) val += (t % 17 < 8) ? 700 * ((t % 17) - 3) : -300;
        if (kind == 2) val += (((t / 6) % 2) != 0) ? s_amp : -s_amp;
        if (kind == 0 && v % 1409 == 700 && c == 3) val += 12000;   // an artifact spike
        x[c] = 16'(val);
      end
      send(x);
    end
    repeat (5000) @(posedge clk);

    begin
      int n_det, n_pred;
      n_det = 0; n_pred = 0;
      for (int s = 0; s < NSEIZ; s++) begin
        checks++;
        if (first_alarm[s] < 0) begin failures++; $display("seizure %0d not detected", s); end
        else n_det++;
        if (first_warn[s] >= 0) begin
          n_pred++;
          $display("seizure %0d at %0d s: first warning %0.2f s ahead, in the pre-ictal stretch %0.2f s ahead, alarm after %0.2f s",
                   s, onset[s] / FS, real'(onset[s] - first_warn[s]) / FS,
                   first_pre[s] < 0 ? -1.0 : real'(onset[s] - first_pre[s]) / FS,
                   first_alarm[s] < 0 ? -1.0 : real'(first_alarm[s] - onset[s]) / FS);
        end else begin
          $display("seizure %0d at %0d s: not warned, alarm after %0.2f s", s, onset[s] / FS,
                   first_alarm[s] < 0 ? -1.0 : real'(first_alarm[s] - onset[s]) / FS);
        end
        if (s > 0) begin
          checks++;
          if (first_pre[s] < 0) begin failures++; $display("seizure %0d not predicted in its pre-ictal stretch", s); end
        end
      end
      $display("seizures %0d detected %0d predicted %0d; alarms %0d warnings %0d (%0d outside pre-ictal horizons)",
               NSEIZ, n_det, n_pred, n_alarm, n_warn, n_warn_outside);
      $display("priority updates %0d, clones accepted %0d, overflow %0d, lost %0d",
               prio_updates, clones_accepted, sig_overflow, msgs_lost);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
