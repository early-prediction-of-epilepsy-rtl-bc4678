// tb_decision_controller: self-checking test of the decision controller.
// Directed scenarios check the reset values of the threshold registers
// (0.23, 0.09, 0.3 in Q0.8) and their writes; an alarm message on a seizure
// onset with its time stamp and channel mask; a warning for a prediction
// outside a seizure with the signature row; suppression of a prediction
// during a seizure; data upload only when streaming is enabled; alarm before
// warning before data when all are pending; holding of a message under
// back-pressure; and the `lost` count when a second alarm arrives while the
// first is still waiting.
module tb_decision_controller;
  import sig_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0; logic [1:0] cfg_addr = '0; logic [7:0] cfg_wdata = '0;
  logic [7:0] td_q8, tp_q8, rem_q8; logic stream_en;
  det_result_t det = '0;
  logic pred_valid = 0; pred_result_t pred = '0; logic [15:0] pred_id = '0;
  logic [31:0] time_stamp = '0;
  logic data_valid = 0; sample_vec_t data = '0;
  logic out_valid, out_ready = 1, alarm, warning;
  out_msg_t out_msg;
  logic [15:0] lost, suppressed;

  decision_controller dut (.*);

  out_msg_t got [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_msg);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic cfg(logic [1:0] a, logic [7:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic predict(logic [15:0] id, bit p);
    @(negedge clk); pred_valid = 1; pred = '0; pred.match = 1; pred.predict = p; pred.prio = p ? 2'd1 : 2'd0; pred_id = id;
    @(negedge clk); pred_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(td_q8 == 8'd59 && tp_q8 == 8'd23 && rem_q8 == 8'd77 && !stream_en, "reset values");
    cfg(0, 8'd70); cfg(1, 8'd30); cfg(2, 8'd90);
    chk(td_q8 == 8'd70 && tp_q8 == 8'd30 && rem_q8 == 8'd90, "register writes");

    // alarm on onset
    time_stamp = 32'd100;
    @(negedge clk); det.seizure = 1; det.pair_mask = 4'b0101;
    repeat (3) @(negedge clk);
    chk(got.size() == 1, "one alarm");
    if (got.size() == 1) begin
      chk(got[0].kind == MSG_ALARM && got[0].time_stamp == 32'd100 && got[0].window_id == 16'h5, "alarm contents");
    end
    chk(alarm, "alarm level");
    // prediction during the seizure is suppressed
    predict(16'd9, 1);
    repeat (3) @(negedge clk);
    chk(got.size() == 1 && suppressed == 16'd1 && !warning, "suppressed during seizure");
    @(negedge clk); det = '0;
    // warning outside a seizure
    time_stamp = 32'd120;
    predict(16'd42, 1);
    repeat (3) @(negedge clk);
    chk(got.size() == 2, "one warning");
    if (got.size() == 2) chk(got[1].kind == MSG_WARNING && got[1].window_id == 16'd42 && got[1].time_stamp == 32'd120, "warning contents");
    chk(warning, "warning level");
    predict(16'd3, 0);
    @(negedge clk);
    chk(!warning && got.size() == 2, "no warning without prediction");
    // data only when streaming
    @(negedge clk); data_valid = 1; data = {16'd1, 16'd2, 16'd3, 16'd4};
    @(negedge clk); data_valid = 0;
    repeat (2) @(negedge clk);
    chk(got.size() == 2, "no data when streaming is off");
    cfg(3, 8'd1);
    chk(stream_en, "stream enabled");
    @(negedge clk); data_valid = 1;
    @(negedge clk); data_valid = 0;
    repeat (2) @(negedge clk);
    chk(got.size() == 3 && got[2].kind == MSG_DATA && got[2].data == data, "data message");

    // back-pressure: data is held in the output register, then a warning and
    // an alarm wait; they leave alarm first
    out_ready = 0;
    @(negedge clk); data_valid = 1; data = {4{16'h1234}};
    @(negedge clk); data_valid = 0;
    predict(16'd7, 1);
    @(negedge clk); det.seizure = 1; det.pair_mask = 4'b0011;
    @(negedge clk);
    begin
      out_msg_t held;
      held = out_msg;
      repeat (5) @(negedge clk);
      chk(out_valid && out_msg == held, "message held under back-pressure");
    end
    // a second onset while the first alarm waits is lost
    @(negedge clk); det = '0;
    @(negedge clk); det.seizure = 1;
    @(negedge clk);
    chk(lost == 16'd1, "second onset while the first alarm waits is lost");
    @(negedge clk); det = '0;
    @(negedge clk); det.seizure = 1;
    @(negedge clk);
    chk(lost == 16'd2, "third onset lost too");
    out_ready = 1;
    repeat (8) @(negedge clk);
    chk(got.size() == 6, $sformatf("messages after release: %0d", got.size()));
    if (got.size() >= 6) begin
      chk(got[3].kind == MSG_DATA && got[3].data == {4{16'h1234}}, "held data first");
      chk(got[4].kind == MSG_ALARM && got[4].window_id == 16'h0, "then the newest alarm");
      chk(got[5].kind == MSG_WARNING && got[5].window_id == 16'd7, "then the warning");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
