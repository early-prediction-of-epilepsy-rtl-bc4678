// tb_population_manager: self-checking test of the population manager with a
// 16-row table.  The testbench sends a random stream of prediction results
// (matches found at random rows, matches already at the top, appends),
// clone writes and seizure onsets.  A reference model keeps the history of the last H = 4
// signature rows, following the swap of a match into row 0 and dropping
// entries whose row is overwritten by an append or a clone, and on each
// onset raises the priority of those rows (saturating at 3) in a mirror of
// the table; it also counts sustained top matches (SUSTAIN = 4) and windows
// (MUT_CYCLES = 83 at default) to predict every mutation trigger and cause.
module tb_population_manager;
  import sig_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic res_valid = 0, seizure = 0, ovr_we = 0;
  logic [3:0] ovr_row = '0;
  pred_result_t res = '0;
  logic [3:0] res_row = '0, src_row = '0;
  logic slt_req, slt_gnt = 0, slt_we, mut_trigger, mut_sustained;
  logic [3:0] slt_rd_addr, slt_wr_addr;
  signature_t slt_rd_data, slt_wr_data;
  logic [15:0] updates;

  population_manager #(.ROWS(ROWS), .H(4)) dut (.*);

  logic tb_we = 0; logic [3:0] tb_addr = '0; signature_t tb_data = '0;
  logic tbusy;
  signature_table #(.ROWS(ROWS)) mem (.clk, .rst_n, .we(slt_we | tb_we),
    .wr_addr(tb_we ? tb_addr : slt_wr_addr), .wr_data(tb_we ? tb_data : slt_wr_data),
    .rd_addr(slt_rd_addr), .rd_data(slt_rd_data), .busy(tbusy));
  always @(posedge clk) slt_gnt <= slt_req && !tbusy;

  signature_t mirror [ROWS];
  int hist [4];
  bit hist_v [4];
  int top_run = 0, win_cnt = 0, upd_m = 0;
  int n_trig = 0, n_sust = 0, n_win = 0, n_onset = 0;
  int trig_seen = 0;
  always @(posedge clk) if (rst_n && mut_trigger) trig_seen++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin hist[i] = 0; hist_v[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (tbusy) @(posedge clk);
    // fill the table with valid rows of random priority 0..1
    for (int r = 0; r < ROWS; r++) begin
      mirror[r] = '0;
      mirror[r].valid = (r != 7);
      mirror[r].prio = 2'($urandom_range(0, 1));
      mirror[r].local_sig[0] = 16'(r);
      @(negedge clk); tb_we = 1; tb_addr = 4'(r); tb_data = mirror[r];
    end
    @(negedge clk); tb_we = 0;
    for (int k = 0; k < 400; k++) begin
      int kind, src, dst;
      bit trig_e, sust_e;
      kind = (k % 60 < 8) ? 1 : $urandom_range(0, 2);  // 0 match elsewhere, 1 match at top, 2 append
      src = (kind == 1) ? 0 : $urandom_range(1, ROWS - 1);
      if (src == 7) src = 8;
      dst = (kind == 2) ? src : 0;
      // model
      if (k % 7 == 3 || (k % 23 == 10 && hist[0] != 0)) begin
        // a clone overwrites a random row (or, just before an onset, the
        // newest history row): its history entries are dropped
        int r;
        r = (k % 23 == 10 && hist[0] != 0) ? hist[0] : $urandom_range(1, ROWS - 1);
        if (r == 7) r = 8;
        for (int i = 0; i < 4; i++) if (hist[i] == r) hist_v[i] = 0;
        mirror[r].local_sig[1] = 16'(k);
        mirror[r].prio = 2'd0;
        @(negedge clk); tb_we = 1; tb_addr = 4'(r); tb_data = mirror[r];
        ovr_we = 1; ovr_row = 4'(r);
        @(negedge clk); tb_we = 0; ovr_we = 0;
      end
      if (kind == 2) begin
        for (int i = 0; i < 4; i++) if (hist[i] == dst) hist_v[i] = 0;
      end
      if (kind != 2) begin
        for (int i = 0; i < 4; i++) begin
          if (hist[i] == 0) hist[i] = src;
          else if (hist[i] == src) hist[i] = 0;
        end
        begin signature_t t; t = mirror[0]; mirror[0] = mirror[src]; mirror[src] = t; end
      end
      for (int i = 3; i > 0; i--) begin hist[i] = hist[i-1]; hist_v[i] = hist_v[i-1]; end
      hist[0] = dst; hist_v[0] = 1;
      trig_e = 0; sust_e = 0;
      if (kind == 1) begin
        if (top_run + 1 >= 4) begin top_run = 0; trig_e = 1; sust_e = 1; end
        else top_run++;
      end else top_run = 0;
      if (win_cnt + 1 >= 83) begin win_cnt = 0; trig_e = 1; end
      else win_cnt++;
      // mirror the swap in the real table as the prediction unit would
      if (kind != 2 && src != 0) begin
        @(negedge clk); tb_we = 1; tb_addr = 0; tb_data = mirror[0];
        @(negedge clk); tb_addr = 4'(src); tb_data = mirror[src];
        @(negedge clk); tb_we = 0;
      end
      @(negedge clk);
      res_valid = 1; res = '0; res.match = (kind != 2); res.appended = (kind == 2);
      res_row = 4'(dst); src_row = 4'(src);
      trig_seen = 0;
      @(negedge clk); res_valid = 0;
      @(negedge clk);
      checks++;
      if (trig_seen != int'(trig_e)) begin failures++; $display("k=%0d trigger %0d exp %0d", k, trig_seen, trig_e); end
      if (trig_e) begin
        n_trig++;
        if (sust_e) n_sust++; else n_win++;
        checks++;
        if (mut_sustained != sust_e) begin failures++; $display("k=%0d cause", k); end
      end
      if (k % 23 == 11) begin
        // seizure onset: the model raises the priority of the history rows
        for (int i = 0; i < 4; i++) begin
          if (hist_v[i] && mirror[hist[i]].valid) begin
            if (mirror[hist[i]].prio != 3) mirror[hist[i]].prio++;
            upd_m++;
          end
        end
        n_onset++;
        @(negedge clk); seizure = 1;
        repeat (30) @(negedge clk);
        seizure = 0;
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (mem.mem[r] != mirror[r]) begin failures++; $display("k=%0d row %0d prio %0d exp %0d", k, r, mem.mem[r].prio, mirror[r].prio); end
        end
        checks++;
        if (int'(updates) != upd_m) begin failures++; $display("updates %0d exp %0d", updates, upd_m); end
      end
    end
    checks += 3;
    if (n_sust == 0) begin failures++; $display("no sustained trigger"); end
    if (n_win == 0) begin failures++; $display("no window trigger"); end
    if (n_onset == 0) begin failures++; $display("no onset"); end
    $display("triggers %0d (sustained %0d, window %0d), onsets %0d, updates %0d", n_trig, n_sust, n_win, n_onset, upd_m);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
