// tb_ais_prediction: self-checking test of the AIS prediction unit with a
// 16-row signature table.  The testbench plays the arbiter (grant one cycle
// after request) and keeps a mirror of the table.  For every signature it
// independently finds the closest valid row by squared Euclidean distance,
// applies the tp test, and predicts the result bits, the row numbers, the
// swap to row 0 or the append (first empty row, else the first row of
// lowest priority, never row 0, at or after a replacement pointer that moves
// past each replaced row), then compares the whole table.  Signatures are noisy copies of
// a few base patterns or new random ones; priorities are raised by the
// testbench between signatures so that predictions occur.  Two signatures
// sent while one is in work check the one-deep buffer and the overflow count.
module tb_ais_prediction;
  import sig_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sig_valid = 0;
  signature_t sig = '0;
  logic [7:0] tp_q8 = TP_DEFAULT;
  logic slt_req, slt_gnt = 0, slt_we, res_valid, busy;
  logic [3:0] slt_rd_addr, slt_wr_addr, res_row, src_row;
  signature_t slt_rd_data, slt_wr_data;
  pred_result_t res;
  logic [15:0] overflow;

  ais_prediction #(.ROWS(ROWS)) dut (.*);

  logic tb_we = 0; logic [3:0] tb_addr = '0; signature_t tb_data = '0;
  logic tbusy;
  signature_table #(.ROWS(ROWS)) mem (.clk, .rst_n, .we(slt_we | tb_we),
    .wr_addr(tb_we ? tb_addr : slt_wr_addr), .wr_data(tb_we ? tb_data : slt_wr_data),
    .rd_addr(slt_rd_addr), .rd_data(slt_rd_data), .busy(tbusy));

  always @(posedge clk) slt_gnt <= slt_req && !tbusy;

  signature_t mirror [ROWS];
  signature_t base [4];
  int n_pred = 0, n_match = 0, n_app = 0, n_victim = 0;
  int rr_m = 1;

  function automatic signature_t rnd_sig();
    signature_t s;
    s = '0;
    for (int i = 0; i < W; i++) s.local_sig[i] = 16'($urandom_range(0, 8000) - 4000);
    for (int c = 0; c < NCH; c++) s.global_sig[c] = 8'($urandom);
    s.order = 2'($urandom);
    s.valid = 1;
    return s;
  endfunction

  function automatic signature_t noisy(signature_t b);
    signature_t s;
    s = b;
    for (int i = 0; i < W; i++) s.local_sig[i] = 16'(int'($signed(b.local_sig[i])) + int'($urandom_range(0, 200)) - 100);
    return s;
  endfunction

  // distance recomputed here, independently of the package function
  function automatic longint sqdist(signature_t a, signature_t b);
    longint acc;
    acc = 0;
    for (int i = 0; i < W; i++) begin
      longint d;
      d = longint'($signed(a.local_sig[i])) - longint'($signed(b.local_sig[i]));
      acc += d * d;
    end
    for (int c = 0; c < NCH; c++) begin
      longint d;
      d = longint'(a.global_sig[c]) - longint'(b.global_sig[c]);
      acc += d * d;
    end
    return acc;
  endfunction

  task automatic expect_one(signature_t s);
    int best, freer, vict, vp, row;
    longint bd, e;
    bit m;
    pred_result_t er;
    signature_t z;
    z = '0;
    e = sqdist(s, z);
    best = -1; bd = 0; freer = -1; vict = ROWS - 1; vp = 4;
    for (int r = 0; r < ROWS; r++) begin
      if (mirror[r].valid) begin
        longint d;
        d = sqdist(s, mirror[r]);
        if (best < 0 || d < bd) begin best = r; bd = d; end
      end else if (freer < 0) freer = r;
    end
    // victim: lowest priority, first at or after the replacement pointer
    for (int r = 1; r < ROWS; r++) if (mirror[r].valid && int'(mirror[r].prio) < vp) vp = mirror[r].prio;
    vict = -1;
    for (int r = rr_m; r < ROWS; r++) if (vict < 0 && r != 0 && mirror[r].valid && int'(mirror[r].prio) == vp) vict = r;
    for (int r = 1; r < ROWS; r++) if (vict < 0 && mirror[r].valid && int'(mirror[r].prio) == vp) vict = r;
    m = (best >= 0) && (bd * 256 <= e * longint'(tp_q8));
    er = '0;
    er.match = m;
    er.appended = !m;
    if (m) begin
      signature_t t;
      er.prio = mirror[best].prio;
      er.predict = mirror[best].prio != 0;
      t = mirror[0]; mirror[0] = mirror[best]; mirror[best] = t;
      row = 0;
    end else begin
      row = (freer >= 0) ? freer : vict;
      if (freer < 0) begin n_victim++; rr_m = (vict + 1) % ROWS; end
      mirror[row] = s;
    end
    while (!res_valid) @(posedge clk);
    #1;
    checks += 3;
    if (res != er) begin failures++; $display("res %b exp %b (best %0d)", res, er, best); end
    if (int'(res_row) != row) begin failures++; $display("res_row %0d exp %0d", res_row, row); end
    if (int'(src_row) != (m ? best : row)) begin failures++; $display("src_row %0d", src_row); end
    if (er.predict) n_pred++;
    if (er.match) n_match++; else n_app++;
  endtask

  task automatic check_table();
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (mem.mem[r] != mirror[r]) begin failures++; $display("row %0d differs", r); end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) mirror[r] = '0;
    for (int b = 0; b < 4; b++) base[b] = rnd_sig();
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (tbusy) @(posedge clk);
    for (int k = 0; k < 120; k++) begin
      signature_t s;
      s = ($urandom_range(0, 2) == 0 || k < 4) ? rnd_sig() : noisy(base[$urandom_range(0, 3)]);
      if (k < 4) begin s = base[k]; end
      // raise the priority of a random valid row now and then
      if (k % 10 == 5) begin
        int r;
        r = $urandom_range(0, ROWS - 1);
        if (mirror[r].valid) begin
          mirror[r].prio = 2'(mirror[r].prio == 3 ? 3 : mirror[r].prio + 1);
          @(negedge clk); tb_we = 1; tb_addr = 4'(r); tb_data = mirror[r];
          @(negedge clk); tb_we = 0;
        end
      end
      @(negedge clk); sig_valid = 1; sig = s;
      @(negedge clk); sig_valid = 0;
      expect_one(s);
      check_table();
    end
    // buffering and overflow: three signatures back to back
    begin
      signature_t a, b, c;
      a = noisy(base[0]); b = noisy(base[1]); c = rnd_sig();
      @(negedge clk); sig_valid = 1; sig = a;
      @(negedge clk); sig = b;
      @(negedge clk); sig = c;
      @(negedge clk); sig_valid = 0;
      expect_one(a);
      @(posedge clk);
      expect_one(b);
      check_table();
      checks += 2;
      if (overflow != 16'd1) begin failures++; $display("overflow %0d", overflow); end
      repeat (ROWS + 10) @(posedge clk);
      if (res_valid || busy) begin failures++; $display("dropped signature was processed"); end
    end
    checks += 4;
    if (n_pred == 0) begin failures++; $display("no prediction"); end
    if (n_match == 0) begin failures++; $display("no match"); end
    if (n_app == 0) begin failures++; $display("no append"); end
    if (n_victim == 0) begin failures++; $display("table never full"); end
    $display("predictions %0d matches %0d appends %0d replaced %0d", n_pred, n_match, n_app, n_victim);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
