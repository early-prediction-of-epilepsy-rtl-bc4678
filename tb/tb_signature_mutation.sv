// tb_signature_mutation: self-checking test of the signature mutation unit
// with a 16-row SLT, an 8-row reference table and 6 clones per run.  A
// reference model repeats the xorshift generator, builds every clone of the
// row-0 parent with saturation, applies the negative-selection test against
// the valid reference rows with the remove threshold, and predicts which SLT
// rows (from the bottom up) receive which clone and the accepted / rejected
// counts.  Runs are made with references near the parent (mixed outcome),
// with no references (all accepted), and with an invalid parent (no action).
module tb_signature_mutation;
  import sig_pkg::*;
  localparam int ROWS = 16, NR = 8, NCL = 6;
  localparam logic [63:0] SEED = 64'h9E37_79B9_7F4A_7C15;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic trigger = 0;
  logic [7:0] rem_q8 = 8'd3;
  logic slt_req, slt_gnt = 0, slt_we, busy;
  logic [3:0] slt_rd_addr, slt_wr_addr;
  logic [2:0] nrs_rd_addr;
  signature_t slt_rd_data, slt_wr_data, nrs_rd_data;
  logic [15:0] accepted, rejected;

  signature_mutation #(.ROWS(ROWS), .NRS_ROWS(NR), .NCLONES(NCL)) dut (.*);

  logic tb_we = 0; logic [3:0] tb_addr = '0; signature_t tb_data = '0;
  logic n_we = 0; logic [2:0] n_addr = '0; signature_t n_data = '0;
  logic b1, b2;
  signature_table #(.ROWS(ROWS)) slt (.clk, .rst_n, .we(slt_we | tb_we),
    .wr_addr(tb_we ? tb_addr : slt_wr_addr), .wr_data(tb_we ? tb_data : slt_wr_data),
    .rd_addr(slt_rd_addr), .rd_data(slt_rd_data), .busy(b1));
  signature_table #(.ROWS(NR)) nrs (.clk, .rst_n, .we(n_we), .wr_addr(n_addr), .wr_data(n_data),
    .rd_addr(nrs_rd_addr), .rd_data(nrs_rd_data), .busy(b2));
  always @(posedge clk) slt_gnt <= slt_req && !b1;

  signature_t mirror [ROWS], refs [NR];
  logic [63:0] rng_m = SEED;
  int acc_m = 0, rej_m = 0;

  function automatic logic [63:0] xs(logic [63:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 7); x = x ^ (x << 17);
    return x;
  endfunction

  function automatic longint sqd(signature_t a, signature_t b);
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

  task automatic model_run();
    signature_t p, z;
    z = '0;
    p = mirror[0];
    if (!p.valid) return;
    for (int k = 0; k < NCL; k++) begin
      signature_t cl;
      logic [63:0] x;
      bit hit;
      longint e;
      cl = p;
      rng_m = xs(rng_m); x = rng_m;
      for (int i = 0; i < W; i++) begin
        int v;
        v = int'($signed(p.local_sig[i])) + int'($signed(x[8*i +: 8])) * 4;
        cl.local_sig[i] = 16'(v > 32767 ? 32767 : (v < -32768 ? -32768 : v));
      end
      rng_m = xs(rng_m); x = rng_m;
      for (int c = 0; c < NCH; c++) begin
        int v;
        v = int'(p.global_sig[c]) + int'($signed(x[3*c +: 3]));
        cl.global_sig[c] = 8'(v > 255 ? 255 : (v < 0 ? 0 : v));
      end
      e = sqd(cl, z);
      hit = 0;
      for (int r = 0; r < NR; r++)
        if (refs[r].valid && sqd(cl, refs[r]) * 256 <= e * longint'(rem_q8)) hit = 1;
      if (hit) rej_m++;
      else begin acc_m++; mirror[ROWS - 1 - k] = cl; end
    end
  endtask

  task automatic run_and_check(string name);
    int t;
    model_run();
    @(negedge clk); trigger = 1;
    @(negedge clk); trigger = 0;
    t = 0;
    while (busy && t < 100000) begin @(negedge clk); t++; end
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (slt.mem[r] != mirror[r]) begin failures++; $display("%s: row %0d differs", name, r); end
    end
    checks += 2;
    if (int'(accepted) != acc_m) begin failures++; $display("%s: accepted %0d exp %0d", name, accepted, acc_m); end
    if (int'(rejected) != rej_m) begin failures++; $display("%s: rejected %0d exp %0d", name, rejected, rej_m); end
    $display("%s: accepted %0d rejected %0d", name, accepted, rejected);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    signature_t par;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (b1) @(posedge clk);
    for (int r = 0; r < ROWS; r++) mirror[r] = '0;
    for (int r = 0; r < NR; r++) refs[r] = '0;
    // parent
    par = '0;
    for (int i = 0; i < W; i++) par.local_sig[i] = 16'(i % 2 ? 1500 : -1200);
    par.local_sig[7] = 16'sh7F00;      // exercises saturation
    for (int c = 0; c < NCH; c++) par.global_sig[c] = 8'(c == 0 ? 1 : 200 + c * 18);
    par.prio = 2; par.order = 1; par.valid = 1;
    mirror[0] = par;
    @(negedge clk); tb_we = 1; tb_addr = 0; tb_data = par;
    @(negedge clk); tb_we = 0;
    // run 1: no references, every clone accepted
    run_and_check("no refs");
    // run 2: the parent itself is a reference
    par.local_sig[7] = 16'(1500);
    mirror[0] = par;
    @(negedge clk); tb_we = 1; tb_addr = 0; tb_data = par;
    @(negedge clk); tb_we = 0;
    refs[3] = par;
    rem_q8 = 8'd10;
    @(negedge clk); n_we = 1; n_addr = 3; n_data = par;
    @(negedge clk); n_we = 0;
    run_and_check("parent ref");
    // run 3: invalid parent, nothing happens
    mirror[0] = '0;
    @(negedge clk); tb_we = 1; tb_addr = 0; tb_data = '0;
    @(negedge clk); tb_we = 0;
    run_and_check("empty top");
    checks += 2;
    if (acc_m == 0) begin failures++; $display("no clone accepted"); end
    if (rej_m == 0) begin failures++; $display("no clone rejected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
