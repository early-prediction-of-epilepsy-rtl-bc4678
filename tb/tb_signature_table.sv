// tb_signature_table: self-checking test of the signature memory, at the NRS
// size (128 rows) and the SLT size (512 rows).  After reset every row must
// read as zero (the clear walk, with busy high for exactly ROWS cycles); then
// random writes to random rows are mirrored in a reference array and random
// reads are compared with it, including a read of the row written in the
// same cycle (old data until the clock edge).
module tb_signature_table;
  import sig_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we_a = 0, we_b = 0, busy_a, busy_b;
  logic [6:0] wa_a = '0, ra_a = '0;
  logic [8:0] wa_b = '0, ra_b = '0;
  signature_t wd_a = '0, wd_b = '0, rd_a, rd_b;

  signature_table #(.ROWS(128)) nrs (.clk, .rst_n, .we(we_a), .wr_addr(wa_a), .wr_data(wd_a),
                                     .rd_addr(ra_a), .rd_data(rd_a), .busy(busy_a));
  signature_table                slt (.clk, .rst_n, .we(we_b), .wr_addr(wa_b), .wr_data(wd_b),
                                     .rd_addr(ra_b), .rd_data(rd_b), .busy(busy_b));

  signature_t ref_a [128], ref_b [512];

  function automatic signature_t rnd_sig();
    signature_t s;
    for (int i = 0; i < 6; i++) s[32*i +: 32] = $urandom;
    s[164:160] = 5'($urandom);
    return s;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nb;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    nb = 0;
    while (busy_b) begin @(negedge clk); nb++; end
    checks++;
    if (nb != 512) begin failures++; $display("clear took %0d cycles", nb); end
    for (int r = 0; r < 512; r++) begin
      ra_b = 9'(r); if (r < 128) ra_a = 7'(r);
      #1;
      checks++;
      if (rd_b != '0 || rd_a != '0) begin failures++; $display("row %0d not cleared", r); end
      ref_b[r] = '0; if (r < 128) ref_a[r] = '0;
    end
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      we_a = $urandom_range(0, 1); wa_a = 7'($urandom); wd_a = rnd_sig();
      we_b = $urandom_range(0, 1); wa_b = 9'($urandom); wd_b = rnd_sig();
      ra_a = (k % 5 == 0) ? wa_a : 7'($urandom);
      ra_b = (k % 5 == 0) ? wa_b : 9'($urandom);
      #1;
      checks += 2;
      if (rd_a != ref_a[ra_a]) begin failures++; $display("nrs row %0d", ra_a); end
      if (rd_b != ref_b[ra_b]) begin failures++; $display("slt row %0d", ra_b); end
      @(posedge clk);
      if (we_a) ref_a[wa_a] = wd_a;
      if (we_b) ref_b[wa_b] = wd_b;
    end
    @(negedge clk); we_a = 0; we_b = 0;
    for (int r = 0; r < 512; r++) begin
      ra_b = 9'(r); if (r < 128) ra_a = 7'(r);
      #1;
      checks++;
      if (rd_b != ref_b[r] || (r < 128 && rd_a != ref_a[r])) begin failures++; $display("final row %0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
