// tb_dwt_haar: self-checking test of the one-level Haar DWT stage.  Random
// vector pairs (with idle gaps) are fed in; every output must equal
// (x0 + x1) >>> 1 and (x0 - x1) >>> 1 per channel, appear one cycle after the
// second vector of its pair, and there must be exactly one output per pair.
module tb_dwt_haar;
  import sig_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  sample_vec_t in_data = '0, out_approx, out_detail;

  dwt_haar dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_out = 0;
  always @(posedge clk) if (rst_n && out_valid) n_out++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      sample_vec_t a, b;
      for (int c = 0; c < NCH; c++) begin
        a[c] = 16'($urandom);
        b[c] = 16'($urandom);
      end
      if (k < 4) begin a = {4{16'sh7FFF}}; b = {4{16'sh7FFF}}; end
      if (k == 4) begin a = {4{16'sh8000}}; b = {4{16'sh8000}}; end
      @(negedge clk); in_valid = 1; in_data = a;
      @(negedge clk); in_valid = ($urandom_range(0, 1) == 1);
      if (!in_valid) begin @(negedge clk); in_valid = 1; end
      in_data = b;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no output one cycle after the pair"); end
      for (int c = 0; c < NCH; c++) begin
        int ea, ed;
        ea = (int'($signed(a[c])) + int'($signed(b[c]))) >>> 1;
        ed = (int'($signed(a[c])) - int'($signed(b[c]))) >>> 1;
        checks += 2;
        if (int'($signed(out_approx[c])) != ea) begin failures++; $display("approx %0d exp %0d", $signed(out_approx[c]), ea); end
        if (int'($signed(out_detail[c])) != ed) begin failures++; $display("detail %0d exp %0d", $signed(out_detail[c]), ed); end
      end
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (2) @(posedge clk);
    checks++;
    if (n_out != 300) begin failures++; $display("outputs %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
