// tb_slt_arbiter: self-checking test of the SLT arbiter.  Three random
// requesters hold their request for random lengths; a reference model
// predicts the grant each cycle (held while the owner requests, otherwise the
// lowest-index requester, none while the table is busy) and the test checks
// the grant and that the table sees exactly the owner's address, write strobe
// and data.
module tb_slt_arbiter;
  import sig_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic table_busy = 1;
  logic [2:0] req = '0, gnt, we = '0;
  logic [2:0][8:0] rd_addr = '0, wr_addr = '0;
  signature_t [2:0] wr_data = '0;
  logic [8:0] t_rd_addr, t_wr_addr;
  logic t_we;
  signature_t t_wr_data;

  slt_arbiter dut (.*);

  logic [2:0] gnt_m = '0;
  int hold [3];
  int n_grant [3];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3; i++) begin hold[i] = 0; n_grant[i] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      // drive at negedge
      table_busy = (k < 20) || (k % 500 < 5);
      for (int i = 0; i < 3; i++) begin
        if (hold[i] > 0) hold[i]--;
        else if ($urandom_range(0, 7) == 0) hold[i] = $urandom_range(1, 12);
        req[i]     = hold[i] > 0;
        rd_addr[i] = 9'($urandom);
        wr_addr[i] = 9'($urandom);
        wr_data[i] = signature_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
        we[i]      = gnt[i] && req[i] && $urandom_range(0, 1);
      end
      #1;
      // combinational mux check
      checks++;
      begin
        logic [8:0] ea, ewa; logic ewe; signature_t ed;
        ea = '0; ewa = '0; ewe = 0; ed = '0;
        for (int i = 0; i < 3; i++) if (gnt[i]) begin ea = rd_addr[i]; ewa = wr_addr[i]; ewe = we[i]; ed = wr_data[i]; end
        if (t_rd_addr != ea || t_we != ewe || (ewe && (t_wr_addr != ewa || t_wr_data != ed))) begin
          failures++; $display("k=%0d mux mismatch", k);
        end
      end
      // model of the next grant
      if (gnt_m == '0 || (gnt_m & req) == '0) begin
        gnt_m = '0;
        if (!table_busy) begin
          if (req[0]) gnt_m = 3'b001;
          else if (req[1]) gnt_m = 3'b010;
          else if (req[2]) gnt_m = 3'b100;
        end
      end
      @(posedge clk); #1;
      checks++;
      if (gnt != gnt_m) begin failures++; $display("k=%0d gnt %b exp %b req %b", k, gnt, gnt_m, req); end
      for (int i = 0; i < 3; i++) if (gnt[i]) n_grant[i]++;
      @(negedge clk);
    end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (n_grant[i] == 0) begin failures++; $display("requester %0d never served", i); end
    end
    $display("grant cycles %0d %0d %0d", n_grant[0], n_grant[1], n_grant[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
