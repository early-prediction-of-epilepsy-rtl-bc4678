// slt_arbiter: shares the single port of the Signatures Lookup Table (SLT)
// between its three users.
//
// In the paper's system diagram the SLT is read and written by the AIS
// prediction unit, the population manager and the signature mutation unit.
// The paper does not say how they share it; here each user raises req for as
// long as it needs the table (a whole scan, or one read-modify-write) and the
// arbiter grants a fixed priority, prediction unit first (index 0), then
// population manager (1), then mutation unit (2).  A grant is held until its
// owner drops req, so a scan is never interrupted.  Reads are combinational:
// the table's read data is returned to every user, and only the owner's
// address and write strobe reach the table.
//
// Timing: gnt rises the cycle after req when the table is free; it falls the
// cycle after req falls.
module slt_arbiter
  import sig_pkg::*;
#(
  parameter int unsigned N    = 3,
  parameter int unsigned ROWS = 512,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  table_busy,
  input  logic [N-1:0]          req,
  output logic [N-1:0]          gnt,
  input  logic [N-1:0][AW-1:0]  rd_addr,
  input  logic [N-1:0]          we,
  input  logic [N-1:0][AW-1:0]  wr_addr,
  input  signature_t [N-1:0]    wr_data,
  output logic [AW-1:0]         t_rd_addr,
  output logic                  t_we,
  output logic [AW-1:0]         t_wr_addr,
  output signature_t            t_wr_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gnt <= '0;
    end else if (gnt == '0 || (gnt & req) == '0) begin
      gnt <= '0;
      if (!table_busy) begin
        for (int i = N - 1; i >= 0; i--) begin
          if (req[i]) gnt <= N'(1) << i;
        end
      end
    end
  end

  always_comb begin
    t_rd_addr = '0;
    t_we      = 1'b0;
    t_wr_addr = '0;
    t_wr_data = '0;
    for (int i = 0; i < N; i++) begin
      if (gnt[i]) begin
        t_rd_addr = rd_addr[i];
        t_we      = we[i];
        t_wr_addr = wr_addr[i];
        t_wr_data = wr_data[i];
      end
    end
  end

  // a single owner at a time, and no write without the grant
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_we_gnt: assert property (@(posedge clk) disable iff (!rst_n) (we & ~gnt) == '0);
endmodule
