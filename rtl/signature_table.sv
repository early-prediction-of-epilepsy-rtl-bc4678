// signature_table: signature memory, ROWS x 165 bits.
//
// The paper's system diagram shows two signature stores of 165-bit rows: the
// Signatures Lookup Table (SLT, 512 rows) used by the AIS prediction unit, the
// population manager and the mutation unit, and the Neural Reference Signature
// table (NRS, 128 rows).  Both are instances of this module with a different
// ROWS.  It is written as an array, one synchronous write port and one
// asynchronous read port, so that it maps onto a register file or, with a
// registered read address, onto an SRAM macro.  A reset-time clear of the
// valid bits is provided by `clear`, which walks the rows one per cycle
// (busy is high meanwhile) so that no row is read before it is initialised.
//
// Timing: a write lands at the clock edge; rd_data follows rd_addr in the
// same cycle.
module signature_table
  import sig_pkg::*;
#(
  parameter int unsigned ROWS = 512,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  signature_t    wr_data,
  input  logic [AW-1:0] rd_addr,
  output signature_t    rd_data,
  output logic          busy
);
  signature_t      mem [ROWS];
  logic            clearing;
  logic [AW-1:0]   clr_addr;

  assign busy    = clearing;
  assign rd_data = mem[rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_addr <= '0;
    end else if (clearing) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == AW'(ROWS - 1)) clearing <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (clearing)  mem[clr_addr] <= '0;
    else if (we)   mem[wr_addr]  <= wr_data;
  end
endmodule
