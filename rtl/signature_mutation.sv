// signature_mutation: signature mutation unit (clonal selection with a
// negative-selection filter).
//
// When the population manager fires it, the unit takes the signature at the
// top of the SLT stack (row 0) as the parent and produces NCLONES mutated
// clones of it, after the clonal selection and negative selection pseudo code
// of the paper.  Each clone is checked against every valid row of the Neural
// Reference Signature table (NRS): if any reference row recognises the clone
// (d <= rem * energy of the clone, rem in Q0.8, reset value 0.3 from the
// paper's remove threshold) the clone is rejected; otherwise it is written
// into the SLT from the bottom of the stack upwards (clone k goes to row
// ROWS-1-k), replacing the least recently promoted rows, with the parent's
// priority.  NCLONES defaults to the paper's 25 clones.
//
// The mutation itself is this design's choice: a 64-bit xorshift generator
// gives, per clone, a signed 8-bit offset for each local gene (scaled by
// << MUT_SHIFT) and a signed 3-bit offset for each global gene, both added
// with saturation.
//
// Timing: a run is parent fetch (SLT grant + 1 cycle), then per clone two
// generator cycles, an NRS scan of NRS_ROWS cycles and, if accepted, an SLT
// write (grant + 1 cycle).  `busy` is high for the run; triggers that arrive
// meanwhile are ignored.
module signature_mutation
  import sig_pkg::*;
#(
  parameter int unsigned ROWS      = 512,
  parameter int unsigned NRS_ROWS  = 128,
  parameter int unsigned NCLONES   = 25,
  parameter int unsigned MUT_SHIFT = 2,
  parameter logic [63:0] SEED      = 64'h9E37_79B9_7F4A_7C15,
  localparam int unsigned AW       = $clog2(ROWS),
  localparam int unsigned NW       = $clog2(NRS_ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          trigger,
  input  logic [7:0]    rem_q8,
  // SLT port
  output logic          slt_req,
  input  logic          slt_gnt,
  output logic [AW-1:0] slt_rd_addr,
  input  signature_t    slt_rd_data,
  output logic          slt_we,
  output logic [AW-1:0] slt_wr_addr,
  output signature_t    slt_wr_data,
  // NRS read port
  output logic [NW-1:0] nrs_rd_addr,
  input  signature_t    nrs_rd_data,
  output logic          busy,
  output logic [15:0]   accepted,
  output logic [15:0]   rejected
);
  typedef enum logic [2:0] {S_IDLE, S_PGRANT, S_PREAD, S_GEN0, S_GEN1, S_SCAN,
                            S_WGRANT, S_WRITE} state_e;
  state_e state;

  logic [63:0]   rng;
  signature_t    parent, clone;
  logic [39:0]   clone_energy;
  assign clone_energy = sig_energy(clone);
  logic [NW-1:0] n;
  logic          hit;
  logic [$clog2(NCLONES+1)-1:0] k;

  function automatic logic [63:0] xorshift(logic [63:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 7);
    x = x ^ (x << 17);
    return x;
  endfunction

  assign slt_req     = (state == S_PGRANT) || (state == S_PREAD) ||
                       (state == S_WGRANT) || (state == S_WRITE);
  assign slt_rd_addr = '0;
  assign slt_we      = (state == S_WRITE);
  assign slt_wr_addr = AW'(ROWS - 1) - AW'(k);
  assign slt_wr_data = clone;
  assign nrs_rd_addr = n;
  assign busy        = (state != S_IDLE);

  logic [39:0] nrs_dist;
  assign nrs_dist = sig_distance(clone, nrs_rd_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      rng          <= SEED;
      parent       <= '0;
      clone        <= '0;
      n            <= '0;
      hit          <= 1'b0;
      k            <= '0;
      accepted     <= '0;
      rejected     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (trigger) state <= S_PGRANT;
        S_PGRANT: if (slt_gnt) state <= S_PREAD;
        S_PREAD: begin
          parent <= slt_rd_data;
          k      <= '0;
          state  <= slt_rd_data.valid ? S_GEN0 : S_IDLE;
        end
        S_GEN0: begin
          // local genes: 8 signed 8-bit offsets from one 64-bit word
          logic [63:0] x;
          x     = xorshift(rng);
          rng   <= x;
          clone <= parent;
          for (int i = 0; i < W; i++) begin
            logic signed [18:0] v;
            v = 19'($signed(parent.local_sig[i])) +
                (19'($signed(x[8*i +: 8])) <<< MUT_SHIFT);
            clone.local_sig[i] <= (v > 19'sd32767)  ? 16'sh7FFF :
                                  (v < -19'sd32768) ? 16'sh8000 : v[15:0];
          end
          state <= S_GEN1;
        end
        S_GEN1: begin
          // global genes: 4 signed 3-bit offsets
          logic [63:0] x;
          x   = xorshift(rng);
          rng <= x;
          for (int c = 0; c < NCH; c++) begin
            logic signed [9:0] v;
            v = $signed({2'b00, clone.global_sig[c]}) + 10'($signed(x[3*c +: 3]));
            clone.global_sig[c] <= (v > 10'sd255) ? 8'd255 : (v < 10'sd0) ? 8'd0 : v[7:0];
          end
          n     <= '0;
          hit   <= 1'b0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (nrs_rd_data.valid && within_thr(nrs_dist, clone_energy, rem_q8)) hit <= 1'b1;
          n <= n + 1'b1;
          if (n == NW'(NRS_ROWS - 1)) begin
            if (hit || (nrs_rd_data.valid && within_thr(nrs_dist, clone_energy, rem_q8))) begin
              rejected <= rejected + 1'b1;
              if (32'(k) + 1 >= NCLONES) state <= S_IDLE;
              else begin
                k     <= k + 1'b1;
                state <= S_GEN0;
              end
            end else begin
              state <= S_WGRANT;
            end
          end
        end
        S_WGRANT: if (slt_gnt) state <= S_WRITE;
        S_WRITE: begin
          accepted <= accepted + 1'b1;
          if (32'(k) + 1 >= NCLONES) state <= S_IDLE;
          else begin
            k     <= k + 1'b1;
            state <= S_GEN0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
