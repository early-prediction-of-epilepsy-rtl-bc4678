// population_manager: the population manager of the AIS.
//
// The paper makes it the core of the AIS: it assigns priorities to the stored
// signatures and fires the signature mutation.  Following the paper:
//   * when the seizure detection unit reports a seizure onset, the signatures
//     that came just before it are "updated": each of the last H = 64 signatures
//     (already in the SLT, since the prediction unit appends every new one)
//     has its priority raised by one, saturating at 3.  A non-zero priority is
//     what turns a later match with that row into a prediction;
//   * mutation fires on sustained detection at the top of the stack (the row
//     already at row 0 wins SUSTAIN times in a row) or when the window count
//     reaches MUT_CYCLES signatures.
// H, SUSTAIN and the +1 priority step are this design's choices; MUT_CYCLES
// defaults to the 83 mutation cycles of the paper's AIS parameter table.
// The history follows the prediction unit's swap so that each entry keeps
// pointing at the same signature after it moves; an entry whose row is
// overwritten later (by an append or by a clone from the mutation unit) is
// dropped, since its signature is no longer in the table.
//
// Timing: a priority update takes the SLT grant and then two cycles (read,
// write) per history entry; mut_trigger is a one-cycle pulse.
module population_manager
  import sig_pkg::*;
#(
  parameter int unsigned ROWS       = 512,
  parameter int unsigned H          = 64,
  parameter int unsigned SUSTAIN    = 4,
  parameter int unsigned MUT_CYCLES = 83,
  localparam int unsigned AW        = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // from the prediction unit
  input  logic          res_valid,
  input  pred_result_t  res,
  input  logic [AW-1:0] res_row,
  input  logic [AW-1:0] src_row,
  // SLT rows overwritten by the mutation unit
  input  logic          ovr_we,
  input  logic [AW-1:0] ovr_row,
  // from the detection unit
  input  logic          seizure,
  // SLT port
  output logic          slt_req,
  input  logic          slt_gnt,
  output logic [AW-1:0] slt_rd_addr,
  input  signature_t    slt_rd_data,
  output logic          slt_we,
  output logic [AW-1:0] slt_wr_addr,
  output signature_t    slt_wr_data,
  // to the mutation unit
  output logic          mut_trigger,
  output logic          mut_sustained,   // cause of the last trigger
  output logic [15:0]   updates          // priority updates made
);
  typedef enum logic [1:0] {S_IDLE, S_GRANT, S_RD, S_WR} state_e;
  state_e state;

  logic [H-1:0][AW-1:0] hist;
  logic [H-1:0]         hist_v;
  logic [$clog2(H+1)-1:0] idx;
  logic                 seizure_q;
  logic                 onset_pend;
  logic [$clog2(SUSTAIN+1)-1:0]    top_run;
  logic [$clog2(MUT_CYCLES+1)-1:0] win_cnt;
  signature_t           row_q;

  assign slt_req     = (state != S_IDLE);
  assign slt_rd_addr = hist[idx[$clog2(H)-1:0]];
  assign slt_we      = (state == S_WR);
  assign slt_wr_addr = hist[idx[$clog2(H)-1:0]];
  always_comb begin
    slt_wr_data = row_q;
    if (row_q.prio != 2'd3) slt_wr_data.prio = row_q.prio + 2'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      hist          <= '0;
      hist_v        <= '0;
      idx           <= '0;
      seizure_q     <= 1'b0;
      onset_pend    <= 1'b0;
      top_run       <= '0;
      win_cnt       <= '0;
      row_q         <= '0;
      mut_trigger   <= 1'b0;
      mut_sustained <= 1'b0;
      updates       <= '0;
    end else begin
      mut_trigger <= 1'b0;
      seizure_q   <= seizure;
      if (seizure && !seizure_q) onset_pend <= 1'b1;

      // history of where the recent signatures live, kept across swaps;
      // an entry whose row is overwritten (by an append or by a clone) no
      // longer holds its signature and is dropped
      begin
        logic [H-1:0][AW-1:0] h;
        logic [H-1:0]         hv;
        h  = hist;
        hv = hist_v;
        if (ovr_we) begin
          for (int i = 0; i < H; i++) if (h[i] == ovr_row) hv[i] = 1'b0;
        end
        if (res_valid) begin
          if (res.match) begin
            for (int i = 0; i < H; i++) begin
              if (h[i] == '0)          h[i] = src_row;
              else if (h[i] == src_row) h[i] = '0;
            end
          end else begin
            for (int i = 0; i < H; i++) if (h[i] == res_row) hv[i] = 1'b0;
          end
          h  = {h[H-2:0], res_row};
          hv = {hv[H-2:0], 1'b1};
        end
        hist   <= h;
        hist_v <= hv;
      end

      if (res_valid) begin
        // mutation triggers
        if (res.match && src_row == '0) begin
          if (32'(top_run) + 1 >= SUSTAIN) begin
            top_run       <= '0;
            mut_trigger   <= 1'b1;
            mut_sustained <= 1'b1;
          end else begin
            top_run <= top_run + 1'b1;
          end
        end else begin
          top_run <= '0;
        end
        if (32'(win_cnt) + 1 >= MUT_CYCLES) begin
          win_cnt <= '0;
          if (!(res.match && src_row == '0 && 32'(top_run) + 1 >= SUSTAIN)) begin
            mut_trigger   <= 1'b1;
            mut_sustained <= 1'b0;
          end
        end else begin
          win_cnt <= win_cnt + 1'b1;
        end
      end

      unique case (state)
        S_IDLE: if (onset_pend && !res_valid) begin
          onset_pend <= 1'b0;
          idx        <= '0;
          state      <= S_GRANT;
        end
        S_GRANT: if (slt_gnt) state <= S_RD;
        S_RD: begin
          row_q <= slt_rd_data;
          if (hist_v[idx[$clog2(H)-1:0]] && slt_rd_data.valid) begin
            state <= S_WR;
          end else if (32'(idx) + 1 >= H) begin
            state <= S_IDLE;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_WR: begin
          updates <= updates + 1'b1;
          if (32'(idx) + 1 >= H) state <= S_IDLE;
          else begin
            idx   <= idx + 1'b1;
            state <= S_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
