// ais_prediction: AIS (artificial immune system) prediction unit.
//
// Every incoming signature (the antigen) is compared with every valid row of
// the Signatures Lookup Table (SLT) by the squared Euclidean distance of the
// paper's affinity equation, d(S, D) = sum (S_i - D_i)^2 over the 12 genes.
// The closest row wins.  As the paper describes:
//   * a match (d <= tp * energy of the incoming signature, tp in Q0.8, reset
//     value 0.09 from the paper) moves the winning row to the top of the SLT
//     stack (row 0), by swapping it with the row that was there;
//   * no match appends the signature to the SLT as a new row, priority 0.
// A match with a row whose priority is not zero (a signature that has
// preceded a detected seizure) is a prediction: res.predict is set.  The
// relative threshold, the swap as the way to "place on top", and the choice
// of the row to append into are this design's choices: the first empty row;
// when the table is full, the first row of lowest priority (never row 0) at
// or after a replacement pointer that moves past each replaced row, so that
// replacements go round the table instead of hitting the same row.
//
// One signature can wait while another is processed; a signature that
// arrives while one is already waiting is dropped and counted in `overflow`.
//
// Timing: after the SLT grant, a scan takes ROWS cycles, then one cycle to
// decide and one or two write cycles; res_valid pulses once per signature
// with res, res_row (where the signature now lives) and src_row (where the
// winner was found, before the swap).
module ais_prediction
  import sig_pkg::*;
#(
  parameter int unsigned ROWS = 512,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sig_valid,
  input  signature_t    sig,
  input  logic [7:0]    tp_q8,
  // SLT port
  output logic          slt_req,
  input  logic          slt_gnt,
  output logic [AW-1:0] slt_rd_addr,
  input  signature_t    slt_rd_data,
  output logic          slt_we,
  output logic [AW-1:0] slt_wr_addr,
  output signature_t    slt_wr_data,
  // result
  output logic          res_valid,
  output pred_result_t  res,
  output logic [AW-1:0] res_row,
  output logic [AW-1:0] src_row,
  output logic          busy,
  output logic [15:0]   overflow
);
  typedef enum logic [2:0] {S_IDLE, S_GRANT, S_SCAN, S_DECIDE, S_WR0, S_WR1, S_DONE} state_e;
  state_e state;

  signature_t    cur;
  logic [39:0]   cur_energy;
  logic          pend_valid;
  signature_t    pend;

  logic [AW-1:0] r;
  logic          best_found;
  logic [39:0]   best_dist;
  logic [AW-1:0] best_row;
  signature_t    best_data;
  signature_t    row0_data;
  logic          free_found;
  logic [AW-1:0] free_row;
  logic [2:0]    vlo_prio, vhi_prio;   // 4 = none found yet
  logic [AW-1:0] vlo_row, vhi_row;
  logic [AW-1:0] victim_row;
  logic [AW-1:0] rr;                   // replacement pointer
  logic          matched;

  logic [39:0]   row_dist;
  assign row_dist = sig_distance(cur, slt_rd_data);

  // victim: the first row of lowest priority at or after the replacement
  // pointer, else the first row of lowest priority in the table
  assign victim_row  = (vhi_prio <= vlo_prio) ? vhi_row : vlo_row;

  assign slt_req     = (state != S_IDLE) && (state != S_DONE);
  assign slt_rd_addr = r;
  assign busy        = (state != S_IDLE);

  always_comb begin
    slt_we      = 1'b0;
    slt_wr_addr = '0;
    slt_wr_data = '0;
    if (state == S_WR0) begin
      slt_we = 1'b1;
      if (matched) begin
        slt_wr_addr = '0;
        slt_wr_data = best_data;
      end else begin
        slt_wr_addr = free_found ? free_row : victim_row;
        slt_wr_data = cur;
      end
    end else if (state == S_WR1) begin
      slt_we      = 1'b1;
      slt_wr_addr = best_row;
      slt_wr_data = row0_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cur         <= '0;
      cur_energy  <= '0;
      pend_valid  <= 1'b0;
      pend        <= '0;
      r           <= '0;
      best_found  <= 1'b0;
      best_dist   <= '0;
      best_row    <= '0;
      best_data   <= '0;
      row0_data   <= '0;
      free_found  <= 1'b0;
      free_row    <= '0;
      vlo_prio    <= 3'd4;
      vhi_prio    <= 3'd4;
      vlo_row     <= AW'(ROWS - 1);
      vhi_row     <= AW'(ROWS - 1);
      rr          <= AW'(1);
      matched     <= 1'b0;
      res_valid   <= 1'b0;
      res         <= '0;
      res_row     <= '0;
      src_row     <= '0;
      overflow    <= '0;
    end else begin
      res_valid <= 1'b0;

      // input buffering: one signature in work, one waiting
      if (state == S_IDLE) begin
        if (pend_valid || sig_valid) begin
          cur         <= pend_valid ? pend : sig;
          cur_energy  <= sig_energy(pend_valid ? pend : sig);
          r           <= '0;
          best_found  <= 1'b0;
          free_found  <= 1'b0;
          vlo_prio    <= 3'd4;
          vhi_prio    <= 3'd4;
          state       <= S_GRANT;
          if (pend_valid) begin
            pend       <= sig;
            pend_valid <= sig_valid;
          end
        end
      end else if (sig_valid) begin
        if (!pend_valid) begin
          pend       <= sig;
          pend_valid <= 1'b1;
        end else begin
          overflow <= overflow + 1'b1;
        end
      end

      unique case (state)
        S_IDLE: ;
        S_GRANT: if (slt_gnt) state <= S_SCAN;
        S_SCAN: begin
          if (r == '0) row0_data <= slt_rd_data;
          if (slt_rd_data.valid) begin
            if (!best_found || row_dist < best_dist) begin
              best_found <= 1'b1;
              best_dist  <= row_dist;
              best_row   <= r;
              best_data  <= slt_rd_data;
            end
            if (r != '0 && {1'b0, slt_rd_data.prio} < vlo_prio) begin
              vlo_prio <= {1'b0, slt_rd_data.prio};
              vlo_row  <= r;
            end
            if (r != '0 && r >= rr && {1'b0, slt_rd_data.prio} < vhi_prio) begin
              vhi_prio <= {1'b0, slt_rd_data.prio};
              vhi_row  <= r;
            end
          end else if (!free_found) begin
            free_found <= 1'b1;
            free_row   <= r;
          end
          r <= r + 1'b1;
          if (r == AW'(ROWS - 1)) state <= S_DECIDE;
        end
        S_DECIDE: begin
          matched <= best_found && within_thr(best_dist, cur_energy, tp_q8);
          state   <= S_WR0;
        end
        S_WR0: begin
          if (matched && best_row != '0) state <= S_WR1;
          else                           state <= S_DONE;
        end
        S_WR1: state <= S_DONE;
        S_DONE: begin
          res_valid    <= 1'b1;
          res.match    <= matched;
          res.predict  <= matched && (best_data.prio != 2'd0);
          res.appended <= !matched;
          res.prio     <= matched ? best_data.prio : 2'd0;
          res_row      <= matched ? '0 : (free_found ? free_row : victim_row);
          src_row      <= matched ? best_row : (free_found ? free_row : victim_row);
          if (!matched && !free_found) rr <= victim_row + 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
