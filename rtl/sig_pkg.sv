// sig_pkg: types and constants shared by the seizure predictor.
//
// Four EEG channels of 16-bit two's-complement samples travel together as a
// 64-bit bus (4 x 16).  A neural signature is a 165-bit word: a local part of
// W = 8 coefficients of 16 bits taken from the dominant spiking channel, a
// global part of one 8-bit activity figure per channel, and 5 control bits
// split into priority, ordering and control fields.  The 165-bit total, the
// 8 x 16 and 4 x 8 split and the three control strings follow the paper; how
// the 5 control bits divide (2 + 2 + 1) is this design's choice.
//
// Thresholds are unsigned Q0.8 fractions (value / 256).  Their reset values
// follow the paper: td = 0.23 for seizure detection and tp = 0.09 for
// prediction; the negative-selection remove threshold 0.3 comes from the
// paper's AIS parameter table.
package sig_pkg;

  localparam int unsigned NCH      = 4;    // EEG channels
  localparam int unsigned SW       = 16;   // sample / coefficient width
  localparam int unsigned W        = 8;    // signature window (signature units)
  localparam int unsigned GW       = 8;    // global gene width
  localparam int unsigned NGENES   = W + NCH;
  localparam int unsigned SIG_BITS = 165;

  typedef logic signed [SW-1:0] sample_t;
  typedef sample_t [NCH-1:0]    sample_vec_t;   // 64-bit bus

  // 8-bit spike information passed from the spike detector to the
  // signature generator.
  typedef struct packed {
    logic [NCH-1:0] mask;      // channels whose deviation crossed the limit
    logic [1:0]     dom_ch;    // channel with the largest deviation
    logic           any;       // at least one channel spiked
    logic           neg;       // dominant deviation was negative
  } spike_info_t;

  typedef struct packed {
    sample_t [W-1:0]            local_sig;   // 8 x 16 bits
    logic    [NCH-1:0][GW-1:0]  global_sig;  // 4 x 8 bits
    logic    [1:0]              prio;        // priority string
    logic    [1:0]              order;       // ordering string (dominant channel)
    logic                       valid;       // control string
  } signature_t;

  // 5-bit result of the seizure detection unit
  typedef struct packed {
    logic           seizure;
    logic [NCH-1:0] pair_mask;   // the two channels of the strongest pair
  } det_result_t;

  // 5-bit result of the AIS prediction unit
  typedef struct packed {
    logic       predict;   // matched a seizure-associated signature
    logic       match;     // matched any stored signature
    logic       appended;  // no match: signature appended as new
    logic [1:0] prio;      // priority of the winning row
  } pred_result_t;

  typedef enum logic [1:0] {
    MSG_NONE    = 2'd0,
    MSG_ALARM   = 2'd1,   // ictal: seizure detected
    MSG_WARNING = 2'd2,   // pre-ictal: seizure predicted
    MSG_DATA    = 2'd3    // raw coefficient upload
  } msg_kind_e;

  typedef struct packed {
    msg_kind_e   kind;
    logic [31:0] time_stamp;  // signature window count at the event
    logic [15:0] window_id;   // SLT row / channel mask that caused it
    sample_vec_t data;        // coefficients for MSG_DATA, else the window's last sample
  } out_msg_t;

  localparam logic [7:0] TD_DEFAULT  = 8'd59;  // 0.23 * 256
  localparam logic [7:0] TP_DEFAULT  = 8'd23;  // 0.09 * 256
  localparam logic [7:0] REM_DEFAULT = 8'd77;  // 0.30 * 256

  // Squared Euclidean distance between two signatures over all 12 genes
  // (paper eq. 4).  Result is wide enough for any 16/8-bit genes.
  function automatic logic [39:0] sig_distance(signature_t a, signature_t b);
    logic [39:0] acc;
    logic signed [39:0] d;
    acc = '0;
    for (int i = 0; i < W; i++) begin
      d   = 40'($signed(a.local_sig[i])) - 40'($signed(b.local_sig[i]));
      acc = acc + 40'(d * d);
    end
    for (int i = 0; i < NCH; i++) begin
      d   = $signed({32'd0, a.global_sig[i]}) - $signed({32'd0, b.global_sig[i]});
      acc = acc + 40'(d * d);
    end
    return acc;
  endfunction

  // Signature energy: squared distance to the all-zero signature.
  function automatic logic [39:0] sig_energy(signature_t a);
    signature_t z;
    z = '0;
    return sig_distance(a, z);
  endfunction

  // True when dst <= thr_q8/256 * energy.
  function automatic logic within_thr(logic [39:0] dst, logic [39:0] energy,
                                      logic [7:0] thr_q8);
    return ({8'd0, dst} << 8) <= (48'(energy) * 48'(thr_q8));
  endfunction

endpackage
