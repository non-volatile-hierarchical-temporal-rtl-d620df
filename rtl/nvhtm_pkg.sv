// nvhtm_pkg: widths, number formats and shared types of the NVHTM spatial
// pooler datapath.
//
// The flash interface is C_W = 16 bits wide and one interface word carries
// one synaptic permanence; a column index is CIDX_W = 24 bits wide. Both
// numbers follow the sizing example of the design (16-bit channel, 24-bit
// index). The number formats below are this implementation's own choice,
// the design only states the ranges:
//   permanence      unsigned Q0.16, 0 .. 0xFFFF stands for 0 .. 1
//   active duty     unsigned Q0.16, same scale as a permanence
//   overlap duty    unsigned Q12.4 (DO_FRAC = 4) in overlap counts
//   boost factor    unsigned Q8.8 (BETA_FRAC = 8), 0x0100 = 1.0
//   y1, y2          unsigned Q0.16 (the two tau-derived duty cycle weights)
//   y3              signed Q12.4 (it is negative, because beta_max >= 1);
//                   boost = y4 + (y3 * active_duty) >>> 12 in Q8.8
//   y4 .. y8        same format as the value they are added to
// The ninth constant, P_dec + P_th/10, is not needed by the update rule as
// implemented (see wbpipe) and has no register.
// A proximal segment page holds three header words, overlap duty cycle,
// active duty cycle and boost factor in that order, then one permanence per
// input bit.
package nvhtm_pkg;

  localparam int C_W       = 16;   // flash interface / permanence width
  localparam int CIDX_W    = 24;   // column index width
  localparam int BETA_FRAC = 8;    // fraction bits of the boost factor
  localparam int HDR_WORDS = 3;    // header words at the start of a page
  localparam int DO_FRAC   = 4;    // fraction bits of the overlap duty cycle

  typedef logic [C_W-1:0]    word_t;
  typedef logic [CIDX_W-1:0] cidx_t;

  // Overlap result of one column, as handed from OVPipe to Charb
  // (2C + C_IDX bits wide).
  typedef struct packed {
    word_t alpha;   // pre-boost overlap count (already >= A_th)
    word_t beta;    // boost factor read from the page header
    cidx_t idx;     // column index
  } ov_rec_t;

  // One inhibition queue entry (C + C_IDX bits plus its valid bit).
  typedef struct packed {
    logic  v;
    word_t ov;      // boosted overlap
    cidx_t idx;
  } inh_ent_t;

  // Configuration broadcast by the host before operation.
  typedef struct packed {
    word_t p_th;      // permanence threshold P_th
    word_t a_th;      // minimum overlap A_th
    word_t y1;        // (tau_D - 1) / tau_D
    word_t y2;        // 1 / tau_D
    word_t y3;        // (1 - beta_max) / min active duty  (signed)
    word_t y4;        // beta_max
    word_t y5;        // P_th / 10
    word_t y6;        // P_inc
    word_t y7;        // P_dec
    word_t y8;        // P_inc + P_th / 10
    word_t da_min;    // minimum active duty cycle
    word_t do_min;    // minimum overlap duty cycle
  } cfg_t;

  // Steering of a WBPipe input word (d_dest).
  typedef enum logic [1:0] {
    DEST_NONE  = 2'd0,
    DEST_DUTY  = 2'd1,   // duty cycle update pipe (D_O then D_A)
    DEST_BOOST = 2'd2,   // old boost factor staging register
    DEST_SEG   = 2'd3    // proximal segment update pipe
  } wb_dest_e;

  // Source of a WBPipe output word (d_src, 3 bits).
  typedef enum logic [2:0] {
    SRC_DO     = 3'd0,   // new overlap duty cycle
    SRC_DA     = 3'd1,   // new active duty cycle
    SRC_BNEW   = 3'd2,   // new boost factor
    SRC_BOLD   = 3'd3,   // old boost factor (staging register)
    SRC_SEG    = 3'd4    // updated permanence
  } wb_src_e;

  // Saturating narrowing of a wider unsigned value to one word.
  function automatic word_t sat_word(input logic [2*C_W-1:0] v);
    return (|v[2*C_W-1:C_W]) ? '1 : v[C_W-1:0];
  endfunction

endpackage
