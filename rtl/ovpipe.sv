// ovpipe: overlap pipeline of one flash channel (OVPipe).
//
// One proximal segment page streams in from the flash channel, one C_W-bit
// word per beat: three header words (overlap duty cycle, active duty cycle,
// boost factor) and then P_LEN permanences, one per input bit. For every
// permanence the unit compares it with P_th (connected), selects input bit
// X_t[j] with the synapse pointer j (active) and adds one to the overlap
// accumulator when both hold. The boost factor word is kept in the beta
// register. When the last permanence has been counted the overlap alpha' is
// latched (alpha register), written to the overlap table port (as 0 when it
// is below A_th) and, only if alpha' >= A_th, offered to the channel arbiter
// as {alpha', beta, column index} with d_req until d_gnt is seen.
//
// Interface and timing:
//   clear       new input vector: resets accumulator, pointer and requests
//   page_start  pulse before the first beat of a page, with its column index
//   rd_valid    a beat of rd_data; beats of a page may have gaps
//   in_ready    low while a finished overlap waits for the output register;
//               no page_start may be issued then
//   tbl_we      one-cycle pulse one clock after the last beat
//   d_req/d_gnt request and grant; the request drops the cycle after d_gnt
// The accumulate / threshold / request structure follows the design; the
// page layout order, the separate page_start pulse and in_ready are this
// implementation's choices.
module ovpipe
  import nvhtm_pkg::*;
#(
  parameter int P_LEN = 784          // synapses per segment = input bits
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  word_t            p_th,
  input  word_t            a_th,
  input  logic [P_LEN-1:0] xt,
  input  logic             page_start,
  input  cidx_t            page_idx,
  input  logic             rd_valid,
  input  word_t            rd_data,
  output logic             in_ready,
  output logic             tbl_we,
  output cidx_t            tbl_idx,
  output word_t            tbl_alpha,
  output logic             d_req,
  output ov_rec_t          d_ch,
  input  logic             d_gnt
);
  localparam int NBEAT = HDR_WORDS + P_LEN;
  localparam int CW    = $clog2(NBEAT + 1);
  localparam int JW    = (P_LEN > 1) ? $clog2(P_LEN) : 1;

  logic [CW-1:0] beat_q;     // beats received in this page
  logic          busy_q;     // a page is being accumulated
  word_t         acc_q;      // overlap accumulator
  word_t         beta_q;     // boost factor from the header
  cidx_t         idx_q;      // column index of this page
  logic          pend_q;     // finished overlap in the alpha register
  word_t         alpha_q;
  cidx_t         aidx_q;
  word_t         abeta_q;
  logic          out_v_q;    // output register holds a request
  ov_rec_t       out_q;

  logic          is_syn;
  logic          hit;
  logic          last;
  logic [JW-1:0] j;
  logic          out_free;

  assign is_syn   = rd_valid && busy_q && (beat_q >= CW'(HDR_WORDS));
  assign j        = JW'(beat_q - CW'(HDR_WORDS));
  assign hit      = is_syn && (rd_data >= p_th) && xt[j];
  assign last     = rd_valid && busy_q && (beat_q == CW'(NBEAT - 1));
  assign out_free = !out_v_q || d_gnt;
  assign in_ready = !pend_q;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      beat_q  <= '0;
      busy_q  <= 1'b0;
      acc_q   <= '0;
      beta_q  <= '0;
      idx_q   <= '0;
      pend_q  <= 1'b0;
      alpha_q <= '0;
      aidx_q  <= '0;
      abeta_q <= '0;
      out_v_q <= 1'b0;
      out_q   <= '0;
      tbl_we  <= 1'b0;
    end else begin
      tbl_we <= 1'b0;
      // accumulation
      if (page_start) begin
        beat_q <= '0;
        busy_q <= 1'b1;
        acc_q  <= '0;
        idx_q  <= page_idx;
      end else if (rd_valid && busy_q) begin
        beat_q <= beat_q + 1'b1;
        if (beat_q == CW'(HDR_WORDS - 1)) beta_q <= rd_data;
        if (hit) acc_q <= acc_q + 1'b1;
        if (last) begin
          busy_q  <= 1'b0;
          pend_q  <= 1'b1;
          alpha_q <= acc_q + word_t'(hit);
          aidx_q  <= idx_q;
          abeta_q <= beta_q;
          tbl_we  <= 1'b1;
        end
      end
      // output register / request towards Charb
      if (out_v_q && d_gnt) out_v_q <= 1'b0;
      if (pend_q && out_free) begin
        pend_q <= 1'b0;
        if (alpha_q >= a_th) begin
          out_v_q     <= 1'b1;
          out_q.alpha <= alpha_q;
          out_q.beta  <= abeta_q;
          out_q.idx   <= aidx_q;
        end
      end
    end
  end

  assign tbl_idx   = aidx_q;
  assign tbl_alpha = (alpha_q >= a_th) ? alpha_q : '0;
  assign d_req     = out_v_q;
  assign d_ch      = out_q;

  a_no_start_when_pending: assert property (@(posedge clk) disable iff (!rst_n)
    page_start |-> in_ready);
  a_gnt_only_on_req: assert property (@(posedge clk) disable iff (!rst_n)
    d_gnt |-> d_req);
endmodule
