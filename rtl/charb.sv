// charb: channel arbiter (Charb) between the overlap pipelines and the
// inhibition engine.
//
// Each channel holds one overlap record {alpha', beta, index} and raises
// d_req. A round-robin arbiter grants one channel (one-hot d_gnt) and the
// record is captured in the alpha / beta / index stage registers. The boost
// multiplier forms alpha = alpha' * beta from those registers (beta in Q8.8,
// product saturated to C_W bits) and presents it to the inhibition engine as
// an inhibition queue entry with inh_valid.
//
// Back-pressure: the stage registers hold their entry until the inhibition
// engine takes it (inh_valid & inh_ready). A new grant is only issued when
// the stage is empty or being emptied in the same cycle, so an empty stage
// still fills while the engine is busy (gaps in the pipe are filled).
// Latency: grant in cycle t, entry valid at the engine in cycle t+1.
// The structure (arbiter, stage registers, one multiplier) follows the
// design; the arbitration order and the fixed-point scaling are this
// implementation's choices.
module charb
  import nvhtm_pkg::*;
#(
  parameter int N_CH = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic    [N_CH-1:0] d_req,
  input  ov_rec_t [N_CH-1:0] d_ch,
  output logic    [N_CH-1:0] d_gnt,
  output logic               inh_valid,
  output inh_ent_t           inh_ent,
  input  logic               inh_ready
);
  localparam int IW = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic          st_v_q;
  word_t         st_alpha_q, st_beta_q;
  cidx_t         st_idx_q;
  logic          advance;
  logic [IW-1:0] gid;
  logic [2*C_W-1:0] prod;

  assign advance = !st_v_q || inh_ready;

  rr_arbiter #(.N(N_CH)) u_arb (
    .clk(clk), .rst_n(rst_n), .req(d_req), .advance(advance),
    .gnt(d_gnt), .gnt_id(gid)
  );

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      st_v_q     <= 1'b0;
      st_alpha_q <= '0;
      st_beta_q  <= '0;
      st_idx_q   <= '0;
    end else if (advance) begin
      st_v_q <= |d_req;
      if (|d_req) begin
        st_alpha_q <= d_ch[gid].alpha;
        st_beta_q  <= d_ch[gid].beta;
        st_idx_q   <= d_ch[gid].idx;
      end
    end
  end

  assign prod        = (st_alpha_q * st_beta_q) >> BETA_FRAC;
  assign inh_valid   = st_v_q;
  assign inh_ent.v   = st_v_q;
  assign inh_ent.ov  = sat_word(prod);
  assign inh_ent.idx = st_idx_q;
endmodule
