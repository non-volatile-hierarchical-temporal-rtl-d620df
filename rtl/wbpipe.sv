// wbpipe: write-back pipeline of one flash channel (WBPipe).
//
// During learning the SSD controller re-reads every proximal segment page
// from the segment cache and streams it through this unit on its way back
// to flash. An input demultiplexer (d_dest) steers each word to
//   * the duty cycle update pipe: the first word is the overlap duty cycle
//     D_O, the second the active duty cycle D_A;
//   * the boost staging register B_i, which keeps the old boost factor;
//   * the proximal segment update pipe: one permanence per word.
// The output multiplexer (d_src, 3 bits) picks what goes back to flash:
// new D_O, new D_A, new boost, old boost or the updated permanence.
//
// Duty cycle pipe (one shared multiplier, four multiply cycles started by
// the D_O word; duty_done rises when all three results are held):
//   D_O' = D_O*y1 + alpha*y2          (alpha from the overlap table)
//   D_A' = D_A*y1 + (active ? y2 : 0)
//   beta' = y4 + y3*D_A'              (boost_upd = D_A' < min active duty)
// When boost_upd is low the controller writes the old boost (SRC_BOLD)
// instead of beta', which is what the staging register exists for.
// Segment pipe (one cycle, one adder): with x = X_t[j] for synapse j,
// weak = old D_O < min overlap duty and c the old permanence,
//   active & x        : c + (weak & c>0 ? y8 : y6)
//   active & !x       : c - y7 + (weak & c>0 ? y5 : 0)
//   !active           : c + (weak & c>0 ? y5 : 0)
// saturated to 0 .. 0xFFFF. "active" is set by a CAM hit and cleared by a
// CAM timeout of this channel, before the page is streamed.
//
// Interface and timing: seg_start (pulse) begins a page: synapse pointer and
// duty word order are reset. din_valid/d_dest present one word per cycle;
// a segment result is on dout (d_src = SRC_SEG) the cycle after its input.
// duty_done is high from 5 cycles after the D_O word until the next
// seg_start. The equations and the y1..y8 constants are the design's; the
// number formats, the use of the old D_O for the weak test, the new D_A for
// the boost test and the multiply schedule are this implementation's.
module wbpipe
  import nvhtm_pkg::*;
#(
  parameter int P_LEN = 784
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic [P_LEN-1:0] xt,
  input  logic             seg_start,
  input  logic             cam_hit,
  input  logic             cam_miss,
  input  word_t            alpha_in,
  input  logic             din_valid,
  input  word_t            din,
  input  wb_dest_e         d_dest,
  input  wb_src_e          d_src,
  output word_t            dout,
  output logic             duty_done,
  output logic             boost_upd,
  output logic             active
);
  localparam int JW = (P_LEN > 1) ? $clog2(P_LEN) : 1;

  typedef enum logic [2:0] {S_IDLE, S_DO1, S_DO2, S_DA, S_B, S_DONE} dstate_e;

  dstate_e        st_q;
  logic           wsel_q;            // next duty word is D_A
  word_t          do_raw_q, da_raw_q;
  logic [C_W+1:0] acc_q;
  word_t          do_new_q, da_new_q, bnew_q, bold_q, seg_q;
  logic           act_q;
  logic [JW-1:0]  j_q;

  // shared multiplier
  logic signed [C_W+1:0]   ma, mb;
  logic signed [2*C_W+3:0] mp;
  always_comb begin
    ma = '0; mb = '0;
    unique case (st_q)
      S_DO1:   begin ma = $signed({2'b00, do_raw_q}); mb = $signed({2'b00, cfg.y1}); end
      S_DO2:   begin ma = $signed({2'b00, alpha_in << DO_FRAC}); mb = $signed({2'b00, cfg.y2}); end
      S_DA:    begin ma = $signed({2'b00, da_raw_q}); mb = $signed({2'b00, cfg.y1}); end
      S_B:     begin ma = $signed({2'b00, da_new_q}); mb = $signed({{2{cfg.y3[C_W-1]}}, cfg.y3}); end
      default: ;
    endcase
    mp = ma * mb;
  end

  function automatic word_t clamp(input logic signed [C_W+3:0] v);
    if (v < 0)                           return '0;
    else if (v > $signed({4'b0, {C_W{1'b1}}})) return '1;
    else                                 return v[C_W-1:0];
  endfunction

  // segment update ALU
  logic                  x_bit, weakc;
  word_t                 add_op, sub_op;
  logic signed [C_W+3:0] seg_sum;
  always_comb begin
    x_bit  = xt[j_q];
    weakc  = (do_raw_q < cfg.do_min) && (din != '0);
    add_op = '0;
    sub_op = '0;
    if (act_q && x_bit)      add_op = weakc ? cfg.y8 : cfg.y6;
    else if (weakc)          add_op = cfg.y5;
    if (act_q && !x_bit)     sub_op = cfg.y7;
    seg_sum = $signed({4'b0, din}) + $signed({4'b0, add_op}) - $signed({4'b0, sub_op});
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st_q <= S_IDLE; wsel_q <= 1'b0; do_raw_q <= '0; da_raw_q <= '0;
      acc_q <= '0; do_new_q <= '0; da_new_q <= '0; bnew_q <= '0;
      bold_q <= '0; seg_q <= '0; act_q <= 1'b0; j_q <= '0; boost_upd <= 1'b0;
    end else begin
      if (cam_hit)       act_q <= 1'b1;
      else if (cam_miss) act_q <= 1'b0;
      if (seg_start) begin
        wsel_q <= 1'b0;
        j_q    <= '0;
        st_q   <= S_IDLE;
      end else begin
        if (din_valid) begin
          unique case (d_dest)
            DEST_DUTY: begin
              if (!wsel_q) begin do_raw_q <= din; st_q <= S_DO1; end
              else         da_raw_q <= din;
              wsel_q <= 1'b1;
            end
            DEST_BOOST: bold_q <= din;
            DEST_SEG: begin
              seg_q <= clamp(seg_sum);
              j_q   <= (int'(j_q) == P_LEN - 1) ? '0 : j_q + 1'b1;
            end
            default: ;
          endcase
        end
        unique case (st_q)
          S_DO1: begin acc_q <= (C_W+2)'(mp >>> C_W); st_q <= S_DO2; end
          S_DO2: begin
            do_new_q <= clamp($signed({2'b0, acc_q}) + $signed((C_W+4)'(mp >>> C_W)));
            st_q <= S_DA;
          end
          S_DA: begin
            da_new_q <= clamp($signed((C_W+4)'(mp >>> C_W)) +
                              $signed({4'b0, act_q ? cfg.y2 : word_t'(0)}));
            st_q <= S_B;
          end
          S_B: begin
            bnew_q    <= clamp($signed({4'b0, cfg.y4}) + $signed((C_W+4)'(mp >>> 12)));
            boost_upd <= (da_new_q < cfg.da_min);
            st_q <= S_DONE;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (d_src)
      SRC_DO:   dout = do_new_q;
      SRC_DA:   dout = da_new_q;
      SRC_BNEW: dout = bnew_q;
      SRC_BOLD: dout = bold_q;
      default:  dout = seg_q;
    endcase
  end

  assign duty_done = (st_q == S_DONE);
  assign active    = act_q;

  a_hit_miss_excl: assert property (@(posedge clk) disable iff (!rst_n)
    !(cam_hit && cam_miss));
endmodule
