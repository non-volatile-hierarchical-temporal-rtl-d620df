// wbcam: write-back content-addressable memory (WBCam).
//
// A chain of DEPTH compare units, unit i holding inhibition queue entry i
// as its key (inhidx_i, qualified by inv_i). An issued column index enters
// unit 0 and advances one unit per cycle, so up to DEPTH indexes are in
// flight. When unit i hits, the item is invalidated before unit i+1
// (dv_(i+1) = dv_i & ~hit_i, the design's dv equation), which keeps a hit
// item from later being reported as a timeout. An item that leaves the
// last unit still valid has been compared with every entry without a match;
// it is registered in a final stage and reported as a timeout (miss).
// Outputs towards Camhit: cv[k] / cam_chid[k] for k < DEPTH are the
// qualified hits of unit k with the channel id of the item; cv[DEPTH] /
// cam_chid[DEPTH] is the timeout stage.
// Timing: an item issued at cycle t is compared in unit k at cycle t+1+k;
// a miss is reported at cycle t+1+DEPTH.
module wbcam
  import nvhtm_pkg::*;
#(
  parameter int DEPTH = 16,
  parameter int L     = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 dv,
  input  cidx_t                cidx,
  input  logic     [L-1:0]     chid,
  input  inh_ent_t [DEPTH-1:0] inh_q,
  output logic     [DEPTH:0]   cv,
  output logic     [DEPTH:0][L-1:0] cam_chid
);
  logic  [DEPTH-1:0]        hit, dvo;
  cidx_t [DEPTH-1:0]        cidxo;
  logic  [DEPTH-1:0][L-1:0] chido;
  logic                     to_v_q;
  logic  [L-1:0]            to_chid_q;

  for (genvar i = 0; i < DEPTH; i++) begin : g_unit
    logic         dv_i;
    cidx_t        cidx_i;
    logic [L-1:0] chid_i;
    if (i == 0) begin : g_first
      assign dv_i   = dv;
      assign cidx_i = cidx;
      assign chid_i = chid;
    end else begin : g_next
      assign dv_i   = dvo[i-1] && !hit[i-1];
      assign cidx_i = cidxo[i-1];
      assign chid_i = chido[i-1];
    end
    wbcam_unit #(.L(L)) u_cmp (
      .clk(clk), .rst_n(rst_n),
      .dv_in(dv_i), .cidx_in(cidx_i), .chid_in(chid_i),
      .inhidx(inh_q[i].idx), .inv(inh_q[i].v),
      .camhit(hit[i]), .dv_out(dvo[i]), .cidx_out(cidxo[i]), .chid_out(chido[i])
    );
    assign cv[i]       = hit[i];
    assign cam_chid[i] = chido[i];
  end

  // timeout stage after the last compare unit
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      to_v_q    <= 1'b0;
      to_chid_q <= '0;
    end else begin
      to_v_q    <= dvo[DEPTH-1] && !hit[DEPTH-1];
      to_chid_q <= chido[DEPTH-1];
    end
  end
  assign cv[DEPTH]       = to_v_q;
  assign cam_chid[DEPTH] = to_chid_q;

endmodule
