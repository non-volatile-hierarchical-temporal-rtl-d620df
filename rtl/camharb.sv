// camharb: content-addressable memory arbiter (Camharb).
//
// During learning each channel presents the column index of the segment it
// is about to rewrite (cam_req, cam_cidx). A round-robin arbiter grants one
// channel per cycle and the index, tagged with the channel id (L bits),
// is registered into the C_ID / i registers that drive the first WBCam
// stage. Unlike Charb there is no back-pressure: WBCam accepts one item per
// cycle and cannot be overrun, so the arbiter advances every cycle.
// Timing: grant in cycle t, {dv, chid, cidx} valid at WBCam in cycle t+1.
// A channel keeps cam_req high until it sees its grant. The structure
// follows the design; the round-robin order is this implementation's choice.
module camharb
  import nvhtm_pkg::*;
#(
  parameter int N_CH = 8,
  parameter int L    = (N_CH > 1) ? $clog2(N_CH) : 1   // channel id width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic    [N_CH-1:0]    cam_req,
  input  cidx_t   [N_CH-1:0]    cam_cidx,
  output logic    [N_CH-1:0]    cam_gnt,
  output logic                  dv,
  output logic    [L-1:0]       chid,
  output cidx_t                 cidx
);
  localparam int IW = (N_CH > 1) ? $clog2(N_CH) : 1;
  logic [IW-1:0] gid;

  rr_arbiter #(.N(N_CH)) u_arb (
    .clk(clk), .rst_n(rst_n), .req(cam_req), .advance(1'b1),
    .gnt(cam_gnt), .gnt_id(gid)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dv   <= 1'b0;
      chid <= '0;
      cidx <= '0;
    end else begin
      dv <= |cam_req;
      if (|cam_req) begin
        chid <= L'(gid);
        cidx <= cam_cidx[gid];
      end
    end
  end
endmodule
