// wbcntl: learning control subsystem (WBCntl) = Camharb + WBCam + Camhit.
//
// Channels issue the column index of the segment they are about to write
// back; Camharb serialises them, WBCam compares each against the indexes
// left in the inhibition queue, and Camhit turns the result into a per
// channel hit (column active, learn) or timeout (column inactive).
// Timing: granted at cycle t, hit at cycle t+2+k for a match in queue entry
// k, timeout at cycle t+2+DEPTH. This grouping is the design's.
module wbcntl
  import nvhtm_pkg::*;
#(
  parameter int N_CH  = 8,
  parameter int DEPTH = 16,
  parameter int L     = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic     [N_CH-1:0]  cam_req,
  input  cidx_t    [N_CH-1:0]  cam_cidx,
  output logic     [N_CH-1:0]  cam_gnt,
  input  inh_ent_t [DEPTH-1:0] inh_q,
  output logic     [N_CH-1:0]  chhit,
  output logic     [N_CH-1:0]  chtimeout
);
  logic                   dv;
  logic  [L-1:0]          chid;
  cidx_t                  cidx;
  logic  [DEPTH:0]        cv;
  logic  [DEPTH:0][L-1:0] cam_chid;

  camharb #(.N_CH(N_CH), .L(L)) u_camharb (
    .clk(clk), .rst_n(rst_n), .cam_req(cam_req), .cam_cidx(cam_cidx),
    .cam_gnt(cam_gnt), .dv(dv), .chid(chid), .cidx(cidx)
  );
  wbcam #(.DEPTH(DEPTH), .L(L)) u_wbcam (
    .clk(clk), .rst_n(rst_n), .dv(dv), .cidx(cidx), .chid(chid),
    .inh_q(inh_q), .cv(cv), .cam_chid(cam_chid)
  );
  camhit #(.N_CH(N_CH), .DEPTH(DEPTH), .L(L)) u_camhit (
    .cv(cv), .cam_chid(cam_chid), .chhit(chhit), .chtimeout(chtimeout)
  );
endmodule
