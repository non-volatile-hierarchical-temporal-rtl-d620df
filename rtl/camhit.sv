// camhit: CAM hit detector (Camhit), one detector per channel.
//
// For channel i, every CAM stage k < DEPTH whose qualified hit cv[k] is
// raised with cam_chid[k] == i contributes to chhit[i] through an OR tree
// of equality comparators; the timeout stage (cv[DEPTH], cam_chid[DEPTH])
// raises chtimeout[i], a CAM miss for that channel. Purely combinational,
// as drawn in the design; the hit and timeout go to the SSD controller and
// to the channel's WBPipe. Each channel has only one index in the CAM at a
// time, so a hit or timeout is unambiguous.
module camhit
  import nvhtm_pkg::*;
#(
  parameter int N_CH  = 8,
  parameter int DEPTH = 16,
  parameter int L     = 3
) (
  input  logic [DEPTH:0]         cv,
  input  logic [DEPTH:0][L-1:0]  cam_chid,
  output logic [N_CH-1:0]        chhit,
  output logic [N_CH-1:0]        chtimeout
);
  always_comb begin
    for (int i = 0; i < N_CH; i++) begin
      chhit[i] = 1'b0;
      for (int k = 0; k < DEPTH; k++)
        chhit[i] |= cv[k] && (cam_chid[k] == L'(i));
      chtimeout[i] = cv[DEPTH] && (cam_chid[DEPTH] == L'(i));
    end
  end
endmodule
