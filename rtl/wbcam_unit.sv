// wbcam_unit: one CAM compare unit, the element chained to form WBCam.
//
// Registers the column index, data valid bit and channel id arriving from
// the previous stage (index and channel id load only when the incoming item
// is valid). The registered index is compared for equality with the index
// of inhibition queue entry i (inhidx); the hit is qualified by that entry's
// valid bit (inv) and by the registered data valid bit. The registered
// item goes on to the next stage; invalidating a hit item before the next
// stage is done by WBCam between units. One item per cycle, one cycle per
// stage. The structure follows the design's compare unit drawing.
module wbcam_unit
  import nvhtm_pkg::*;
#(
  parameter int L = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         dv_in,
  input  cidx_t        cidx_in,
  input  logic [L-1:0] chid_in,
  input  cidx_t        inhidx,
  input  logic         inv,
  output logic         camhit,
  output logic         dv_out,
  output cidx_t        cidx_out,
  output logic [L-1:0] chid_out
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dv_out   <= 1'b0;
      cidx_out <= '0;
      chid_out <= '0;
    end else begin
      dv_out <= dv_in;
      if (dv_in) begin
        cidx_out <= cidx_in;
        chid_out <= chid_in;
      end
    end
  end

  assign camhit = dv_out && inv && (cidx_out == inhidx);
endmodule
