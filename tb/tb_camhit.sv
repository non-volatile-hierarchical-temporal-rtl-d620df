// tb_camhit: self-checking test of the CAM hit detector.
//
// Random qualified-hit vectors and channel ids at the CAM stage taps are
// applied; for every channel the hit must equal the OR over the stages of
// (valid and id equal) and the timeout must equal the last tap's valid and
// id match, computed here independently.
module tb_camhit;
  import nvhtm_pkg::*;
  localparam int N = 8, D = 5, L = 3;
  int checks = 0, failures = 0;
  logic [D:0] cv;
  logic [D:0][L-1:0] cam_chid;
  logic [N-1:0] chhit, chtimeout;

  camhit #(.N_CH(N), .DEPTH(D), .L(L)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [N-1:0] eh, et;
      cv = (D+1)'($urandom) & (D+1)'($urandom);
      for (int k = 0; k <= D; k++) cam_chid[k] = L'($urandom);
      eh = '0; et = '0;
      for (int k = 0; k < D; k++) if (cv[k]) eh[cam_chid[k]] = 1'b1;
      if (cv[D]) et[cam_chid[D]] = 1'b1;
      #1;
      checks++; if (chhit != eh) begin failures++; $display("FAIL hit %b exp %b", chhit, eh); end
      checks++; if (chtimeout != et) begin failures++; $display("FAIL to %b exp %b", chtimeout, et); end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
