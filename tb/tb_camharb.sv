// tb_camharb: self-checking test of the CAM arbiter.
//
// Four channels raise random requests with their own column indexes and
// hold them until granted. Checks: one-hot grant to a requester in every
// cycle with a request (no back-pressure), the registered output one cycle
// later carries the granted channel id and its index, every request is
// served exactly once, and nothing is output in a cycle after no request.
module tb_camharb;
  import nvhtm_pkg::*;
  localparam int N = 4, L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] cam_req, cam_gnt;
  cidx_t [N-1:0] cam_cidx;
  logic dv; logic [L-1:0] chid; cidx_t cidx;

  camharb #(.N_CH(N)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int served = 0, issued = 0;
    logic exp_v; int exp_ch; cidx_t exp_idx;
    cam_req = '0; cam_cidx = '0; exp_v = 0; exp_ch = 0; exp_idx = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      for (int c = 0; c < N; c++)
        if (!cam_req[c] && ($urandom % 3 == 0)) begin
          cam_req[c] = 1; cam_cidx[c] = cidx_t'($urandom); issued++;
        end
      #1;
      check(dv == exp_v, "output valid one cycle after a grant");
      if (exp_v) check(int'(chid) == exp_ch && cidx == exp_idx, "output carries granted id and index");
      check($onehot0(cam_gnt) && ((cam_gnt & ~cam_req) == '0), "one-hot grant to a requester");
      check((|cam_req) == (|cam_gnt), "a grant in every cycle with a request");
      exp_v = |cam_gnt;
      for (int c = 0; c < N; c++) if (cam_gnt[c]) begin exp_ch = c; exp_idx = cam_cidx[c]; end
      @(negedge clk);
      for (int c = 0; c < N; c++) if (cam_gnt[c]) begin cam_req[c] = 0; served++; end
    end
    check(served + $countones(cam_req) == issued, "every request served once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
