// tb_wbcam: self-checking test of the write-back CAM chain.
//
// The inhibition queue keys are random distinct indexes, some entries
// invalid. A random stream of items (valid, index, channel id) enters the
// chain, one per cycle; about half of the indexes are taken from the keys.
// For every item the test predicts, independently of the chain, where it
// must appear: a qualified hit at tap k in cycle t+1+k (k = first valid key
// equal to its index) or a timeout at tap DEPTH in cycle t+1+DEPTH, always
// with the item's channel id, and no tap may fire unexpectedly. The keys
// change between phases, with the pipe drained.
module tb_wbcam;
  import nvhtm_pkg::*;
  localparam int D = 5, L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dv; cidx_t cidx; logic [L-1:0] chid;
  inh_ent_t [D-1:0] inh_q;
  logic [D:0] cv; logic [D:0][L-1:0] cam_chid;

  wbcam #(.DEPTH(D), .L(L)) dut (.*);

  // expected tap activity, indexed by absolute cycle
  logic [D:0]        exp_cv  [int];
  logic [D:0][L-1:0] exp_id  [int];

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc = 0, nhit = 0, nto = 0;
    dv = 0; cidx = '0; chid = '0; inh_q = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int ph = 0; ph < 10; ph++) begin
      for (int i = 0; i < D; i++) begin
        inh_q[i].v = ($urandom % 4) != 0;
        inh_q[i].idx = cidx_t'(ph * 64 + i * 7 + 1);
        inh_q[i].ov = '0;
      end
      for (int t = 0; t < 200 + D + 2; t++) begin
        // compare this cycle's taps with the prediction
        #1;
        for (int k = 0; k <= D; k++) begin
          logic e; e = exp_cv.exists(cyc) ? exp_cv[cyc][k] : 1'b0;
          check(cv[k] == e, $sformatf("tap %0d at cycle %0d", k, cyc));
          if (e && cv[k]) check(cam_chid[k] == exp_id[cyc][k], "channel id at tap");
        end
        // drive the next item
        dv = (t < 200) && ($urandom % 2);
        chid = L'($urandom);
        cidx = ($urandom % 2) ? inh_q[$urandom % D].idx : cidx_t'($urandom % 512 + 1000);
        if (dv) begin
          int k; k = D;
          for (int i = D - 1; i >= 0; i--) if (inh_q[i].v && inh_q[i].idx == cidx) k = i;
          if (!exp_cv.exists(cyc + 1 + k)) begin exp_cv[cyc + 1 + k] = '0; exp_id[cyc + 1 + k] = '0; end
          exp_cv[cyc + 1 + k][k] = 1'b1;
          exp_id[cyc + 1 + k][k] = chid;
          if (k < D) nhit++; else nto++;
        end
        @(negedge clk); cyc++;
      end
    end
    check(nhit > 0 && nto > 0, "both hits and timeouts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
