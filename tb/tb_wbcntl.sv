// tb_wbcntl: self-checking test of the learning control subsystem.
//
// A fixed inhibition queue of DEPTH entries (one invalid) is applied. Four
// channels repeatedly issue column indexes, one at a time each, and wait
// for their hit or timeout. The answer must be a hit exactly when the index
// is held by a valid queue entry, and it must come 2 + k cycles after the
// grant for entry k, or 2 + DEPTH cycles after the grant for a timeout.
module tb_wbcntl;
  import nvhtm_pkg::*;
  localparam int N = 4, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] cam_req, cam_gnt, chhit, chtimeout;
  cidx_t [N-1:0] cam_cidx;
  inh_ent_t [D-1:0] inh_q;

  wbcntl #(.N_CH(N), .DEPTH(D)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int exp_lat [N];
  logic exp_hit [N];
  int gnt_cyc [N];
  logic waiting [N];
  int cyc = 0, done = 0, nhit = 0, nmiss = 0;

  initial begin
    for (int i = 0; i < D; i++) begin inh_q[i].v = (i != 2); inh_q[i].idx = cidx_t'(10 + i); inh_q[i].ov = '0; end
    cam_req = '0; cam_cidx = '0;
    for (int c = 0; c < N; c++) waiting[c] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (done < 400) begin
      for (int c = 0; c < N; c++)
        if (!cam_req[c] && !waiting[c] && ($urandom % 2)) begin
          int k;
          cam_req[c] = 1; cam_cidx[c] = cidx_t'(8 + $urandom % 8);
          k = D;
          for (int i = D - 1; i >= 0; i--) if (inh_q[i].v && inh_q[i].idx == cam_cidx[c]) k = i;
          exp_hit[c] = (k < D); exp_lat[c] = 2 + k;
        end
      #1;
      for (int c = 0; c < N; c++) begin
        if (waiting[c]) begin
          if (chhit[c] || chtimeout[c]) begin
            check(chhit[c] == exp_hit[c] && chtimeout[c] == !exp_hit[c], $sformatf("ch %0d hit/miss", c));
            check(cyc - gnt_cyc[c] == exp_lat[c], $sformatf("ch %0d latency %0d exp %0d", c, cyc - gnt_cyc[c], exp_lat[c]));
            if (chhit[c]) nhit++; else nmiss++;
            waiting[c] = 0; done++;
          end else check(cyc - gnt_cyc[c] < exp_lat[c], "answer not late");
        end else check(!chhit[c] && !chtimeout[c], "no answer without request");
        if (cam_gnt[c]) begin waiting[c] = 1; gnt_cyc[c] = cyc; end
      end
      @(negedge clk); cyc++;
      for (int c = 0; c < N; c++) if (waiting[c] && gnt_cyc[c] == cyc - 1) cam_req[c] = 0;
    end
    check(nhit > 0 && nmiss > 0, "hits and misses exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
