// tb_inheng: self-checking test of the inhibition engine.
//
// Rounds of random boosted overlaps (with many ties) are offered with
// random gaps. After each round the queue must hold, in descending order
// and packed from D_0, exactly the DEPTH largest overlaps sent (compared as
// a sorted list of values), each with the index it was sent with. The
// busy time per accepted entry must never be more than
// DEPTH + 1 cycles, and an entry not above the smallest of a full queue
// must be dropped at once. clear must empty the queue.
module tb_inheng;
  import nvhtm_pkg::*;
  localparam int D = 6;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, idle, dropped;
  inh_ent_t in_ent;
  inh_ent_t [D-1:0] q;

  inheng #(.DEPTH(D)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sent_ov[$];
    int ov_of[int];
    int exp[$];
    int busy, ndrop;
    ndrop = 0;
    in_ent = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int n;
      n = 1 + $urandom % (3 * D);
      sent_ov.delete(); ov_of.delete();
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      check(q == '0, "queue empty after clear");
      for (int k = 0; k < n; k++) begin
        logic full_before;
        int min_before;
        in_ent.v = 1; in_ent.ov = word_t'($urandom % ((r % 2) ? 8 : 1000));
        in_ent.idx = cidx_t'(r * 100 + k);
        full_before = q[D-1].v; min_before = q[D-1].ov;
        in_valid = 1;
        #1;
        check(in_ready, "ready when idle");
        if (full_before && int'(in_ent.ov) <= min_before)
          check(dropped, "drop when not above the smallest of a full queue");
        else check(!dropped, "no drop otherwise");
        if (dropped) ndrop++;
        sent_ov.push_back(int'(in_ent.ov));
        ov_of[int'(in_ent.idx)] = int'(in_ent.ov);
        @(negedge clk);
        in_valid = 0;
        busy = 0;
        while (!in_ready) begin busy++; @(negedge clk); end
        check(busy <= D + 1, $sformatf("busy %0d cycles", busy));
        repeat ($urandom % 3) @(negedge clk);
      end
      // reference: the D largest values sent
      sent_ov.rsort();
      exp.delete();
      for (int k = 0; k < D && k < sent_ov.size(); k++) exp.push_back(sent_ov[k]);
      for (int i = 0; i < D; i++) begin
        if (i < exp.size()) begin
          check(q[i].v, $sformatf("entry %0d valid", i));
          check(int'(q[i].ov) == exp[i], $sformatf("entry %0d ov %0d exp %0d", i, q[i].ov, exp[i]));
          check(ov_of.exists(int'(q[i].idx)) && ov_of[int'(q[i].idx)] == int'(q[i].ov),
                "index travels with its overlap");
        end else check(!q[i].v, $sformatf("entry %0d empty", i));
      end
    end
    check(ndrop > 0, "drops happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
