// tb_charb: self-checking test of the channel arbiter.
//
// Four channels each offer a series of overlap records with random alpha
// and beta; the downstream ready is random (back-pressure). Checks that the
// grant is one-hot and only given to a requester, that every record
// reaches the inhibition side exactly once with alpha*beta/256 (saturated)
// as its boosted overlap, that a held entry does not change while ready is
// low, that a grant into an empty stage shows up valid one cycle later, and
// that every channel is served in turn (no channel waits for more than
// N_CH grants).
module tb_charb;
  import nvhtm_pkg::*;
  localparam int N = 4, PER = 40;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] d_req, d_gnt;
  ov_rec_t [N-1:0] d_ch;
  logic inh_valid, inh_ready;
  inh_ent_t inh_ent;

  charb #(.N_CH(N)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  word_t exp_ov [int];
  int    seen   [int];
  int    sent [N];
  int    wait_cnt [N];
  int    got = 0;
  inh_ent_t held;
  logic held_v = 0;
  logic gnt_prev_free = 0;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic ov_rec_t mk(int ch, int k);
    ov_rec_t r;
    logic [2*C_W-1:0] p;
    r.alpha = word_t'($urandom % 800);
    r.beta  = ($urandom % 4 == 0) ? word_t'($urandom) : word_t'(32'h0100 + $urandom % 32'h0300);
    r.idx   = cidx_t'(ch * 1000 + k);
    return r;
  endfunction

  initial begin
    for (int c = 0; c < N; c++) begin sent[c] = 0; wait_cnt[c] = 0; end
    d_req = '0; d_ch = '0; inh_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < N; c++) begin
      d_ch[c] = mk(c, 0); d_req[c] = 1;
      exp_ov[int'(d_ch[c].idx)] = sat_word((d_ch[c].alpha * d_ch[c].beta) >> BETA_FRAC);
    end
    while (got < N * PER) begin
      inh_ready = ($urandom % 3) != 0;
      #1;
      // checks at the sampling edge
      check($onehot0(d_gnt) && ((d_gnt & ~d_req) == '0), "grant one-hot to a requester");
      if (held_v && inh_valid) check(inh_ent == held, "entry stable under back-pressure");
      if (gnt_prev_free) check(inh_valid, "granted record valid next cycle");
      gnt_prev_free = (|d_gnt) && (!inh_valid || inh_ready);
      if (inh_valid && inh_ready) begin
        check(exp_ov.exists(int'(inh_ent.idx)), "known index");
        if (exp_ov.exists(int'(inh_ent.idx)))
          check(inh_ent.ov == exp_ov[int'(inh_ent.idx)],
                $sformatf("boosted overlap %0d exp %0d", inh_ent.ov, exp_ov[int'(inh_ent.idx)]));
        check(!seen.exists(int'(inh_ent.idx)), "record delivered once");
        seen[int'(inh_ent.idx)] = 1;
        got++;
      end
      held_v = inh_valid && !inh_ready;
      held   = inh_ent;
      @(posedge clk);
      for (int c = 0; c < N; c++) begin
        if (d_req[c] && !d_gnt[c]) wait_cnt[c]++;
        if (d_gnt[c]) begin
          check(wait_cnt[c] <= 2 * N + 8, "fair service");
          wait_cnt[c] = 0;
        end
      end
      @(negedge clk);
    end
    check(seen.size() == N * PER, "all records delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // request side: replace a granted record with the next one
  always @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (rst_n && d_gnt[c]) begin
        sent[c]++;
        if (sent[c] < PER) begin
          d_ch[c] <= mk(c, sent[c]);
        end else d_req[c] <= 1'b0;
      end
    end
  end
  // record expected values when a record is presented
  always @(d_ch) begin
    for (int c = 0; c < N; c++)
      exp_ov[int'(d_ch[c].idx)] = sat_word((d_ch[c].alpha * d_ch[c].beta) >> BETA_FRAC);
  end
endmodule
