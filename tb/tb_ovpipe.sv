// tb_ovpipe: self-checking test of the overlap pipeline.
//
// Streams pages of random permanences against a random input vector and
// compares the overlap (count of permanence >= P_th with input bit set),
// the overlap table write, the A_th filter, the request record and the
// one-cycle table-write latency with values computed here. Also holds the
// grant back so that a second page finishes while the first still waits
// (in_ready must drop, and both records must come out in order).
module tb_ovpipe;
  import nvhtm_pkg::*;
  localparam int P = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, page_start = 0, rd_valid = 0, d_gnt = 0;
  word_t p_th, a_th, rd_data;
  logic [P-1:0] xt;
  cidx_t page_idx;
  logic in_ready, tbl_we, d_req;
  cidx_t tbl_idx; word_t tbl_alpha; ov_rec_t d_ch;

  ovpipe #(.P_LEN(P)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // stream one page; returns expected overlap
  task automatic send_page(input cidx_t idx, input word_t beta, output int exp_ov);
    word_t perm;
    int last_cycle;
    exp_ov = 0;
    @(negedge clk); page_start = 1; page_idx = idx;
    @(negedge clk); page_start = 0;
    for (int b = 0; b < HDR_WORDS + P; b++) begin
      rd_valid = 1;
      if (b < HDR_WORDS) rd_data = (b == 2) ? beta : word_t'($urandom);
      else begin
        perm = word_t'($urandom);
        rd_data = perm;
        if (perm >= p_th && xt[b-HDR_WORDS]) exp_ov++;
      end
      @(negedge clk);
      if (($urandom % 5) == 0 && b != HDR_WORDS + P - 1) begin
        rd_valid = 0; @(negedge clk);   // gap in the beats
      end
    end
    rd_valid = 0;
    // tbl_we must be high now, one cycle after the last beat
    check(tbl_we === 1'b1, "tbl_we one cycle after last beat");
    check(tbl_idx == idx, "tbl_idx");
    check(tbl_alpha == ((exp_ov >= a_th) ? word_t'(exp_ov) : '0),
          $sformatf("tbl_alpha %0d exp %0d", tbl_alpha, exp_ov));
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ov, ov2, nreq;
    word_t beta;
    p_th = 16'h8000; a_th = 5; xt = '0; rd_data = '0; page_idx = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      xt = P'({$urandom, $urandom});
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      beta = word_t'($urandom);
      send_page(cidx_t'(t), beta, ov);
      @(negedge clk);
      if (ov >= a_th) begin
        check(d_req == 1'b1, "request for overlap >= A_th");
        check(d_ch.alpha == word_t'(ov) && d_ch.beta == beta && d_ch.idx == cidx_t'(t), "request record");
        // grant after a random delay
        repeat ($urandom % 4) begin check(d_req == 1'b1, "request held"); @(negedge clk); end
        d_gnt = 1; @(negedge clk); d_gnt = 0;
        check(d_req == 1'b0, "request dropped after grant");
      end else begin
        check(d_req == 1'b0, "no request below A_th");
      end
    end
    // two pages with the grant held back
    xt = '1; a_th = 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    send_page(cidx_t'(100), 16'h0100, ov);
    @(negedge clk);
    check(in_ready == 1'b1, "in_ready after first page");
    send_page(cidx_t'(101), 16'h0200, ov2);
    repeat (3) @(negedge clk);
    check(in_ready == 1'b0, "in_ready low while output register occupied");
    check(d_req && d_ch.idx == cidx_t'(100) && d_ch.alpha == word_t'(ov), "first record waiting");
    d_gnt = 1; @(negedge clk); d_gnt = 0;
    @(negedge clk);
    check(d_req && d_ch.idx == cidx_t'(101) && d_ch.alpha == word_t'(ov2), "second record follows");
    check(in_ready == 1'b1, "in_ready back");
    d_gnt = 1; @(negedge clk); d_gnt = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
