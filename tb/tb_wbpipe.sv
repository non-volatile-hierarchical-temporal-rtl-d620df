// tb_wbpipe: self-checking test of the write-back pipeline.
//
// Pages with random header words and permanences go through the unit with
// the learning flag set by a CAM hit or cleared by a CAM timeout. The new
// overlap and active duty cycles, the new boost factor, the boost-update
// flag, the old boost register and every updated permanence are compared
// with the update equations evaluated here in plain integer arithmetic
// (same number formats). duty_done must rise exactly 5 cycles after the
// overlap duty word and a permanence result must appear one cycle after
// its input. Saturation at 0 and at full scale is forced by some pages.
module tb_wbpipe;
  import nvhtm_pkg::*;
  localparam int P = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic [P-1:0] xt;
  logic seg_start = 0, cam_hit = 0, cam_miss = 0, din_valid = 0;
  word_t alpha_in, din, dout;
  wb_dest_e d_dest;
  wb_src_e d_src;
  logic duty_done, boost_upd, active;

  wbpipe #(.P_LEN(P)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int clampi(longint v);
    if (v < 0) return 0;
    if (v > 65535) return 65535;
    return int'(v);
  endfunction

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n_weak = 0, n_boost = 0, n_keep = 0, n_sat = 0, n_act = 0;
    cfg = '0;
    cfg.p_th = 16'h8000; cfg.y1 = 16'd65470; cfg.y2 = 16'd65;
    cfg.y3 = word_t'(-960); cfg.y4 = 16'h0400;
    cfg.y5 = 16'h0CCC; cfg.y6 = 16'h0800; cfg.y7 = 16'h0400;
    cfg.y8 = 16'h0800 + 16'h0CCC; cfg.da_min = 16'd3277; cfg.do_min = 16'd200;
    d_dest = DEST_NONE; d_src = SRC_SEG; din = '0; alpha_in = '0; xt = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int pg = 0; pg < 60; pg++) begin
      int dO, dA, b, act, e_do, e_da, e_b, is_weak, t0;
      logic e_upd;
      xt = P'($urandom);
      dO = (pg % 3 == 0) ? $urandom % 400 : $urandom % 4000;
      dA = (pg % 2 == 0) ? $urandom % 6000 : $urandom % 65536;
      b  = 16'h0100 + $urandom % 16'h0200;
      act = $urandom % 2;
      alpha_in = word_t'($urandom % 300);
      // reference
      e_do = clampi((longint'(dO) * cfg.y1 >> 16) + (longint'(alpha_in) * 16 * cfg.y2 >> 16));
      e_da = clampi((longint'(dA) * cfg.y1 >> 16) + (act ? cfg.y2 : 0));
      e_b  = clampi(longint'(cfg.y4) + ((longint'($signed(cfg.y3)) * e_da) >>> 12));
      e_upd = e_da < cfg.da_min;
      is_weak = dO < cfg.do_min;
      @(negedge clk); seg_start = 1;
      @(negedge clk); seg_start = 0;
      if (act) cam_hit = 1; else cam_miss = 1;
      @(negedge clk); cam_hit = 0; cam_miss = 0;
      check(active == act, "learning flag from CAM hit / timeout");
      din_valid = 1; d_dest = DEST_DUTY; din = word_t'(dO);
      @(negedge clk); t0 = 0; din = word_t'(dA);
      @(negedge clk); t0++; d_dest = DEST_BOOST; din = word_t'(b);
      @(negedge clk); t0++; din_valid = 0; d_dest = DEST_NONE;
      while (!duty_done) begin @(negedge clk); t0++; end
      check(t0 == 4, $sformatf("duty_done %0d cycles after D_O (exp 5)", t0 + 1));
      d_src = SRC_DO;   #1 check(int'(dout) == e_do, $sformatf("D_O' %0d exp %0d", dout, e_do));
      d_src = SRC_DA;   #1 check(int'(dout) == e_da, $sformatf("D_A' %0d exp %0d", dout, e_da));
      d_src = SRC_BNEW; #1 check(int'(dout) == e_b,  $sformatf("beta' %0d exp %0d", dout, e_b));
      d_src = SRC_BOLD; #1 check(int'(dout) == b,    "old boost register");
      check(boost_upd == e_upd, "boost update flag");
      if (e_upd) n_boost++; else n_keep++;
      if (is_weak) n_weak++;
      if (act) n_act++;
      d_src = SRC_SEG;
      @(negedge clk);
      for (int j = 0; j < P; j++) begin
        int c, e;
        c = (j % 7 == 0) ? 0 : (j % 7 == 1) ? 65535 - $urandom % 1500 : (j % 7 == 2) ? $urandom % 1500 : $urandom % 65536;
        din_valid = 1; d_dest = DEST_SEG; din = word_t'(c);
        e = c;
        if (act && xt[j])       e = c + ((is_weak && c != 0) ? cfg.y8 : cfg.y6);
        else if (act)           e = c - cfg.y7 + ((is_weak && c != 0) ? cfg.y5 : 0);
        else                    e = c + ((is_weak && c != 0) ? cfg.y5 : 0);
        if (e < 0 || e > 65535) n_sat++;
        e = clampi(e);
        @(negedge clk);
        check(int'(dout) == e, $sformatf("perm %0d: %0d exp %0d (act %0d x %0d weak %0d)", j, dout, e, act, xt[j], is_weak));
      end
      din_valid = 0; d_dest = DEST_NONE;
    end
    check(n_weak > 0 && n_boost > 0 && n_keep > 0 && n_sat > 0 && n_act > 0, "all update cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
