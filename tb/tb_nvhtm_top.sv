// tb_nvhtm_top: end-to-end test of the spatial pooler datapath.
//
// The testbench plays the SSD controller, the flash pages and the DRAM
// overlap table. It builds NCOL random proximal segment pages (column c is
// stored on channel c % N), broadcasts a random input vector and streams
// every page through the read path (inference). It then checks the
// inhibition queue against a reference computed here: the overlap table
// entry of every column, and the INH_DEPTH largest boosted overlaps
// alpha' * beta (alpha' >= A_th), each entry with its own index.
// Learning follows: for every column the channel issues the index to the
// CAM, must get a hit exactly for the SDR columns and a timeout for the
// others, and streams the page through its WBPipe; every written-back word
// (new duty cycles, boost or old boost, every permanence) is compared with
// the update equations evaluated here.
// Mechanisms counted (each must occur): Charb stalled by Inheng
// back-pressure, inhibition queue overflow drops, columns filtered by A_th,
// CAM hits, CAM timeouts, boost updates taken and rejected, weak column
// boosting, permanence saturation and (reduced sizes only) an OVPipe stall
// of the read stream.
module tb_nvhtm_top;
  import nvhtm_pkg::*;
  localparam int  N    = 8;
  localparam int  P    = 8;
  localparam int  D    = 8;
  localparam int  NCOL = 64;
  localparam bit  FULL = 0;
  localparam int  XT_PCT = 50;   // percentage of input bits set
  localparam int  PG   = HDR_WORDS + P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // DUT signals
  cfg_t cfg;
  logic xt_load = 0;
  logic [P-1:0] xt_in;
  logic [N-1:0] rd_page_start, rd_valid, rd_ready, tbl_we;
  cidx_t [N-1:0] rd_page_idx, tbl_idx, cam_cidx;
  word_t [N-1:0] rd_data, tbl_alpha, wb_alpha, wb_din, wb_dout;
  inh_ent_t [D-1:0] sdr;
  logic inh_idle, inh_backp, inh_dropped;
  logic [N-1:0] cam_req, cam_gnt, chhit, chtimeout;
  logic [N-1:0] wb_seg_start, wb_valid, wb_duty_done, wb_boost_upd, wb_active;
  wb_dest_e [N-1:0] wb_dest;
  wb_src_e [N-1:0] wb_src;

  nvhtm_top #(.N_CH(N), .P_LEN(P), .INH_DEPTH(D)) dut (.*);

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // ------------------------------------------------------------ data
  int perm [NCOL][P];
  int h_do [NCOL], h_da [NCOL], h_b [NCOL];
  int ref_alpha [NCOL];   // pre-boost overlap
  int tbl [NCOL];         // overlap table as written by the DUT
  int tbl_seen [NCOL];
  bit in_sdr [NCOL];

  // mechanism counters
  int n_backp = 0, n_drop = 0, n_filt = 0, n_hit = 0, n_to = 0;
  int n_bupd = 0, n_bkeep = 0, n_weak = 0, n_sat = 0, n_stall = 0;

  always @(posedge clk) if (rst_n) begin
    if (inh_backp) n_backp++;
    if (inh_dropped) n_drop++;
    for (int c = 0; c < N; c++) if (tbl_we[c]) begin
      tbl[int'(tbl_idx[c])] = int'(tbl_alpha[c]);
      tbl_seen[int'(tbl_idx[c])]++;
    end
  end

  function automatic int clampi(longint v);
    if (v < 0) return 0;
    if (v > 65535) return 65535;
    return int'(v);
  endfunction

  // ------------------------------------------------------------ per channel controllers
  logic [N-1:0] rd_done, wb_done;
  logic phase_learn = 0;

  for (genvar c = 0; c < N; c++) begin : g_ctl
    logic ps, rv, cr, ss, wv;
    cidx_t pi, ci;
    word_t rdw, wa, wd;
    wb_dest_e dst;
    wb_src_e src;
    assign rd_page_start[c] = ps;  assign rd_page_idx[c] = pi;
    assign rd_valid[c] = rv;       assign rd_data[c] = rdw;
    assign cam_req[c] = cr;        assign cam_cidx[c] = ci;
    assign wb_seg_start[c] = ss;   assign wb_valid[c] = wv;
    assign wb_alpha[c] = wa;       assign wb_din[c] = wd;
    assign wb_dest[c] = dst;       assign wb_src[c] = src;

    initial begin
      ps = 0; rv = 0; cr = 0; ss = 0; wv = 0; pi = '0; ci = '0; rdw = '0;
      wa = '0; wd = '0; dst = DEST_NONE; src = SRC_SEG;
      rd_done[c] = 0; wb_done[c] = 0;
      wait (rst_n && xt_load);
      @(negedge clk);
      // ---------------- inference: read every page of this channel
      for (int col = c; col < NCOL; col += N) begin
        @(negedge clk);
        while (!rd_ready[c]) begin n_stall++; @(negedge clk); end
        ps = 1; pi = cidx_t'(col);
        @(negedge clk); ps = 0;
        for (int b = 0; b < PG; b++) begin
          rv = 1;
          rdw = word_t'((b == 0) ? h_do[col] : (b == 1) ? h_da[col] : (b == 2) ? h_b[col] : perm[col][b-3]);
          @(negedge clk);
        end
        rv = 0;
      end
      rd_done[c] = 1;
      wait (phase_learn);
      // ---------------- learning: rewrite every page of this channel
      for (int col = c; col < NCOL; col += N) begin
        int e_do, e_da, e_b, isweak, t0, e;
        logic e_upd;
        @(negedge clk);
        cr = 1; ci = cidx_t'(col);
        #1;
        while (!cam_gnt[c]) begin @(negedge clk); #1; end
        @(posedge clk); #1 cr = 0;
        t0 = 0;
        while (!(chhit[c] || chtimeout[c])) begin @(negedge clk); #1; t0++; check(t0 < D + 5, $sformatf("CAM answer in time ch%0d col%0d t=%0t", c, col, $time)); if (t0 > D + 6) break; end
        check(chhit[c] == in_sdr[col], $sformatf("col %0d CAM hit %0d exp %0d", col, chhit[c], in_sdr[col]));
        if (chhit[c]) n_hit++; else n_to++;
        @(negedge clk);
        check(wb_active[c] == in_sdr[col], $sformatf("col %0d WBPipe learning flag %0d exp %0d", col, wb_active[c], in_sdr[col]));
        ss = 1; @(negedge clk); ss = 0;
        wa = word_t'(tbl[col]);
        // reference
        e_do = clampi((longint'(h_do[col]) * cfg.y1 >> 16) + (longint'(tbl[col]) * 16 * cfg.y2 >> 16));
        e_da = clampi((longint'(h_da[col]) * cfg.y1 >> 16) + (in_sdr[col] ? cfg.y2 : 0));
        e_b  = clampi(longint'(cfg.y4) + ((longint'($signed(cfg.y3)) * e_da) >>> 12));
        e_upd = e_da < cfg.da_min;
        isweak = h_do[col] < cfg.do_min;
        wv = 1; dst = DEST_DUTY; wd = word_t'(h_do[col]); @(negedge clk);
        wd = word_t'(h_da[col]); @(negedge clk);
        dst = DEST_BOOST; wd = word_t'(h_b[col]); @(negedge clk);
        wv = 0; dst = DEST_NONE;
        while (!wb_duty_done[c]) @(negedge clk);
        src = SRC_DO; #1 check(int'(wb_dout[c]) == e_do, $sformatf("col %0d D_O' %0d exp %0d", col, wb_dout[c], e_do));
        src = SRC_DA; #1 check(int'(wb_dout[c]) == e_da, $sformatf("col %0d D_A' %0d exp %0d", col, wb_dout[c], e_da));
        check(wb_boost_upd[c] == e_upd, "boost update flag");
        src = wb_boost_upd[c] ? SRC_BNEW : SRC_BOLD;
        #1 check(int'(wb_dout[c]) == (e_upd ? e_b : h_b[col]), $sformatf("col %0d boost", col));
        if (e_upd) n_bupd++; else n_bkeep++;
        if (isweak) n_weak++;
        src = SRC_SEG;
        @(negedge clk);
        for (int j = 0; j < P; j++) begin
          int cp;
          cp = perm[col][j];
          wv = 1; dst = DEST_SEG; wd = word_t'(cp);
          if (in_sdr[col] && xt_in[j]) e = cp + ((isweak && cp != 0) ? cfg.y8 : cfg.y6);
          else if (in_sdr[col])        e = cp - cfg.y7 + ((isweak && cp != 0) ? cfg.y5 : 0);
          else                          e = cp + ((isweak && cp != 0) ? cfg.y5 : 0);
          if (e < 0 || e > 65535) n_sat++;
          e = clampi(e);
          @(negedge clk);
          check(int'(wb_dout[c]) == e, $sformatf("col %0d perm %0d: %0d exp %0d", col, j, wb_dout[c], e));
        end
        wv = 0; dst = DEST_NONE;
      end
      wb_done[c] = 1;
    end
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    #(FULL ? 64'd100_000_000 : 64'd5_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ main sequence
  initial begin
    int vals[$], exp[$], npass, cyc0, cyc_inf, cyc_learn;
    cfg = '0;
    cfg.p_th = 16'h8000; cfg.a_th = word_t'(P / 10 > 1 ? P / 10 : 2);
    cfg.y1 = 16'd65470; cfg.y2 = 16'd65; cfg.y3 = word_t'(-960); cfg.y4 = 16'h0400;
    cfg.y5 = 16'h0CCC; cfg.y6 = 16'h0800; cfg.y7 = 16'h0400; cfg.y8 = 16'h0800 + 16'h0CCC;
    cfg.da_min = 16'd3277; cfg.do_min = 16'd200;
    for (int k = 0; k < NCOL; k++) begin
      h_do[k] = $urandom % 600; h_da[k] = $urandom % 8000; h_b[k] = 16'h0100 + $urandom % 16'h0200;
      tbl_seen[k] = 0; tbl[k] = 0;
      for (int j = 0; j < P; j++)
        perm[k][j] = (j % 11 == 0) ? 65535 - $urandom % 1000 : (j % 13 == 0) ? $urandom % 800 : $urandom % 65536;
    end
    for (int j = 0; j < P; j++) xt_in[j] = ($urandom % 100) < XT_PCT;
    // reference overlaps
    npass = 0; vals.delete();
    for (int k = 0; k < NCOL; k++) begin
      ref_alpha[k] = 0;
      for (int j = 0; j < P; j++) if (xt_in[j] && perm[k][j] >= cfg.p_th) ref_alpha[k]++;
      if (ref_alpha[k] >= cfg.a_th) begin
        npass++;
        vals.push_back(int'(sat_word(longint'(ref_alpha[k]) * h_b[k] >> BETA_FRAC)));
      end else n_filt++;
    end
    repeat (4) @(negedge clk); rst_n = 1;
    @(negedge clk); xt_load = 1; @(negedge clk); xt_load = 0;
    cyc0 = $time / 10;
    wait (&rd_done);
    // drain: nothing pending in OVPipes, Charb or Inheng
    @(negedge clk);
    while (|dut.d_req || dut.inh_valid || !inh_idle) @(negedge clk);
    cyc_inf = $time / 10 - cyc0;
    // ---------------- check inference
    for (int k = 0; k < NCOL; k++) begin
      check(tbl_seen[k] == 1, $sformatf("overlap table written once for col %0d", k));
      check(tbl[k] == ((ref_alpha[k] >= cfg.a_th) ? ref_alpha[k] : 0),
            $sformatf("col %0d overlap %0d exp %0d", k, tbl[k], ref_alpha[k]));
    end
    vals.rsort();
    for (int i = 0; i < D; i++) begin
      if (i < vals.size()) begin
        int ix;
        ix = int'(sdr[i].idx);
        check(sdr[i].v && int'(sdr[i].ov) == vals[i], $sformatf("sdr[%0d] ov %0d exp %0d", i, sdr[i].ov, vals[i]));
        check(ix < NCOL && ref_alpha[ix] >= cfg.a_th &&
              int'(sat_word(longint'(ref_alpha[ix]) * h_b[ix] >> BETA_FRAC)) == int'(sdr[i].ov),
              "sdr index matches its overlap");
      end else check(!sdr[i].v, "sdr entry empty");
    end
    for (int k = 0; k < NCOL; k++) in_sdr[k] = 0;
    for (int i = 0; i < D; i++) if (sdr[i].v && int'(sdr[i].idx) < NCOL) in_sdr[int'(sdr[i].idx)] = 1;
    // ---------------- learning
    cyc0 = $time / 10;
    phase_learn = 1;
    wait (&wb_done);
    cyc_learn = $time / 10 - cyc0;
    $display("inference %0d cycles, learning %0d cycles, %0d of %0d columns above A_th",
             cyc_inf, cyc_learn, npass, NCOL);
    // inference time: pages of one channel back to back plus the sort tail
    check(cyc_inf <= ((NCOL + N - 1) / N) * (PG + 2 + N * (D + 2)) + 20 * D, "inference cycle budget");
    $display("mechanisms: backp=%0d drop=%0d filtered=%0d hit=%0d timeout=%0d boost_upd=%0d boost_keep=%0d weak=%0d sat=%0d ovstall=%0d",
             n_backp, n_drop, n_filt, n_hit, n_to, n_bupd, n_bkeep, n_weak, n_sat, n_stall);
    check(n_backp > 0, "Inheng back-pressure occurred");
    check(n_drop > 0, "inhibition queue overflow drop occurred");
    check(n_filt > 0, "A_th filtering occurred");
    check(n_hit > 0, "CAM hit occurred");
    check(n_to > 0, "CAM timeout occurred");
    check(n_bupd > 0, "boost update taken");
    check(n_bkeep > 0, "boost update rejected");
    check(n_weak > 0, "weak column boosting occurred");
    check(n_sat > 0, "permanence saturation occurred");
    if (!FULL) check(n_stall > 0, "OVPipe read stall occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
