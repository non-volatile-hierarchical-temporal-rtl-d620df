// nvhtm_top: the NVHTM spatial pooler datapath of a flash SSD.
//
// N_CH flash channels each carry an overlap pipeline (OVPipe) in the read
// path and a write-back pipeline (WBPipe) in the write path. One proximal
// segment (one HTM column) is one flash page. Inference: the host's input
// vector X_t is loaded (xt_load), which also clears the overlap pipes, the
// channel arbiter and the inhibition queue; the SSD controller then reads
// every column's page, the OVPipes count active-connected synapses, Charb
// boosts and serialises the overlaps into Inheng, and after the last column
// the valid entries of the inhibition queue (sdr) are the active columns.
// Learning: the controller re-reads each page, issues its column index to
// WBCntl (cam_req), receives a hit (active column) or a timeout on
// chhit / chtimeout, which also sets the channel's WBPipe learning flag,
// and streams the page through WBPipe back to flash.
//
// The SSD controller, the DRAM segment cache / overlap table, the packet
// formatter and the flash channel interfaces are not part of this datapath:
// their signals are ports. All ports are per channel arrays where the design
// repeats a unit per channel. The wiring follows the design's
// microarchitecture drawing; the X_t register placement (one register shared
// by all channels) is this implementation's choice.
module nvhtm_top
  import nvhtm_pkg::*;
#(
  parameter int N_CH      = 8,     // flash channels
  parameter int P_LEN     = 784,   // input bits = synapses per segment
  parameter int INH_DEPTH = 16     // inhibition queue depth (active columns)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_t                      cfg,
  // host input vector
  input  logic                      xt_load,
  input  logic [P_LEN-1:0]          xt_in,
  // flash read path, per channel
  input  logic     [N_CH-1:0]       rd_page_start,
  input  cidx_t    [N_CH-1:0]       rd_page_idx,
  input  logic     [N_CH-1:0]       rd_valid,
  input  word_t    [N_CH-1:0]       rd_data,
  output logic     [N_CH-1:0]       rd_ready,
  // overlap table write (to DRAM), per channel
  output logic     [N_CH-1:0]       tbl_we,
  output cidx_t    [N_CH-1:0]       tbl_idx,
  output word_t    [N_CH-1:0]       tbl_alpha,
  // inhibition result (to the packet formatter)
  output inh_ent_t [INH_DEPTH-1:0]  sdr,
  output logic                      inh_idle,
  output logic                      inh_backp,     // Inheng stalls Charb
  output logic                      inh_dropped,
  // learning: CAM requests and results, per channel
  input  logic     [N_CH-1:0]       cam_req,
  input  cidx_t    [N_CH-1:0]       cam_cidx,
  output logic     [N_CH-1:0]       cam_gnt,
  output logic     [N_CH-1:0]       chhit,
  output logic     [N_CH-1:0]       chtimeout,
  // write-back path, per channel
  input  logic     [N_CH-1:0]       wb_seg_start,
  input  word_t    [N_CH-1:0]       wb_alpha,
  input  logic     [N_CH-1:0]       wb_valid,
  input  word_t    [N_CH-1:0]       wb_din,
  input  wb_dest_e [N_CH-1:0]       wb_dest,
  input  wb_src_e  [N_CH-1:0]       wb_src,
  output word_t    [N_CH-1:0]       wb_dout,
  output logic     [N_CH-1:0]       wb_duty_done,
  output logic     [N_CH-1:0]       wb_boost_upd,
  output logic     [N_CH-1:0]       wb_active
);
  logic [P_LEN-1:0]     xt_q;
  logic    [N_CH-1:0]   d_req, d_gnt;
  ov_rec_t [N_CH-1:0]   d_ch;
  logic                 inh_valid, inh_ready;
  inh_ent_t             inh_ent;
  inh_ent_t [INH_DEPTH-1:0] inh_q;

  always_ff @(posedge clk) begin
    if (!rst_n)       xt_q <= '0;
    else if (xt_load) xt_q <= xt_in;
  end

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    ovpipe #(.P_LEN(P_LEN)) u_ovpipe (
      .clk(clk), .rst_n(rst_n), .clear(xt_load),
      .p_th(cfg.p_th), .a_th(cfg.a_th), .xt(xt_q),
      .page_start(rd_page_start[c]), .page_idx(rd_page_idx[c]),
      .rd_valid(rd_valid[c]), .rd_data(rd_data[c]), .in_ready(rd_ready[c]),
      .tbl_we(tbl_we[c]), .tbl_idx(tbl_idx[c]), .tbl_alpha(tbl_alpha[c]),
      .d_req(d_req[c]), .d_ch(d_ch[c]), .d_gnt(d_gnt[c])
    );
    wbpipe #(.P_LEN(P_LEN)) u_wbpipe (
      .clk(clk), .rst_n(rst_n), .cfg(cfg), .xt(xt_q),
      .seg_start(wb_seg_start[c]), .cam_hit(chhit[c]), .cam_miss(chtimeout[c]),
      .alpha_in(wb_alpha[c]), .din_valid(wb_valid[c]), .din(wb_din[c]),
      .d_dest(wb_dest[c]), .d_src(wb_src[c]), .dout(wb_dout[c]),
      .duty_done(wb_duty_done[c]), .boost_upd(wb_boost_upd[c]),
      .active(wb_active[c])
    );
  end

  charb #(.N_CH(N_CH)) u_charb (
    .clk(clk), .rst_n(rst_n), .clear(xt_load),
    .d_req(d_req), .d_ch(d_ch), .d_gnt(d_gnt),
    .inh_valid(inh_valid), .inh_ent(inh_ent), .inh_ready(inh_ready)
  );

  inheng #(.DEPTH(INH_DEPTH)) u_inheng (
    .clk(clk), .rst_n(rst_n), .clear(xt_load),
    .in_valid(inh_valid), .in_ent(inh_ent), .in_ready(inh_ready),
    .q(inh_q), .idle(inh_idle), .dropped(inh_dropped)
  );

  wbcntl #(.N_CH(N_CH), .DEPTH(INH_DEPTH)) u_wbcntl (
    .clk(clk), .rst_n(rst_n), .cam_req(cam_req), .cam_cidx(cam_cidx),
    .cam_gnt(cam_gnt), .inh_q(inh_q), .chhit(chhit), .chtimeout(chtimeout)
  );

  assign sdr       = inh_q;
  assign inh_backp = inh_valid && !inh_ready;
endmodule
