// s2_engine: top level of the sparse systolic CNN engine.
//
// Data path (left to right, top to bottom):
//   FB[r] --> CE[r] --> PE row r  (compressed features, moving right)
//   WB[c] ------------> PE col c  (compressed weights, moving down)
//   PE col c --> res[2c], res[2c+1]  (results of even / odd rows)
// Every PE selects the aligned non-zero weight-feature pairs out of the two
// compressed flows passing through it, so zero features and zero weights
// cost no multiplication and only a fraction of a cycle of selection. The
// collective elements let adjacent rows share the overlapping input rows of
// their windows, so each input group is read from the FBs only once. The
// MACs run at 1/FREQ_RATIO of the clock through a clock enable.
//
// Operating sequence:
//   1. load the compressed flows into the buffers through the fb_wr_* and
//      wb_wr_* ports (the off-chip memory side);
//   2. set cfg_k (kernel height), cfg_reuse, fb_len, wb_len and wb_rep and
//      pulse start: every FB streams its fb_len entries once, every WB
//      streams its wb_len entries wb_rep times (once per output position);
//   3. collect results on res_*: per column, chain p delivers the results of
//      rows p, p+2, ... of one output position, then of the next.
// busy is high while any buffer is still streaming.
//
// Defaults follow the published main configuration: 32 x 32 PEs, PE FIFO
// depths (4,4,4), DS:MAC ratio 4:1, 1 MB of buffer SRAM split evenly over
// the 64 buffers. Buffer control, load ports and the event outputs are this
// design's choices. Event outputs report, per clock, which units did what
// (selection decisions, aligned pairs, MAC operations, selections waiting
// for the MAC, pushes waiting for a neighbour, RF stalls,
// FB reads, reused elements).
module s2_engine
  import s2_pkg::*;
#(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned F_DEP      = 4,
  parameter int unsigned W_DEP      = 4,
  parameter int unsigned WF_DEP     = 4,
  parameter int unsigned CE_DEP     = 2 * s2_pkg::GROUP_LEN,
  parameter int unsigned FREQ_RATIO = 4,
  parameter int unsigned FB_DEPTH   = 8192,
  parameter int unsigned WB_DEPTH   = 8192,
  parameter int unsigned FB_AW      = $clog2(FB_DEPTH),
  parameter int unsigned WB_AW      = $clog2(WB_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // buffer load ports (off-chip memory side)
  input  logic [ROWS-1:0]       fb_wr_en,
  input  logic [FB_AW-1:0]      fb_wr_addr,
  input  feat_t                 fb_wr_data,
  input  logic [COLS-1:0]       wb_wr_en,
  input  logic [WB_AW-1:0]      wb_wr_addr,
  input  wgt_t                  wb_wr_data,
  // configuration and control
  input  logic [3:0]            cfg_k,
  input  logic                  cfg_reuse,
  input  logic [FB_AW:0]        fb_len [ROWS],
  input  logic [WB_AW:0]        wb_len [COLS],
  input  logic [15:0]           wb_rep,
  input  logic                  start,
  output logic                  busy,
  // results
  output logic [2*COLS-1:0]     res_valid,
  input  logic [2*COLS-1:0]     res_ready,
  output logic [ACC_W-1:0]      res_data [2*COLS],
  // activity
  output logic [ROWS*COLS-1:0]  ev_sel,
  output logic [ROWS*COLS-1:0]  ev_pair,
  output logic [ROWS*COLS-1:0]  ev_mac,
  output logic [ROWS*COLS-1:0]  ev_wf_full,
  output logic [ROWS*COLS-1:0]  ev_push_block,
  output logic [ROWS*COLS-1:0]  ev_rf_stall,
  output logic [ROWS-1:0]       ev_fb_read,
  output logic [ROWS-1:0]       ev_reuse,
  output logic [COLS-1:0]       ev_wb_read
);

  logic mac_en;

  s2_clk_div #(.FREQ_RATIO(FREQ_RATIO)) u_div (.clk, .rst_n, .mac_en);

  // ---------------- feature buffers ----------------
  logic  [ROWS-1:0] fbo_valid, fbo_ready, fb_busy;
  feat_t            fbo_data [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_fb
    logic [FEAT_W-1:0] q;
    s2_buffer #(.WIDTH(FEAT_W), .DEPTH(FB_DEPTH), .AW(FB_AW)) u_fb (
      .clk, .rst_n,
      .wr_en(fb_wr_en[r]), .wr_addr(fb_wr_addr), .wr_data(fb_wr_data),
      .start, .len(fb_len[r]), .rep(16'd1), .busy(fb_busy[r]),
      .out_valid(fbo_valid[r]), .out_ready(fbo_ready[r]), .out_data(q),
      .ev_read()      // FB reads are counted at the CEs (ev_fb_read)
    );
    assign fbo_data[r] = feat_t'(q);
  end

  // ---------------- weight buffers ----------------
  logic [COLS-1:0] wbo_valid, wbo_ready, wb_busy;
  wgt_t            wbo_data [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_wb
    logic [WGT_W-1:0] q;
    s2_buffer #(.WIDTH(WGT_W), .DEPTH(WB_DEPTH), .AW(WB_AW)) u_wb (
      .clk, .rst_n,
      .wr_en(wb_wr_en[c]), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
      .start, .len(wb_len[c]), .rep(wb_rep), .busy(wb_busy[c]),
      .out_valid(wbo_valid[c]), .out_ready(wbo_ready[c]), .out_data(q),
      .ev_read(ev_wb_read[c])
    );
    assign wbo_data[c] = wgt_t'(q);
  end

  assign busy = |{fb_busy, wb_busy};

  // ---------------- CE array ----------------
  logic  [ROWS-1:0] cef_valid, cef_ready;
  feat_t            cef_data [ROWS];

  s2_ce_array #(.ROWS(ROWS), .CE_DEP(CE_DEP)) u_ce_array (
    .clk, .rst_n, .cfg_k, .cfg_reuse,
    .fb_valid(fbo_valid), .fb_ready(fbo_ready), .fb_data(fbo_data),
    .pe_valid(cef_valid), .pe_ready(cef_ready), .pe_data(cef_data),
    .ev_fb_read, .ev_reuse
  );

  // ---------------- PE array ----------------
  s2_pe_array #(.ROWS(ROWS), .COLS(COLS), .F_DEP(F_DEP), .W_DEP(W_DEP), .WF_DEP(WF_DEP)) u_pe_array (
    .clk, .rst_n, .mac_en,
    .f_valid(cef_valid), .f_ready(cef_ready), .f_data(cef_data),
    .w_valid(wbo_valid), .w_ready(wbo_ready), .w_data(wbo_data),
    .res_valid, .res_ready, .res_data,
    .ev_sel, .ev_pair, .ev_mac, .ev_wf_full, .ev_push_block, .ev_rf_stall
  );

endmodule
