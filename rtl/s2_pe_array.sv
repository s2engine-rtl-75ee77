// s2_pe_array: ROWS x COLS output-stationary systolic array of PEs.
//
// PE(r,c) computes the convolutions of the feature windows fed to row r
// with the kernels fed to column c. Compressed feature flows enter at the
// left of each row and move right from PE to PE; compressed weight flows
// enter at the top of each column and move down. Flows leaving the last PE
// of a row or column are dropped.
//
// Results leave downwards on two chains per column: one links the even rows
// (0, 2, 4, ...), the other the odd rows (1, 3, 5, ...), each PE forwarding
// the results of the PEs above it in its chain before its own. Halving the
// chain length halves the time a finished result spends travelling out. The
// chain of parity p in column c leaves at res_*[2*c+p]; within one round it
// delivers rows p, p+2, p+4, ... in that order.
//
// Per-PE activity flags are brought out flattened (index r*COLS+c) for
// statistics. ROWS must be at least 2.
//
// The array topology and the two interleaved result chains per column
// follow the published architecture drawing; the dropped edge flows are
// this design's choice.
module s2_pe_array
  import s2_pkg::*;
#(
  parameter int unsigned ROWS   = 32,
  parameter int unsigned COLS   = 32,
  parameter int unsigned F_DEP  = 4,
  parameter int unsigned W_DEP  = 4,
  parameter int unsigned WF_DEP = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   mac_en,
  input  logic  [ROWS-1:0]       f_valid,
  output logic  [ROWS-1:0]       f_ready,
  input  feat_t                  f_data   [ROWS],
  input  logic  [COLS-1:0]       w_valid,
  output logic  [COLS-1:0]       w_ready,
  input  wgt_t                   w_data   [COLS],
  output logic  [2*COLS-1:0]     res_valid,
  input  logic  [2*COLS-1:0]     res_ready,
  output logic  [ACC_W-1:0]      res_data [2*COLS],
  output logic  [ROWS*COLS-1:0]  ev_sel,
  output logic  [ROWS*COLS-1:0]  ev_pair,
  output logic  [ROWS*COLS-1:0]  ev_mac,
  output logic  [ROWS*COLS-1:0]  ev_wf_full,
  output logic  [ROWS*COLS-1:0]  ev_push_block,
  output logic  [ROWS*COLS-1:0]  ev_rf_stall
);

  localparam int unsigned POS_W = (ROWS > 3) ? $clog2((ROWS + 1) / 2) : 1;

  // feature links: fv[r][c] enters PE(r,c); column COLS leaves the array
  logic  fv [ROWS][COLS+1];
  logic  fr [ROWS][COLS+1];
  feat_t fd [ROWS][COLS+1];
  // weight links: wv[r][c] enters PE(r,c); row ROWS leaves the array
  logic  wv [ROWS+1][COLS];
  logic  wr [ROWS+1][COLS];
  wgt_t  wd [ROWS+1][COLS];
  // result links: r*_dn of PE(r,c)
  logic             rv [ROWS][COLS];
  logic             rr [ROWS][COLS];
  logic [ACC_W-1:0] rd [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row_edge
    assign fv[r][0]    = f_valid[r];
    assign fd[r][0]    = f_data[r];
    assign f_ready[r]  = fr[r][0];
    assign fr[r][COLS] = 1'b1;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col_edge
    assign wv[0][c]    = w_valid[c];
    assign wd[0][c]    = w_data[c];
    assign w_ready[c]  = wr[0][c];
    assign wr[ROWS][c] = 1'b1;
    for (genvar p = 0; p < 2; p++) begin : g_out
      assign res_valid[2*c+p]      = rv[ROWS-2+p][c];
      assign res_data[2*c+p]       = rd[ROWS-2+p][c];
      assign rr[ROWS-2+p][c]       = res_ready[2*c+p];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      logic             up_v, up_r;
      logic [ACC_W-1:0] up_d;

      if (r >= 2) begin : g_up
        assign up_v         = rv[r-2][c];
        assign up_d         = rd[r-2][c];
        assign rr[r-2][c]   = up_r;
      end else begin : g_top
        // first PE of its chain: nothing above, up_r is left unused
        assign up_v = 1'b0;
        assign up_d = '0;
      end

      s2_pe #(.F_DEP(F_DEP), .W_DEP(W_DEP), .WF_DEP(WF_DEP), .POS_W(POS_W)) u_pe (
        .clk, .rst_n, .mac_en,
        .pos(POS_W'(r / 2)),
        .f_in_valid(fv[r][c]),   .f_in_ready(fr[r][c]),   .f_in(fd[r][c]),
        .f_out_valid(fv[r][c+1]), .f_out_ready(fr[r][c+1]), .f_out(fd[r][c+1]),
        .w_in_valid(wv[r][c]),   .w_in_ready(wr[r][c]),   .w_in(wd[r][c]),
        .w_out_valid(wv[r+1][c]), .w_out_ready(wr[r+1][c]), .w_out(wd[r+1][c]),
        .res_up_valid(up_v), .res_up_ready(up_r), .res_up(up_d),
        .res_dn_valid(rv[r][c]), .res_dn_ready(rr[r][c]), .res_dn(rd[r][c]),
        .ev_sel(ev_sel[r*COLS+c]), .ev_pair(ev_pair[r*COLS+c]), .ev_mac(ev_mac[r*COLS+c]),
        .ev_wf_full(ev_wf_full[r*COLS+c]), .ev_push_block(ev_push_block[r*COLS+c]), .ev_rf_stall(ev_rf_stall[r*COLS+c])
      );
    end
  end

endmodule
