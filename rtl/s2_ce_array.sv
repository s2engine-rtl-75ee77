// s2_ce_array: the column of ROWS collective elements between the feature
// buffers and the PE rows.
//
// CE r feeds PE row r. The CEs are chained bottom to top: the internal FIFO
// of CE r+1 is the reuse source of CE r, so a group read once from the FB
// of a lower row climbs the chain one row per period and is used by up to K
// rows (K = kernel height, cfg_k). CE ROWS-1 is the bottom of the chain and
// reads every group from its own FB; CE 0 is the top and keeps no copies.
//
// Interfaces: fb_* one valid/ready flow per row from the FBs, pe_* one per
// row to the PE array. Per-row activity flags count FB reads and reused
// elements.
//
// The chain direction and the schedule follow the published design.
// Two lint notes stand by construction: the copy FIFO output of the top CE
// (cp_valid[0]) has no reader, as nothing sits above row 0, and the bottom
// CE never takes from its (absent) neighbour, so its nb_ready is unused.
// For the same reason the bottom row's pe_data is its FB data unchanged and
// its ev_reuse flag is constant zero.
module s2_ce_array
  import s2_pkg::*;
#(
  parameter int unsigned ROWS   = 32,
  parameter int unsigned CE_DEP = 2 * s2_pkg::GROUP_LEN
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [3:0]      cfg_k,
  input  logic            cfg_reuse,
  input  logic [ROWS-1:0] fb_valid,
  output logic [ROWS-1:0] fb_ready,
  input  feat_t           fb_data [ROWS],
  output logic [ROWS-1:0] pe_valid,
  input  logic [ROWS-1:0] pe_ready,
  output feat_t           pe_data [ROWS],
  output logic [ROWS-1:0] ev_fb_read,
  output logic [ROWS-1:0] ev_reuse
);

  // cp_*[r]: internal FIFO of CE r, read by CE r-1
  logic  [ROWS-1:0] cp_valid, cp_ready;
  feat_t            cp_data [ROWS];

  assign cp_ready[0] = 1'b0;   // CE 0 has nobody above it

  for (genvar r = 0; r < ROWS; r++) begin : g_ce
    logic  nb_valid, nb_ready;
    feat_t nb_data;

    if (r == ROWS - 1) begin : g_bottom
      // no CE below: the reuse input is never selected, nb_ready unused
      assign nb_valid = 1'b0;
      assign nb_data  = '0;
    end else begin : g_mid
      assign nb_valid      = cp_valid[r+1];
      assign nb_data       = cp_data[r+1];
      assign cp_ready[r+1] = nb_ready;
    end

    s2_ce #(.CE_DEP(CE_DEP), .IS_TOP(r == 0), .IS_BOTTOM(r == ROWS - 1)) u_ce (
      .clk, .rst_n, .cfg_k, .cfg_reuse,
      .fb_valid(fb_valid[r]), .fb_ready(fb_ready[r]), .fb(fb_data[r]),
      .nb_valid, .nb_ready, .nb(nb_data),
      .cp_valid(cp_valid[r]), .cp_ready(cp_ready[r]), .cp(cp_data[r]),
      .pe_valid(pe_valid[r]), .pe_ready(pe_ready[r]), .pe(pe_data[r]),
      .ev_fb_read(ev_fb_read[r]), .ev_reuse(ev_reuse[r])
    );
  end

endmodule
