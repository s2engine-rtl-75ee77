// s2_ce: collective element (CE), one per PE row, between the feature
// buffers and the PE array.
//
// Overlap reuse: with a K x K kernel at stride 1, the windows of adjacent PE
// rows share K-1 input rows. The feature flow of a window is sent as slices
// of K groups (kernel rows 0..K-1 of one kernel column and one channel
// group); group ky of row r's window is group ky-1 of row r+1's window. So
// instead of storing every input row K times, each CE works in periods of
// one group:
//   period 0        - send the group of its own input row, read from its FB;
//   period 1..K-1   - send the group that the CE below sent one period
//                     earlier, read from that CE's internal FIFO;
// and in periods 0..K-2 it keeps a copy of what it sends in its own FIFO for
// the CE above. The bottom CE has no CE below and reads all K groups of a
// slice from its own FB; the top CE has nobody to copy for. With cfg_reuse
// low every CE reads every group from its own FB (no overlap reuse, e.g. for
// strides above 1).
//
// Group boundaries are taken from the EOG bit; a low byte of a split 16-bit
// value carries the EOG of its value but does not end the group.
//
// Interfaces (valid/ready, compressed feature elements): fb_* from the FB,
// nb_* from the FIFO of the CE below, cp_* this CE's FIFO to the CE above,
// pe_* to the first PE of the row. Elements move one per clock without added
// latency; the copy is written in the same clock an element is sent.
//
// The period schedule and the one-group FIFO follow the published design;
// the FIFO is 2*GROUP_LEN entries deep so that a group of split 16-bit
// values fits, and the reuse switch is this design's choice.
// The occupancy output of the internal FIFO(s) is left unconnected on
// purpose: only the valid/ready flags are needed here.
module s2_ce
  import s2_pkg::*;
#(
  parameter int unsigned CE_DEP    = 2 * s2_pkg::GROUP_LEN,
  parameter bit          IS_TOP    = 1'b0,
  parameter bit          IS_BOTTOM = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] cfg_k,       // kernel height K (1..15)
  input  logic       cfg_reuse,   // 1: overlap reuse between rows
  input  logic       fb_valid,
  output logic       fb_ready,
  input  feat_t      fb,
  input  logic       nb_valid,
  output logic       nb_ready,
  input  feat_t      nb,
  output logic       cp_valid,
  input  logic       cp_ready,
  output feat_t      cp,
  output logic       pe_valid,
  input  logic       pe_ready,
  output feat_t      pe,
  output logic       ev_fb_read,  // element read from the FB
  output logic       ev_reuse     // element reused from the CE below
);

  logic [3:0] period;
  logic       expect_hi;
  logic       use_fb, copy, cp_in_ready, go, grp_end;
  feat_t      src;
  logic       src_valid;

  always_comb begin
    use_fb    = IS_BOTTOM || !cfg_reuse || (period == '0);
    copy      = !IS_TOP && cfg_reuse && (period + 4'd1 < cfg_k);
    src       = use_fb ? fb : nb;
    src_valid = use_fb ? fb_valid : nb_valid;
    pe_valid  = src_valid && (!copy || cp_in_ready);
    pe        = src;
    go        = pe_valid && pe_ready;
    fb_ready  = use_fb && pe_ready && (!copy || cp_in_ready);
    nb_ready  = !use_fb && pe_ready && (!copy || cp_in_ready);
    grp_end   = src.eog && !(src.tag && !expect_hi);
  end

  assign ev_fb_read = go && use_fb;
  assign ev_reuse   = go && !use_fb;

  s2_fifo #(.WIDTH(FEAT_W), .DEPTH(CE_DEP)) u_fifo (
    .clk, .rst_n,
    .in_valid(go && copy), .in_ready(cp_in_ready), .in_data(src),
    .out_valid(cp_valid), .out_ready(cp_ready), .out_data(cp),
    .count()
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      period    <= '0;
      expect_hi <= 1'b0;
    end else if (go) begin
      expect_hi <= src.tag && !expect_hi;
      if (grp_end) period <= (period + 4'd1 >= cfg_k) ? '0 : period + 4'd1;
    end
  end

endmodule
