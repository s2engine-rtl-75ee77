// s2_pe: processing element of the sparse systolic array.
//
// One PE computes one output-stationary convolution: the dot product of the
// feature window of its row with the kernel of its column. It is built from
// three parts:
//   DS  (s2_ds)  - picks the aligned weight-feature pairs out of the two
//                  compressed flows passing through it and forwards both
//                  flows to the neighbouring PEs (feature right, weight down);
//   MAC (s2_mac) - multiplies and accumulates the pairs at the reduced MAC
//                  rate set by mac_en;
//   RF  (s2_rf)  - passes results of the PEs above down the column and
//                  inserts this PE's result in order.
//
// Interfaces: feature flow f_in/f_out, weight flow w_in/w_out and result
// chain res_up/res_dn, all valid/ready; pos is this PE's place in its result
// chain. The activity outputs flag, per clock, a selection decision, an
// aligned pair, a MAC operation, a selection waiting for the (slower) MAC
// because the WF-FIFO is full, a push waiting for room in a neighbour, and
// an RF stall.
//
// The three-part structure follows the published design.
module s2_pe
  import s2_pkg::*;
#(
  parameter int unsigned F_DEP  = 4,
  parameter int unsigned W_DEP  = 4,
  parameter int unsigned WF_DEP = 4,
  parameter int unsigned POS_W  = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mac_en,
  input  logic [POS_W-1:0] pos,
  input  logic             f_in_valid,
  output logic             f_in_ready,
  input  feat_t            f_in,
  output logic             f_out_valid,
  input  logic             f_out_ready,
  output feat_t            f_out,
  input  logic             w_in_valid,
  output logic             w_in_ready,
  input  wgt_t             w_in,
  output logic             w_out_valid,
  input  logic             w_out_ready,
  output wgt_t             w_out,
  input  logic             res_up_valid,
  output logic             res_up_ready,
  input  logic [ACC_W-1:0] res_up,
  output logic             res_dn_valid,
  input  logic             res_dn_ready,
  output logic [ACC_W-1:0] res_dn,
  output logic             ev_sel,
  output logic             ev_pair,
  output logic             ev_mac,
  output logic             ev_wf_full,
  output logic             ev_push_block,
  output logic             ev_rf_stall
);

  logic             pair_valid, pair_ready;
  pair_t            pair;
  logic             res_valid, res_ready;
  logic [ACC_W-1:0] res;

  s2_ds #(.F_DEP(F_DEP), .W_DEP(W_DEP), .WF_DEP(WF_DEP)) u_ds (
    .clk, .rst_n,
    .f_in_valid, .f_in_ready, .f_in,
    .f_out_valid, .f_out_ready, .f_out,
    .w_in_valid, .w_in_ready, .w_in,
    .w_out_valid, .w_out_ready, .w_out,
    .pair_valid, .pair_ready, .pair,
    .sel_fire(ev_sel), .sel_aligned(ev_pair),
    .sel_wait(ev_wf_full), .push_block(ev_push_block)
  );

  s2_mac #(.RES_W(ACC_W)) u_mac (
    .clk, .rst_n, .mac_en,
    .pair_valid, .pair_ready, .pair,
    .res_valid, .res_ready, .res,
    .mac_op(ev_mac),
    .mac_stall()   // shows up as a full WF-FIFO (ev_wf_full)
  );

  s2_rf #(.ACC_W(ACC_W), .POS_W(POS_W)) u_rf (
    .clk, .rst_n, .pos,
    .own_valid(res_valid), .own_ready(res_ready), .own(res),
    .up_valid(res_up_valid), .up_ready(res_up_ready), .up(res_up),
    .dn_valid(res_dn_valid), .dn_ready(res_dn_ready), .dn(res_dn),
    .rf_stall(ev_rf_stall)
  );

endmodule
