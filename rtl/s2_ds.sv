// s2_ds: dynamic selection (DS) component of a processing element.
//
// The compressed feature flow (from the left) and weight flow (from above)
// are each buffered in a FIFO (F-FIFO, W-FIFO). The head of each FIFO is
// moved into a compare register (value, offset, EOG, tag); this move is a
// "push" of the flow, and the same element is forwarded to the next PE on
// that flow in the same cycle, so every element passes every PE in order.
// The DS control compares the two registers once per clock:
//
//   offsets equal             -> the pair is aligned and is written into the
//                                WF-FIFO for the MAC; both flows advance
//   one offset smaller        -> that flow advances (its element has no
//                                partner in this group)
//   a flow at end-of-group    -> it waits until the other flow reaches
//                                end-of-group; then both advance together
//
// so each group costs one clock per distinct offset present in either flow
// instead of one clock per position.
//
// Mixed precision: a 16-bit value arrives as two tagged elements with the same
// offset, low byte first. When a split value meets an 8-bit one, both bytes
// are paired with it (2 pairs). When two split values meet, four partial pairs
// are produced in the order (fl,wl) (fl,wh) (fh,wl) (fh,wh); the weight low
// byte is kept in a spare register for the third pair.
//
// End of a convolution: the weight element that ends a kernel carries EOK.
// When it retires at the end of its group the pair written in that clock is
// marked "last"; if that clock has no aligned pair a zero pair marked last is
// written instead, so the MAC always sees the end of every convolution.
//
// Interfaces are valid/ready. A flow is pushed only if the next PE's FIFO has
// room, a decision that writes the WF-FIFO waits until it has room, and the
// MAC pops the WF-FIFO at its own rate. Latency: an element written into an
// empty F-/W-FIFO reaches the compare register one clock later.
//
// The FIFO structure, the compare-and-push rule and the pair ordering follow
// the published design; the handshakes, the spare register, the zero "last"
// pair and the part codes are this design's own.
// The occupancy output of the internal FIFO(s) is left unconnected on
// purpose: only the valid/ready flags are needed here.
module s2_ds
  import s2_pkg::*;
#(
  parameter int unsigned F_DEP  = 4,
  parameter int unsigned W_DEP  = 4,
  parameter int unsigned WF_DEP = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  // feature flow in / out
  input  logic  f_in_valid,
  output logic  f_in_ready,
  input  feat_t f_in,
  output logic  f_out_valid,
  input  logic  f_out_ready,
  output feat_t f_out,
  // weight flow in / out
  input  logic  w_in_valid,
  output logic  w_in_ready,
  input  wgt_t  w_in,
  output logic  w_out_valid,
  input  logic  w_out_ready,
  output wgt_t  w_out,
  // aligned pairs to the MAC
  output logic  pair_valid,
  input  logic  pair_ready,
  output pair_t pair,
  // activity, for statistics
  output logic  sel_fire,     // a selection decision was taken
  output logic  sel_aligned,  // ... and it produced a pair
  output logic  sel_wait,     // a decision waits for room in the WF-FIFO
  output logic  push_block    // a push waits for room in the next PE
);

  typedef enum logic [1:0] {
    S_NORM   = 2'd0,   // ordinary selection
    S_WSAVED = 2'd1,   // (fl,wl) sent, weight low byte saved, w reg holds wh
    S_REPLAY = 2'd2    // (fl,wh) sent, f reg holds fh, next is (fh,wl)
  } ds_state_e;

  // ---------------- input FIFOs ----------------
  feat_t f_head;
  wgt_t  w_head;
  logic  f_head_valid, w_head_valid;
  logic  f_pop, w_pop;

  s2_fifo #(.WIDTH(FEAT_W), .DEPTH(F_DEP)) u_f_fifo (
    .clk, .rst_n,
    .in_valid(f_in_valid), .in_ready(f_in_ready), .in_data(f_in),
    .out_valid(f_head_valid), .out_ready(f_pop), .out_data(f_head),
    .count()
  );

  s2_fifo #(.WIDTH(WGT_W), .DEPTH(W_DEP)) u_w_fifo (
    .clk, .rst_n,
    .in_valid(w_in_valid), .in_ready(w_in_ready), .in_data(w_in),
    .out_valid(w_head_valid), .out_ready(w_pop), .out_data(w_head),
    .count()
  );

  // ---------------- compare registers ----------------
  feat_t f_reg;
  wgt_t  w_reg;
  logic  f_vld, w_vld;
  logic  f_hi, w_hi;                 // register holds the high byte
  logic  f_expect_hi, w_expect_hi;   // last pushed element was a low byte
  logic [VAL_W-1:0] w_save;          // weight low byte kept for (fh,wl)
  ds_state_e state, state_nx;

  // ---------------- WF-FIFO ----------------
  logic  wf_in_valid, wf_in_ready;
  pair_t wf_in;

  s2_fifo #(.WIDTH(PAIR_W), .DEPTH(WF_DEP)) u_wf_fifo (
    .clk, .rst_n,
    .in_valid(wf_in_valid), .in_ready(wf_in_ready), .in_data(wf_in),
    .out_valid(pair_valid), .out_ready(pair_ready), .out_data(pair),
    .count()
  );

  // ---------------- DS control ----------------
  logic  f_low, w_low;        // register holds the low byte of a split value
  logic  f_eog, w_eog;        // end of group, a low byte never ends a group
  logic  aligned;
  logic  emit, cons_f, cons_w, save_w, eok_ev;
  logic  ready_regs, fire;
  part_e fpart, wpart;

  always_comb begin
    f_low   = f_reg.tag && !f_hi;
    w_low   = w_reg.tag && !w_hi;
    f_eog   = f_reg.eog && !f_low;
    w_eog   = w_reg.eog && !w_low;
    aligned = (f_reg.offset == w_reg.offset);
    fpart   = !f_reg.tag ? PART_FULL : (f_hi ? PART_HIGH : PART_LOW);
    wpart   = !w_reg.tag ? PART_FULL : (w_hi ? PART_HIGH : PART_LOW);

    emit     = 1'b0;
    cons_f   = 1'b0;
    cons_w   = 1'b0;
    save_w   = 1'b0;
    state_nx = state;
    wf_in    = '{f: f_reg.value, w: w_reg.value, fpart: fpart, wpart: wpart, last: 1'b0};

    unique case (state)
      S_WSAVED: begin                 // (fl, wh)
        emit     = 1'b1;
        cons_f   = 1'b1;
        state_nx = S_REPLAY;
      end
      S_REPLAY: begin                 // (fh, wl) from the spare register
        emit     = 1'b1;
        wf_in.w     = w_save;
        wf_in.wpart = PART_LOW;
        state_nx = S_NORM;
      end
      default: begin
        if (aligned && f_low && w_low) begin        // (fl, wl)
          emit     = 1'b1;
          cons_w   = 1'b1;
          save_w   = 1'b1;
          state_nx = S_WSAVED;
        end else if (aligned && f_low) begin        // split feature, 8-bit weight
          emit   = 1'b1;
          cons_f = 1'b1;
        end else if (aligned && w_low) begin        // split weight, 8-bit feature
          emit   = 1'b1;
          cons_w = 1'b1;
        end else begin
          emit   = aligned;
          cons_f = (!f_eog && (f_reg.offset <= w_reg.offset || w_eog)) || (f_eog && w_eog);
          cons_w = (!w_eog && (w_reg.offset <= f_reg.offset || f_eog)) || (f_eog && w_eog);
        end
      end
    endcase

    // The kernel ends when its last weight retires at end of group.
    eok_ev = cons_w && w_reg.eok && w_eog;
    if (eok_ev && !emit) begin
      wf_in = '{f: '0, w: '0, fpart: PART_FULL, wpart: PART_FULL, last: 1'b1};
    end
    wf_in.last = eok_ev;

    // The replay step needs only the feature register (the weight register
    // may be empty or hold the next element of the same value).
    ready_regs  = (state == S_REPLAY) ? f_vld : (f_vld && w_vld);
    fire        = ready_regs && (!(emit || eok_ev) || wf_in_ready);
    wf_in_valid = fire && (emit || eok_ev);
  end

  // A register is refilled when it is empty or emptied in this clock, the
  // FIFO has an element and the next PE can take the forwarded copy.
  logic f_free, w_free;
  assign f_free = !f_vld || (fire && cons_f);
  assign w_free = !w_vld || (fire && cons_w);
  assign f_pop  = f_free && f_head_valid && f_out_ready;
  assign w_pop  = w_free && w_head_valid && w_out_ready;

  assign f_out_valid = f_free && f_head_valid;
  assign f_out       = f_head;
  assign w_out_valid = w_free && w_head_valid;
  assign w_out       = w_head;

  assign sel_fire    = fire;
  assign sel_aligned = fire && emit;
  assign sel_wait    = ready_regs && !fire;
  assign push_block  = (f_free && f_head_valid && !f_out_ready) ||
                       (w_free && w_head_valid && !w_out_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      f_vld       <= 1'b0;
      w_vld       <= 1'b0;
      f_hi        <= 1'b0;
      w_hi        <= 1'b0;
      f_expect_hi <= 1'b0;
      w_expect_hi <= 1'b0;
      f_reg       <= '0;
      w_reg       <= '0;
      w_save      <= '0;
      state       <= S_NORM;
    end else begin
      if (fire) state <= state_nx;
      if (fire && save_w) w_save <= w_reg.value;

      if (f_pop) begin
        f_reg       <= f_head;
        f_vld       <= 1'b1;
        f_hi        <= f_head.tag && f_expect_hi;
        f_expect_hi <= f_head.tag && !f_expect_hi;
      end else if (fire && cons_f) begin
        f_vld <= 1'b0;
      end

      if (w_pop) begin
        w_reg       <= w_head;
        w_vld       <= 1'b1;
        w_hi        <= w_head.tag && w_expect_hi;
        w_expect_hi <= w_head.tag && !w_expect_hi;
      end else if (fire && cons_w) begin
        w_vld <= 1'b0;
      end
    end
  end

  // A split value always arrives as low byte then high byte at one offset.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (fire && state == S_WSAVED) |-> aligned)
    else $error("s2_ds: high weight byte does not follow its low byte");

endmodule
