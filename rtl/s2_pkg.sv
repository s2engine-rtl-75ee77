// s2_pkg: types and constants shared by the sparse systolic engine.
//
// Every data element travels in the Enhanced COO (ECOO) format: a value, its
// position (offset) inside a group of GROUP_LEN elements, and an end-of-group
// (EOG) flag on the last element of each group. A group whose elements are all
// zero keeps one zero element with EOG set as a placeholder. Weights carry one
// more bit, end-of-kernel (EOK), on the last element of a kernel.
//
// Mixed precision: every element also carries a bit-width tag. Tag 0 marks an
// ordinary signed 8-bit value. A 16-bit value is split into two tagged
// elements with the same offset and EOG: low byte first, then high byte.
//
// Widths follow the printed widths (8-bit value, 4-bit offset, 1-bit EOG,
// 1-bit end-of-kernel for weights); the tag bit is added on top of them, so
// the flows here are 14 bits (feature) and 15 bits (weight) rather than 13
// and 14. The pair handed from selection to the MAC carries both bytes, a
// 2-bit part code for each (8-bit value, low byte, high byte) and the
// end-of-kernel ("last") flag, 21 bits in all.
package s2_pkg;

  localparam int unsigned VAL_W     = 8;   // data path width
  localparam int unsigned OFF_W     = 4;   // offset bits -> group length 16
  localparam int unsigned GROUP_LEN = 1 << OFF_W;
  localparam int unsigned ACC_W     = 32;  // accumulator / result width

  // Compressed feature element: value, offset, EOG, bit-width tag.
  typedef struct packed {
    logic [VAL_W-1:0] value;
    logic [OFF_W-1:0] offset;
    logic             eog;
    logic             tag;
  } feat_t;

  // Compressed weight element: value, offset, EOG, end-of-kernel, tag.
  typedef struct packed {
    logic [VAL_W-1:0] value;
    logic [OFF_W-1:0] offset;
    logic             eog;
    logic             eok;
    logic             tag;
  } wgt_t;

  // Which byte of a (possibly split) value an operand is.
  typedef enum logic [1:0] {
    PART_FULL = 2'd0,   // signed 8-bit value
    PART_LOW  = 2'd1,   // unsigned low byte of a 16-bit value
    PART_HIGH = 2'd2    // signed high byte of a 16-bit value
  } part_e;

  // Aligned weight-feature pair, the entry of the WF-FIFO.
  typedef struct packed {
    logic [VAL_W-1:0] f;
    logic [VAL_W-1:0] w;
    part_e            fpart;
    part_e            wpart;
    logic             last;    // last pair of a convolution
  } pair_t;

  localparam int unsigned FEAT_W = $bits(feat_t);
  localparam int unsigned WGT_W  = $bits(wgt_t);
  localparam int unsigned PAIR_W = $bits(pair_t);

  // Operand of the 9x9 multiplier: a low byte is zero-extended, anything
  // else sign-extended.
  function automatic logic signed [VAL_W:0] operand(logic [VAL_W-1:0] v, part_e p);
    return (p == PART_LOW) ? $signed({1'b0, v}) : $signed({v[VAL_W-1], v});
  endfunction

  // Byte shift of a partial product: 8 bits per high byte.
  function automatic logic [1:0] part_shift(part_e a, part_e b);
    return 2'((a == PART_HIGH) ? 1 : 0) + 2'((b == PART_HIGH) ? 1 : 0);
  endfunction

endpackage
