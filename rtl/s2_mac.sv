// s2_mac: multiply-accumulate (MAC) component of a processing element.
//
// Pops one aligned pair from the WF-FIFO in each clock in which mac_en is
// high. mac_en comes from the DS:MAC frequency divider, so with a ratio of
// 4 the MAC runs at a quarter of the selection rate while staying in the
// single clock domain. Each pair is multiplied on an 8-bit data path: the
// operands are widened to 9 bits (a low byte of a split 16-bit value is
// zero-extended, all other bytes sign-extended), and the product is shifted
// left by 8 bits for each high byte. The four partial products of two 16-bit
// values thus add up to their full 32-bit product.
//
// A pair marked "last" ends the convolution: accumulator plus this product
// becomes the result, offered to the result-forwarding (RF) component on a
// valid/ready port, and the accumulator restarts from zero. If the previous
// result has not been taken yet, a "last" pair waits in the WF-FIFO (a
// stall, reported on mac_stall); other pairs are accumulated meanwhile.
// Latency: the result is valid in the clock after the last pair is popped.
//
// Multiply-and-accumulate itself follows the published design; the 32-bit
// accumulator, the sign handling of the byte halves and the result register
// are this design's choices.
module s2_mac
  import s2_pkg::*;
#(
  parameter int unsigned RES_W = s2_pkg::ACC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mac_en,
  input  logic             pair_valid,
  output logic             pair_ready,
  input  pair_t            pair,
  output logic             res_valid,
  input  logic             res_ready,
  output logic [RES_W-1:0] res,
  output logic             mac_op,     // a pair was multiplied this clock
  output logic             mac_stall   // a last pair waits for RF
);

  logic signed [RES_W-1:0]   acc;
  logic signed [2*VAL_W+1:0] prod;     // 9x9 signed product
  logic signed [RES_W-1:0]   term;
  logic                      take;

  always_comb begin
    prod = operand(pair.f, pair.fpart) * operand(pair.w, pair.wpart);
    term = RES_W'(prod) <<< (VAL_W * part_shift(pair.fpart, pair.wpart));
  end

  assign pair_ready = mac_en && (!pair.last || !res_valid || res_ready);
  assign take       = pair_valid && pair_ready;
  assign mac_op     = take;
  assign mac_stall  = mac_en && pair_valid && !pair_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      res       <= '0;
      res_valid <= 1'b0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (take) begin
        if (pair.last) begin
          res       <= acc + term;
          res_valid <= 1'b1;
          acc       <= '0;
        end else begin
          acc <= acc + term;
        end
      end
    end
  end

endmodule
