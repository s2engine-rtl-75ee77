// s2_clk_div: DS:MAC frequency divider.
//
// The selection logic, the collective elements and the buffers run on the
// fast clock; the MACs are meant to run FREQ_RATIO times slower. Instead of a
// second clock this block produces a one-clock enable pulse every FREQ_RATIO
// clocks, keeping a single clock domain. The first pulse comes FREQ_RATIO
// clocks after reset is released.
//
// The ratio of 4 is the published setting; using an enable rather than a
// divided clock is this design's choice.
module s2_clk_div #(
  parameter int unsigned FREQ_RATIO = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic mac_en
);

  localparam int unsigned CW = (FREQ_RATIO > 1) ? $clog2(FREQ_RATIO) : 1;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt    <= '0;
      mac_en <= 1'b0;
    end else begin
      mac_en <= (cnt == CW'(FREQ_RATIO - 1));
      cnt    <= (cnt == CW'(FREQ_RATIO - 1)) ? '0 : cnt + 1'b1;
    end
  end

endmodule
