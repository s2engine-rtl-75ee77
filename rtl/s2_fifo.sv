// s2_fifo: small register-based FIFO with valid/ready handshakes.
//
// Used for every queue of the engine: the feature, weight and pair FIFOs
// inside each processing element and the one-group FIFO inside each
// collective element. Storage is a register array (the queues hold a few
// tens of bits), addressed by wrapping read and write pointers.
//
// Interface: a word is written when in_valid && in_ready, and read when
// out_valid && out_ready. out_data shows the head entry combinationally
// (show-ahead), so a consumer can look at the head before it pops it. A full
// FIFO can be written in the same cycle it is read only if the read happens,
// i.e. in_ready does not depend on out_ready (no combinational path from the
// read side to the write side). Latency from write to out_valid: one cycle.
// Reset (synchronous, active low) empties the queue.
//
// The depth default of 4 is the middle FIFO setting the engine is evaluated
// with; the handshake and reset are this design's choices.
module s2_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] rd_ptr, wr_ptr;
  logic [CNT_W-1:0] cnt;

  logic do_wr, do_rd;

  assign in_ready  = (cnt != CNT_W'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rd_ptr];
  assign count     = cnt;
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  function automatic logic [PTR_W-1:0] next_ptr(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: cnt <= cnt;
      endcase
    end
  end

  // Storage needs no reset: nothing is read before it is written.
  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  // Occupancy never exceeds the depth.
  assert property (@(posedge clk) disable iff (!rst_n) cnt <= CNT_W'(DEPTH))
    else $error("s2_fifo: occupancy above depth");

endmodule
