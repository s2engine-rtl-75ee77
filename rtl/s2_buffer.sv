// s2_buffer: on-chip SRAM buffer for one compressed flow (a feature buffer,
// FB, of one PE row or a weight buffer, WB, of one PE column).
//
// The buffer is loaded from the off-chip side through a plain write port
// and then streams its content as a valid/ready flow: entries 0..len-1, and
// the whole sequence rep times (a WB repeats its kernels once for every
// output position its column computes). The array has one synchronous read
// port, as an SRAM macro would; the read data lands in an output register,
// and the next word is read whenever that register is empty or being taken,
// so the flow runs at one entry per clock.
//
// Timing: start (one clock) latches len and rep; the first entry is valid
// two clocks later. busy stays high until the last entry has been taken.
// start while busy is ignored. A len or rep of zero streams nothing.
//
// The 16 KB size is an even share of the 1 MB on-chip SRAM over 32 FBs and
// 32 WBs, 8192 entries of up to 16 bits; the share, the load port and the
// repeat count are this design's choices.
module s2_buffer #(
  parameter int unsigned WIDTH = 15,
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // load port (off-chip side)
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  // streaming control
  input  logic             start,
  input  logic [AW:0]      len,
  input  logic [15:0]      rep,
  output logic             busy,
  // output flow
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             ev_read      // one SRAM read this clock
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      addr, len_q;
  logic [15:0]      rep_left;
  logic             reading, fetch;

  assign fetch   = reading && (!out_valid || out_ready);
  assign busy    = reading || out_valid;
  assign ev_read = fetch;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (fetch) out_data <= mem[addr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      reading   <= 1'b0;
      out_valid <= 1'b0;
      addr      <= '0;
      len_q     <= '0;
      rep_left  <= '0;
    end else begin
      if (fetch) out_valid <= 1'b1;
      else if (out_ready) out_valid <= 1'b0;

      if (start && !busy) begin
        addr     <= '0;
        len_q    <= len;
        rep_left <= rep;
        reading  <= (len != '0) && (rep != '0);
      end else if (fetch) begin
        if (addr + 1'b1 == len_q) begin
          addr     <= '0;
          rep_left <= rep_left - 1'b1;
          if (rep_left == 16'd1) reading <= 1'b0;
        end else begin
          addr <= addr + 1'b1;
        end
      end
    end
  end

endmodule
