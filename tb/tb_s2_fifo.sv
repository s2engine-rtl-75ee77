// tb_s2_fifo: self-checking testbench of the handshake FIFO.
// Random writes and reads are compared with a queue model: data order,
// occupancy, full (in_ready low exactly at DEPTH entries) and empty
// (out_valid low exactly at zero entries), and a write into a full FIFO
// that is read in the same clock.
module tb_s2_fifo;
  localparam int W = 12;
  localparam int D = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [2:0]   count;

  s2_fifo #(.WIDTH(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [W-1:0] model[$];
  int full_seen = 0, wr_on_full = 0;

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && in_ready && count == 0, "empty after reset");
    for (int i = 0; i < 3000; i++) begin
      automatic int pw = (i < 1000) ? 70 : (i < 2000) ? 30 : 50;
      in_valid  = ($urandom_range(99, 0) < pw);
      out_ready = ($urandom_range(99, 0) < 100 - pw + 10);
      in_data   = W'($urandom);
      #1;
      check(int'(count) == model.size(), "occupancy");
      check(in_ready == (model.size() < D), "in_ready means not full");
      check(out_valid == (model.size() > 0), "out_valid means not empty");
      if (out_valid && model.size() > 0) check(out_data == model[0], "head data");
      if (model.size() == D) full_seen++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    // fill, then write and read in the same clock while full
    while (model.size() < D) begin
      in_valid = 1; out_ready = 0; in_data = W'($urandom);
      @(posedge clk); model.push_back(in_data); @(negedge clk);
    end
    in_valid = 1; out_ready = 1; in_data = 12'habc;
    check(!in_ready, "full FIFO refuses a write");
    @(posedge clk); void'(model.pop_front()); @(negedge clk);
    in_valid = 0; out_ready = 0;
    check(int'(count) == D - 1, "read of a full FIFO frees one entry");
    check(full_seen > 0, "FIFO was full during the random phase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
