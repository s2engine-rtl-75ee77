// tb_s2_buffer: self-checking testbench of the FB/WB buffer.
// Loads random words through the load port, then streams len words rep
// times with random back-pressure and checks the order, the count, the
// first word two clocks after start, one word per clock while the consumer
// is always ready, busy until the last word is taken, and that start while
// busy is ignored.
module tb_s2_buffer;
  localparam int W = 15;
  localparam int D = 8192;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          wr_en, start, busy, out_valid, out_ready, ev_read;
  logic [12:0]   wr_addr;
  logic [W-1:0]  wr_data, out_data;
  logic [13:0]   len;
  logic [15:0]   rep;

  s2_buffer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [W-1:0] img [D];
  logic [W-1:0] got[$];

  task automatic stream(int n, int r, int ready_pct, bit check_rate);
    int cyc = 0, first = -1, last = -1;
    got.delete();
    @(negedge clk);
    len = 14'(n); rep = 16'(r); start = 1;
    @(negedge clk);
    start = 0; len = 14'(1);
    while (got.size() < n * r && cyc < 100000) begin
      out_ready = ($urandom_range(99, 0) < ready_pct);
      @(posedge clk);
      cyc++;
      if (out_valid && out_ready) begin
        got.push_back(out_data);
        if (first < 0) first = cyc;
        last = cyc;
      end
      if (cyc == 5) start = 1;          // must be ignored while busy
      @(negedge clk);
      start = 0;
    end
    check(got.size() == n * r, $sformatf("%0d words, expected %0d", got.size(), n * r));
    foreach (got[i]) if (got[i] != img[i % n]) begin
      check(0, $sformatf("word %0d wrong", i)); break;
    end
    check(1, "");
    if (check_rate) begin
      check(first == 2, $sformatf("first word after %0d clocks, expected 2", first));
      check(last - first == n * r - 1, "one word per clock");
    end
    @(negedge clk);
    check(!busy, "idle after the last word");
  endtask

  initial begin
    wr_en = 0; start = 0; out_ready = 0; wr_addr = '0; wr_data = '0; len = '0; rep = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      img[i] = W'($urandom);
      wr_en = 1; wr_addr = 13'(i); wr_data = img[i];
      @(negedge clk);
    end
    wr_en = 0;
    check(!busy, "idle before start");
    stream(37, 1, 100, 1);
    stream(300, 2, 60, 0);
    stream(5, 7, 100, 1);
    stream(1, 1, 30, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
