// tb_s2_clk_div: checks that the MAC enable is a single-clock pulse every
// FREQ_RATIO (4) clocks, the first one FREQ_RATIO clocks after reset.
module tb_s2_clk_div;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic mac_en;
  always #5 clk = ~clk;

  s2_clk_div dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    automatic int last = -1, first = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 1; c <= 200; c++) begin
      @(negedge clk);
      if (mac_en) begin
        if (first < 0) first = c;
        if (last >= 0) check(c - last == 4, $sformatf("pulse spacing %0d, expected 4", c - last));
        last = c;
      end
    end
    check(first == 4, $sformatf("first pulse after %0d clocks, expected 4", first));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
