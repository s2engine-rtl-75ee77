// tb_s2_mac: self-checking testbench of the MAC component.
// Dot products of random 8- and 16-bit vectors are split into the partial
// pairs the selection logic would produce (1, 2 or 4 per product, with the
// part codes of each byte) and fed through the MAC with an enable every 4
// clocks. Checks: each result equals the dot product computed on the full
// values; one pair is taken per enable pulse and none in between; a last
// pair waits while the previous result is not taken (stall) and nothing is
// lost.
module tb_s2_mac;
  import s2_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        mac_en, pair_valid, pair_ready, res_valid, res_ready, mac_op, mac_stall;
  pair_t       pair;
  logic [31:0] res;

  s2_mac dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  pair_t pq[$];
  int    expect_q[$], got[$];
  int    pi = 0, cyc = 0, takes_off_en = 0, takes = 0, en_with_pair = 0, stalls = 0;
  int    hold_res = 0;

  function automatic void add_pairs(int f, int w, bit last);
    bit fw = (f > 127 || f < -128), ww = (w > 127 || w < -128);
    logic [7:0] fb[2], wb[2];
    part_e fp[2], wp[2];
    int nf = fw ? 2 : 1, nw = ww ? 2 : 1;
    fb[0] = 8'(f); fb[1] = 8'(f >>> 8); wb[0] = 8'(w); wb[1] = 8'(w >>> 8);
    fp[0] = fw ? PART_LOW : PART_FULL; fp[1] = PART_HIGH;
    wp[0] = ww ? PART_LOW : PART_FULL; wp[1] = PART_HIGH;
    for (int i = 0; i < nf; i++)
      for (int j = 0; j < nw; j++) begin
        pair_t p;
        p = '{f: fb[i], w: wb[j], fpart: fp[i], wpart: wp[j],
              last: last && (i == nf-1) && (j == nw-1)};
        pq.push_back(p);
      end
  endfunction

  function automatic int rv();
    if ($urandom_range(3, 0) == 0) return int'($urandom_range(65535, 0)) - 32768;
    return int'($urandom_range(255, 0)) - 128;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    mac_en <= ((cyc + 1) % 4 == 3);
    if (rst_n) begin
      if (pair_valid && pair_ready) begin
        pi = pi + 1; takes++;
        if (!mac_en) takes_off_en++;
      end
      if (mac_en && pair_valid) en_with_pair++;
      if (mac_stall) stalls++;
      if (res_valid && res_ready) got.push_back(int'($signed(res)));
    end
    pair_valid <= (pi < pq.size()) && ($urandom_range(9, 0) != 0);
    pair       <= (pi < pq.size()) ? pq[pi] : '0;
    res_ready  <= (hold_res > 0) ? 1'b0 : ($urandom_range(3, 0) != 0);
    if (hold_res > 0) hold_res <= hold_res - 1;
  end

  initial begin
    pair_valid = 0; pair = '0; res_ready = 1; mac_en = 0;
    for (int n = 0; n < 60; n++) begin
      int len, s;
      len = 1 + $urandom_range(7, 0);
      s = 0;
      for (int i = 0; i < len; i++) begin
        int f, w;
        f = rv(); w = rv();
        s += f * w;
        add_pairs(f, w, i == len - 1);
      end
      expect_q.push_back(s);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (100) @(negedge clk);
    hold_res = 240;             // hold the result port to force a stall
    while (got.size() < expect_q.size() && cyc < 50000) @(negedge clk);
    check(got.size() == expect_q.size(), $sformatf("%0d results, expected %0d", got.size(), expect_q.size()));
    foreach (got[i])
      if (i < expect_q.size())
        check(got[i] == expect_q[i], $sformatf("result %0d: %0d expected %0d", i, got[i], expect_q[i]));
    check(takes_off_en == 0, "pairs taken only on MAC enable");
    check(takes == pq.size(), "every pair taken once");
    check(stalls > 0, "a last pair waited for the result port");
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
