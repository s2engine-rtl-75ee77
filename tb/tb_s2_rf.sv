// tb_s2_rf: self-checking testbench of result forwarding.
// Four RF components are chained (positions 0..3) as in one result chain of
// a column. Each gets a random-delay stream of its own results, one per
// round; the bottom output is read with random stalls. Checks: results leave
// in round order and, within a round, top position first; a result that is
// ready early waits (rf_stall) until the results above it have passed.
module tb_s2_rf;
  localparam int N = 4;
  localparam int ROUNDS = 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] own_valid, own_ready, up_valid, up_ready, dn_valid, dn_ready, rf_stall;
  logic [31:0]  own [N], up [N], dn [N];

  for (genvar i = 0; i < N; i++) begin : g_rf
    s2_rf u_rf (
      .clk, .rst_n, .pos(5'(i)),
      .own_valid(own_valid[i]), .own_ready(own_ready[i]), .own(own[i]),
      .up_valid(up_valid[i]), .up_ready(up_ready[i]), .up(up[i]),
      .dn_valid(dn_valid[i]), .dn_ready(dn_ready[i]), .dn(dn[i]),
      .rf_stall(rf_stall[i])
    );
    if (i == 0) begin : g_first
      assign up_valid[0] = 1'b0;
      assign up[0] = '0;
    end else begin : g_link
      assign up_valid[i]   = dn_valid[i-1];
      assign up[i]         = dn[i-1];
      assign dn_ready[i-1] = up_ready[i];
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int sent [N];
  int delay [N];
  int got[$];
  int stalls = 0;
  logic out_ready;
  assign dn_ready[N-1] = out_ready;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < N; i++) begin
        if (own_valid[i] && own_ready[i]) begin
          sent[i]++;
          delay[i] = $urandom_range(30, 0);
        end else if (!own_valid[i] && delay[i] > 0) delay[i]--;
      end
      if (dn_valid[N-1] && out_ready) got.push_back(int'(dn[N-1]));
      stalls += $countones(rf_stall);
    end
    for (int i = 0; i < N; i++) begin
      own_valid[i] <= (sent[i] < ROUNDS) && (delay[i] == 0);
      own[i]       <= 32'(sent[i] * 16 + i);    // round * 16 + position
    end
    out_ready <= ($urandom_range(3, 0) != 0);
  end

  initial begin
    own_valid = '0; out_ready = 0;
    for (int i = 0; i < N; i++) begin sent[i] = 0; delay[i] = $urandom_range(30, 0); own[i] = '0; end
    delay[N-1] = 0;   // the bottom RF is ready first and must wait
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (got.size() < N * ROUNDS) @(negedge clk);
    foreach (got[k])
      check(got[k] == (k / N) * 16 + (k % N), $sformatf("result %0d: 0x%0h expected 0x%0h", k, got[k], (k / N) * 16 + (k % N)));
    check(stalls > 0, "RF stalled its own result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
