// tb_s2_ds: self-checking testbench of the dynamic selection component.
//
// Part 1 replays the two-group toy example of the selection walk-through
// (feature offsets 1,2,4,5 then an all-zero group; weight offsets 0,1,3 then
// 1,3): group n needs 5 selection decisions and both groups 7, in
// consecutive clocks, with one aligned pair and a final zero pair closing
// the kernel.
// Part 2 streams random sparse kernels with 8- and 16-bit values through
// the block with random stalls on every port. It checks that both flows
// leave unchanged and in order, and that the pairs of each kernel sum to the
// exact dot product computed from the dense data.
module tb_s2_ds;
  import s2_pkg::*;
  import tb_s2_util::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  f_in_valid, f_in_ready, f_out_valid, f_out_ready;
  feat_t f_in, f_out;
  logic  w_in_valid, w_in_ready, w_out_valid, w_out_ready;
  wgt_t  w_in, w_out;
  logic  pair_valid, pair_ready;
  pair_t pair;
  logic  sel_fire, sel_aligned, sel_wait, push_block;

  s2_ds dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // stimulus queues and captured outputs
  elem_t fq[$], wq[$];
  int    fi, wi;
  feat_t fo[$];
  wgt_t  wo[$];
  pair_t po[$];
  int    stall_pct = 0;
  int    fires = 0, first_fire = -1, last_fire = -1, cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (f_in_valid && f_in_ready) fi = fi + 1;
      if (w_in_valid && w_in_ready) wi = wi + 1;
      if (f_out_valid && f_out_ready) fo.push_back(f_out);
      if (w_out_valid && w_out_ready) wo.push_back(w_out);
      if (pair_valid && pair_ready) po.push_back(pair);
      if (sel_fire) begin
        fires = fires + 1;
        if (first_fire < 0) first_fire = cyc;
        last_fire = cyc;
      end
    end
    f_in_valid  <= (fi < fq.size()) && (int'($urandom_range(99, 0)) >= stall_pct);
    f_in        <= (fi < fq.size()) ? to_feat(fq[fi]) : '0;
    w_in_valid  <= (wi < wq.size()) && (int'($urandom_range(99, 0)) >= stall_pct);
    w_in        <= (wi < wq.size()) ? to_wgt(wq[wi]) : '0;
    f_out_ready <= (int'($urandom_range(99, 0)) >= stall_pct);
    w_out_ready <= (int'($urandom_range(99, 0)) >= stall_pct);
    pair_ready  <= (int'($urandom_range(99, 0)) >= stall_pct);
  end

  task automatic wait_drained(int limit);
    int n = 0;
    while ((fi < fq.size() || wi < wq.size() || pair_valid ||
            fo.size() < fq.size() || wo.size() < wq.size()) && n < limit) begin
      @(posedge clk);
      n++;
    end
    repeat (10) @(posedge clk);
  endtask

  task automatic reset_all();
    rst_n = 1'b0;
    fq.delete(); wq.delete(); fo.delete(); wo.delete(); po.delete();
    fi = 0; wi = 0; fires = 0; first_fire = -1; last_fire = -1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  endtask

  // ------------------------------------------------------------------
  task automatic toy_example();
    elem_t e;
    reset_all();
    stall_pct = 0;
    // feature group n: f0@1 f1@2 f2@4 f3@5(EOG); group n+1 all zero
    e = '{value: 8'd3,  offset: 4'd1, eog: 1'b0, eok: 1'b0, tag: 1'b0}; fq.push_back(e);
    e = '{value: 8'd5,  offset: 4'd2, eog: 1'b0, eok: 1'b0, tag: 1'b0}; fq.push_back(e);
    e = '{value: 8'd7,  offset: 4'd4, eog: 1'b0, eok: 1'b0, tag: 1'b0}; fq.push_back(e);
    e = '{value: 8'd9,  offset: 4'd5, eog: 1'b1, eok: 1'b0, tag: 1'b0}; fq.push_back(e);
    e = '{value: 8'd0,  offset: 4'd0, eog: 1'b1, eok: 1'b0, tag: 1'b0}; fq.push_back(e);
    // weight group n: w0@0 w1@1 w3@3(EOG); group n+1: w7@1 w9@3(EOG, EOK)
    e = '{value: 8'd2,  offset: 4'd0, eog: 1'b0, eok: 1'b0, tag: 1'b0}; wq.push_back(e);
    e = '{value: -8'sd4, offset: 4'd1, eog: 1'b0, eok: 1'b0, tag: 1'b0}; wq.push_back(e);
    e = '{value: 8'd6,  offset: 4'd3, eog: 1'b1, eok: 1'b0, tag: 1'b0}; wq.push_back(e);
    e = '{value: 8'd8,  offset: 4'd1, eog: 1'b0, eok: 1'b0, tag: 1'b0}; wq.push_back(e);
    e = '{value: 8'd10, offset: 4'd3, eog: 1'b1, eok: 1'b1, tag: 1'b0}; wq.push_back(e);
    wait_drained(200);
    check(fires == 7, $sformatf("toy example: %0d selection decisions, expected 7", fires));
    check(last_fire - first_fire == 6,
          $sformatf("toy example: decisions span %0d clocks, expected 7", last_fire - first_fire + 1));
    check(po.size() == 2, $sformatf("toy example: %0d pairs, expected 2", po.size()));
    if (po.size() == 2) begin
      check(pair_product(po[0]) == -12 && !po[0].last, "toy example: aligned pair (f0,1 x w1,0)");
      check(po[1].last && pair_product(po[1]) == 0, "toy example: closing zero pair");
    end
  endtask

  // ------------------------------------------------------------------
  task automatic random_kernels(int nk, int groups, int fden, int wden, int wide, int stall);
    int fd[$], wd[$];
    int expect_sum[$];
    int acc, k;
    reset_all();
    stall_pct = stall;
    for (int n = 0; n < nk; n++) begin
      fd.delete(); wd.delete();
      for (int i = 0; i < groups*GROUP_LEN; i++) begin
        fd.push_back(rand_val(fden, wide));
        wd.push_back(rand_val(wden, wide));
      end
      enc_groups(fd, 1'b0, fq);
      enc_groups(wd, 1'b1, wq);
      expect_sum.push_back(dot(fd, wd));
    end
    wait_drained(20000);
    check(fi == fq.size() && wi == wq.size(), "random: all input consumed");
    // flows forwarded unchanged
    check(fo.size() == fq.size() && wo.size() == wq.size(), "random: forwarded flow lengths");
    for (int i = 0; i < fo.size() && i < fq.size(); i++)
      if (fo[i] != to_feat(fq[i])) begin check(0, $sformatf("feature %0d forwarded wrong", i)); break; end
    for (int i = 0; i < wo.size() && i < wq.size(); i++)
      if (wo[i] != to_wgt(wq[i])) begin check(0, $sformatf("weight %0d forwarded wrong", i)); break; end
    // dot products
    acc = 0; k = 0;
    foreach (po[i]) begin
      acc += pair_product(po[i]);
      if (po[i].last) begin
        if (k < nk) check(acc == expect_sum[k],
                          $sformatf("kernel %0d: sum %0d expected %0d", k, acc, expect_sum[k]));
        k++; acc = 0;
      end
    end
    check(k == nk, $sformatf("random: %0d kernels closed, expected %0d", k, nk));
  endtask

  initial begin
    f_in_valid = 0; w_in_valid = 0; f_out_ready = 1; w_out_ready = 1; pair_ready = 1;
    f_in = '0; w_in = '0; fi = 0; wi = 0;
    toy_example();
    random_kernels(20, 3, 50, 40, 0, 0);    // 8-bit only, no stalls
    random_kernels(20, 3, 60, 60, 30, 30);  // mixed precision, random stalls
    random_kernels(10, 2, 100, 100, 50, 50);// dense, many 16x16 meetings
    random_kernels(10, 2, 5, 5, 10, 20);    // very sparse, many empty groups
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
