// tb_s2_ce_array: self-checking testbench of the CE chain (3 rows).
// Input row y of slice s is a labelled group G(y,s) (every element's value
// holds the label; some groups contain split 16-bit values, whose low byte
// carries EOG without ending the group). With a 3x3 kernel, row r must
// receive G(r,s), G(r+1,s), G(r+2,s) for every slice - rows 0..4 of the
// input for 3 rows of PEs, as in the overlap-reuse walk-through. Checks the
// flow of every row with reuse on (FB r < 2 holds only its own row, the
// bottom FB holds rows 2..4) and with reuse off (every FB holds its whole
// flow), with random stalls on every row; counts FB reads and reused
// elements.
module tb_s2_ce_array;
  import s2_pkg::*;
  import tb_s2_util::*;

  localparam int ROWS = 3;
  localparam int K = 3;
  localparam int SLICES = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]      cfg_k;
  logic            cfg_reuse;
  logic [ROWS-1:0] fb_valid, fb_ready, pe_valid, pe_ready, ev_fb_read, ev_reuse;
  feat_t           fb_data [ROWS], pe_data [ROWS];

  s2_ce_array #(.ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  elem_t grp [ROWS+K-1][SLICES][$];
  elem_t fbq [ROWS][$];
  feat_t exp_q [ROWS][$];
  feat_t got [ROWS][$];
  int    fi [ROWS];
  int    n_fb, n_reuse;

  // Group of 1..6 elements labelled y*16+s; one in three groups has a split value.
  task automatic make_groups();
    for (int y = 0; y < ROWS+K-1; y++)
      for (int s = 0; s < SLICES; s++) begin
        int n = 1 + $urandom_range(5, 0);
        bit split = ($urandom_range(2, 0) == 0);
        grp[y][s].delete();
        for (int i = 0; i < n; i++) begin
          elem_t e;
          e = '{value: 8'(y*16+s), offset: 4'(i*2), eog: (i == n-1), eok: 1'b0, tag: 1'b0};
          if (split && i == n-1) begin
            e.tag = 1'b1;
            grp[y][s].push_back(e);
          end
          grp[y][s].push_back(e);
        end
      end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      for (int r = 0; r < ROWS; r++) begin
        if (fb_valid[r] && fb_ready[r]) fi[r]++;
        if (pe_valid[r] && pe_ready[r]) got[r].push_back(pe_data[r]);
      end
      n_fb    += $countones(ev_fb_read);
      n_reuse += $countones(ev_reuse);
    end
    for (int r = 0; r < ROWS; r++) begin
      fb_valid[r] <= (fi[r] < fbq[r].size()) && ($urandom_range(9, 0) != 0);
      fb_data[r]  <= (fi[r] < fbq[r].size()) ? to_feat(fbq[r][fi[r]]) : '0;
      pe_ready[r] <= ($urandom_range(9, 0) < 7);
    end
  end

  task automatic run(bit reuse);
    int total = 0, stored = 0, n = 0;
    rst_n = 0;
    make_groups();
    for (int r = 0; r < ROWS; r++) begin
      fbq[r].delete(); exp_q[r].delete(); got[r].delete(); fi[r] = 0;
      for (int s = 0; s < SLICES; s++)
        for (int ky = 0; ky < K; ky++) begin
          foreach (grp[r+ky][s][i]) exp_q[r].push_back(to_feat(grp[r+ky][s][i]));
          if (!reuse || r == ROWS-1 || ky == 0)
            foreach (grp[r+ky][s][i]) fbq[r].push_back(grp[r+ky][s][i]);
        end
      total  += exp_q[r].size();
      stored += fbq[r].size();
    end
    cfg_k = 4'(K); cfg_reuse = reuse; n_fb = 0; n_reuse = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (n < total && n < 100000) begin
      @(negedge clk);
      n = 0;
      foreach (got[r]) n += got[r].size();
    end
    repeat (5) @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      check(got[r].size() == exp_q[r].size(),
            $sformatf("reuse=%0d row %0d: %0d elements, expected %0d", reuse, r, got[r].size(), exp_q[r].size()));
      foreach (got[r][i])
        if (i < exp_q[r].size() && got[r][i] != exp_q[r][i]) begin
          check(0, $sformatf("reuse=%0d row %0d element %0d: label %0d expected %0d",
                             reuse, r, i, got[r][i].value, exp_q[r][i].value));
          break;
        end
    end
    check(n_fb == stored, $sformatf("reuse=%0d: %0d FB reads, expected %0d", reuse, n_fb, stored));
    check(n_fb + n_reuse == total, "every element reached its row once");
    if (reuse) check(stored < total, "overlap reuse stores fewer elements");
    else check(n_reuse == 0, "no reuse when switched off");
  endtask

  initial begin
    fb_valid = '0; pe_ready = '0; cfg_k = 4'd3; cfg_reuse = 1;
    foreach (fb_data[r]) fb_data[r] = '0;
    foreach (fi[r]) fi[r] = 0;
    run(1'b1);
    run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
