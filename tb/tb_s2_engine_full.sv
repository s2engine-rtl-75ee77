// tb_s2_engine_full: the engine at its full default size (32 x 32 PEs,
// 8192-entry FBs and WBs, MAC at a quarter of the selection clock) taken
// through one complete layer: K = 3 with overlap reuse, 32 channels, four
// output positions per row, mixed 8/16-bit sparse data. Same method and
// checks as the reduced end-to-end testbench: the flows are built and
// compressed here, loaded through the buffer write ports, and every one of
// the 32 x 32 x 2 outputs is compared, in result-chain order, with a direct
// convolution; each mechanism must have happened at least once.
module tb_s2_engine_full;
  import s2_pkg::*;
  import tb_s2_util::*;

  localparam int ROWS = 32;
  localparam int COLS = 32;
  localparam int FREQ_RATIO = 4;
  localparam int FB_DEPTH = 8192;
  localparam int WB_DEPTH = 8192;
  localparam int FB_AW = $clog2(FB_DEPTH);
  localparam int WB_AW = $clog2(WB_DEPTH);
  localparam int CG = 2;          // channel groups
  localparam int WOUT = 4;        // output positions per row
  localparam int MAXK = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [ROWS-1:0]      fb_wr_en;
  logic [FB_AW-1:0]     fb_wr_addr;
  feat_t                fb_wr_data;
  logic [COLS-1:0]      wb_wr_en;
  logic [WB_AW-1:0]     wb_wr_addr;
  wgt_t                 wb_wr_data;
  logic [3:0]           cfg_k;
  logic                 cfg_reuse;
  logic [FB_AW:0]       fb_len [ROWS];
  logic [WB_AW:0]       wb_len [COLS];
  logic [15:0]          wb_rep;
  logic                 start, busy;
  logic [2*COLS-1:0]    res_valid, res_ready;
  logic [ACC_W-1:0]     res_data [2*COLS];
  logic [ROWS*COLS-1:0] ev_sel, ev_pair, ev_mac, ev_wf_full, ev_push_block, ev_rf_stall;
  logic [ROWS-1:0]      ev_fb_read, ev_reuse;
  logic [COLS-1:0]      ev_wb_read;

  s2_engine dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // mechanism counters
  longint n_sel, n_pair, n_mac, n_wf_full, n_push_block, n_rf_stall, n_fb_read, n_reuse, n_wb_read;
  int     n_wide_f, n_wide_w;
  logic   counting = 1'b0;

  always @(posedge clk) begin
    if (counting) begin
      n_sel       += $countones(ev_sel);
      n_pair      += $countones(ev_pair);
      n_mac       += $countones(ev_mac);
      n_wf_full   += $countones(ev_wf_full);
      n_push_block += $countones(ev_push_block);
      n_rf_stall  += $countones(ev_rf_stall);
      n_fb_read   += $countones(ev_fb_read);
      n_reuse     += $countones(ev_reuse);
      n_wb_read   += $countones(ev_wb_read);
    end
  end

  // result capture
  int got [2*COLS][$];
  always @(posedge clk) begin
    for (int i = 0; i < 2*COLS; i++)
      if (res_valid[i] && res_ready[i]) got[i].push_back(int'($signed(res_data[i])));
    res_ready <= '1;
  end

  int img [][][];      // [y][x][ch]
  int ker [][][][];    // [c][ky][kx][ch]

  function automatic void grp_of_img(int y, int x, int cg, ref int v[$]);
    for (int i = 0; i < GROUP_LEN; i++) v.push_back(img[y][x][cg*GROUP_LEN+i]);
  endfunction

  task automatic run(int k, bit reuse, int fden, int wden, int wide);
    int wimg = WOUT + k - 1;
    int hin  = ROWS + k - 1;
    elem_t fq [ROWS][$];
    elem_t wq [COLS][$];
    int    expect_q [2*COLS][$];
    int    total, cycles, naive;
    int    v[$];

    // ---- data ----
    img = new[hin];
    foreach (img[y]) begin
      img[y] = new[wimg];
      foreach (img[y][x]) begin
        img[y][x] = new[CG*GROUP_LEN];
        foreach (img[y][x][ch]) img[y][x][ch] = rand_val(fden, wide);
      end
    end
    ker = new[COLS];
    foreach (ker[c]) begin
      ker[c] = new[k];
      foreach (ker[c][ky]) begin
        ker[c][ky] = new[k];
        foreach (ker[c][ky][kx]) begin
          ker[c][ky][kx] = new[CG*GROUP_LEN];
          foreach (ker[c][ky][kx][ch]) ker[c][ky][kx][ch] = rand_val(wden, wide);
        end
      end
    end
    n_wide_f = 0; n_wide_w = 0;
    foreach (img[y, x, ch]) if (img[y][x][ch] > 127 || img[y][x][ch] < -128) n_wide_f++;
    foreach (ker[c, ky, kx, ch]) if (ker[c][ky][kx][ch] > 127 || ker[c][ky][kx][ch] < -128) n_wide_w++;

    // ---- compressed flows ----
    for (int c = 0; c < COLS; c++) begin
      v.delete();
      for (int kx = 0; kx < k; kx++)
        for (int cg = 0; cg < CG; cg++)
          for (int ky = 0; ky < k; ky++)
            for (int i = 0; i < GROUP_LEN; i++) v.push_back(ker[c][ky][kx][cg*GROUP_LEN+i]);
      enc_groups(v, 1'b1, wq[c]);
    end
    for (int r = 0; r < ROWS; r++) begin
      bit all_ky = !reuse || (r == ROWS - 1);
      for (int x = 0; x < WOUT; x++)
        for (int kx = 0; kx < k; kx++)
          for (int cg = 0; cg < CG; cg++)
            for (int ky = 0; ky < (all_ky ? k : 1); ky++) begin
              v.delete();
              grp_of_img(r + ky, x + kx, cg, v);
              enc_groups(v, 1'b0, fq[r]);
            end
    end

    // ---- expected results in chain order ----
    total = 0;
    for (int c = 0; c < COLS; c++)
      for (int p = 0; p < 2; p++)
        for (int x = 0; x < WOUT; x++)
          for (int r = p; r < ROWS; r += 2) begin
            int s = 0;
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++)
                for (int ch = 0; ch < CG*GROUP_LEN; ch++)
                  s += img[r+ky][x+kx][ch] * ker[c][ky][kx][ch];
            expect_q[2*c+p].push_back(s);
            total++;
          end

    // ---- load buffers ----
    for (int r = 0; r < ROWS; r++) begin
      check(fq[r].size() <= FB_DEPTH, "feature flow fits its FB");
      foreach (fq[r][i]) begin
        @(negedge clk);
        fb_wr_en = '0; fb_wr_en[r] = 1'b1;
        fb_wr_addr = FB_AW'(i); fb_wr_data = to_feat(fq[r][i]);
      end
      fb_len[r] = (FB_AW+1)'(fq[r].size());
    end
    for (int c = 0; c < COLS; c++) begin
      check(wq[c].size() <= WB_DEPTH, "weight flow fits its WB");
      foreach (wq[c][i]) begin
        @(negedge clk);
        wb_wr_en = '0; wb_wr_en[c] = 1'b1;
        wb_wr_addr = WB_AW'(i); wb_wr_data = to_wgt(wq[c][i]);
      end
      wb_len[c] = (WB_AW+1)'(wq[c].size());
    end
    @(negedge clk);
    fb_wr_en = '0; wb_wr_en = '0;
    cfg_k = 4'(k); cfg_reuse = reuse; wb_rep = 16'(WOUT);
    foreach (got[i]) got[i].delete();
    n_sel = 0; n_pair = 0; n_mac = 0; n_wf_full = 0; n_push_block = 0; n_rf_stall = 0;
    n_fb_read = 0; n_reuse = 0; n_wb_read = 0;

    // ---- run ----
    start = 1'b1; counting = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    begin
      int n_got;
      do begin
        @(negedge clk);
        cycles++;
        n_got = 0;
        foreach (got[i]) n_got += got[i].size();
      end while (n_got < total && cycles < 400000);
    end
    counting = 1'b0;
    repeat (20) @(negedge clk);

    // ---- check ----
    for (int i = 0; i < 2*COLS; i++) begin
      check(got[i].size() == expect_q[i].size(),
            $sformatf("k=%0d reuse=%0d chain %0d: %0d results, expected %0d",
                      k, reuse, i, got[i].size(), expect_q[i].size()));
      for (int j = 0; j < got[i].size() && j < expect_q[i].size(); j++)
        check(got[i][j] == expect_q[i][j],
              $sformatf("k=%0d reuse=%0d chain %0d result %0d: %0d expected %0d",
                        k, reuse, i, j, got[i][j], expect_q[i][j]));
    end
    check(!busy, "engine idle after the run");
    naive = WOUT * k * k * CG * GROUP_LEN * FREQ_RATIO;
    $display("run k=%0d reuse=%0d: %0d clocks (dense array: %0d clocks at the MAC rate), speedup %0.2f",
             k, reuse, cycles, naive, real'(naive) / real'(cycles));
    $display("  selections=%0d pairs=%0d macs=%0d wf_full=%0d push_blocked=%0d rf_stalls=%0d fb_reads=%0d reused=%0d wb_reads=%0d wide_f=%0d wide_w=%0d",
             n_sel, n_pair, n_mac, n_wf_full, n_push_block, n_rf_stall, n_fb_read, n_reuse, n_wb_read, n_wide_f, n_wide_w);
    check(n_sel > 0 && n_pair > 0 && n_mac > 0, "selection, aligned pairs and MACs happened");
    check(n_wide_f > 0 && n_wide_w > 0, "16-bit values in both flows");
    check(n_wf_full > 0, "selection waited for the slower MAC (WF-FIFO full)");
    check(n_push_block > 0, "a push waited for a full neighbour FIFO");
    check(n_rf_stall > 0, "RF stall happened");
    if (reuse && k > 1) begin
      check(n_reuse > 0, "overlap reuse happened");
      // rows above the bottom read only one group in K from their FB
      check(n_fb_read < n_fb_read + n_reuse, "FB reads saved by reuse");
    end else begin
      check(n_reuse == 0, "no reuse with reuse off or K=1");
    end
    begin
      int fb_total = 0;
      foreach (fq[r]) fb_total += fq[r].size();
      check(n_fb_read == longint'(fb_total), $sformatf("each FB entry read once (%0d of %0d)", n_fb_read, fb_total));
    end
    check(n_pair < n_sel, "sparsity skipped selections without pairs");
    check(cycles < naive, "faster than the dense array");
  endtask

  initial begin
    fb_wr_en = '0; wb_wr_en = '0; fb_wr_addr = '0; wb_wr_addr = '0;
    fb_wr_data = '0; wb_wr_data = '0; cfg_k = 4'd3; cfg_reuse = 1'b1;
    wb_rep = '0; start = 1'b0;
    foreach (fb_len[i]) fb_len[i] = '0;
    foreach (wb_len[i]) wb_len[i] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (8) @(negedge clk);
    run(3, 1'b1, 40, 35, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
