// tb_s2_pe_array: self-checking testbench of the systolic PE array (4 x 4).
// Each row gets a feature flow of WOUT windows, each column a weight flow
// that repeats its kernel WOUT times (one repetition per window, closed by
// end-of-kernel). Windows and kernels are random sparse 8/16-bit vectors of
// L groups. PE(r,c) must deliver dot(window[r][x], kernel[c]) for every x.
// Results leave through two chains per column (even and odd rows); within a
// window the chain delivers its rows top to bottom. Checks every result, in
// that order, against the dense dot product, and that the array finishes
// with no flow left over.
module tb_s2_pe_array;
  import s2_pkg::*;
  import tb_s2_util::*;

  localparam int ROWS = 4;
  localparam int COLS = 4;
  localparam int WOUT = 4;
  localparam int L    = 2;       // groups per window

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 mac_en;
  logic [ROWS-1:0]      f_valid, f_ready;
  feat_t                f_data [ROWS];
  logic [COLS-1:0]      w_valid, w_ready;
  wgt_t                 w_data [COLS];
  logic [2*COLS-1:0]    res_valid, res_ready;
  logic [ACC_W-1:0]     res_data [2*COLS];
  logic [ROWS*COLS-1:0] ev_sel, ev_pair, ev_mac, ev_wf_full, ev_push_block, ev_rf_stall;

  s2_pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  elem_t fq [ROWS][$];
  elem_t wq [COLS][$];
  int    fi [ROWS];
  int    wi [COLS];
  int    got [2*COLS][$];
  int    exp_q [2*COLS][$];
  int    win [ROWS][WOUT][$];
  int    ker [COLS][$];
  int    cyc = 0, n_rf_stall = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    mac_en <= ((cyc + 1) % 4 == 3);
    for (int r = 0; r < ROWS; r++) begin
      if (rst_n && f_valid[r] && f_ready[r]) fi[r]++;
      f_valid[r] <= (fi[r] < fq[r].size()) && ($urandom_range(3, 0) != 0);
      f_data[r]  <= (fi[r] < fq[r].size()) ? to_feat(fq[r][fi[r]]) : '0;
    end
    for (int c = 0; c < COLS; c++) begin
      if (rst_n && w_valid[c] && w_ready[c]) wi[c]++;
      w_valid[c] <= (wi[c] < wq[c].size()) && ($urandom_range(3, 0) != 0);
      w_data[c]  <= (wi[c] < wq[c].size()) ? to_wgt(wq[c][wi[c]]) : '0;
    end
    for (int i = 0; i < 2*COLS; i++)
      if (rst_n && res_valid[i] && res_ready[i]) got[i].push_back(int'($signed(res_data[i])));
    res_ready <= (2*COLS)'($urandom);
    if (rst_n) n_rf_stall += $countones(ev_rf_stall);
  end

  initial begin
    automatic int n = 0, total = 0, ngot = 0;
    f_valid = '0; w_valid = '0; res_ready = '0; mac_en = 0;
    foreach (f_data[r]) begin f_data[r] = '0; fi[r] = 0; end
    foreach (w_data[c]) begin w_data[c] = '0; wi[c] = 0; end
    for (int c = 0; c < COLS; c++)
      for (int i = 0; i < L*GROUP_LEN; i++) ker[c].push_back(rand_val(45, 10));
    for (int r = 0; r < ROWS; r++)
      for (int x = 0; x < WOUT; x++) begin
        for (int i = 0; i < L*GROUP_LEN; i++) win[r][x].push_back(rand_val(45, 10));
        enc_groups(win[r][x], 1'b0, fq[r]);
      end
    for (int c = 0; c < COLS; c++)
      for (int x = 0; x < WOUT; x++) enc_groups(ker[c], 1'b1, wq[c]);
    for (int c = 0; c < COLS; c++)
      for (int p = 0; p < 2; p++)
        for (int x = 0; x < WOUT; x++)
          for (int r = p; r < ROWS; r += 2) begin
            exp_q[2*c+p].push_back(dot(win[r][x], ker[c]));
            total++;
          end
    repeat (3) @(negedge clk);
    rst_n = 1;
    do begin
      @(negedge clk); n++;
      ngot = 0;
      foreach (got[i]) ngot += got[i].size();
    end while (ngot < total && n < 100000);
    repeat (20) @(negedge clk);
    for (int i = 0; i < 2*COLS; i++) begin
      check(got[i].size() == exp_q[i].size(), $sformatf("chain %0d: %0d results, expected %0d", i, got[i].size(), exp_q[i].size()));
      for (int j = 0; j < got[i].size() && j < exp_q[i].size(); j++)
        check(got[i][j] == exp_q[i][j], $sformatf("chain %0d result %0d: %0d expected %0d", i, j, got[i][j], exp_q[i][j]));
    end
    for (int r = 0; r < ROWS; r++) check(fi[r] == fq[r].size(), $sformatf("row %0d feature flow consumed", r));
    for (int c = 0; c < COLS; c++) check(wi[c] == wq[c].size(), $sformatf("column %0d weight flow consumed", c));
    $display("tb_s2_pe_array: %0d results in %0d clocks, %0d RF stall clocks", total, n, n_rf_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
