// tb_s2_pe: self-checking testbench of one processing element.
// The PE gets a run of convolutions: for each, G random sparse feature
// groups and G weight groups (8- and 16-bit values mixed), compressed by the
// reference encoder, the kernel closed by end-of-kernel. The PE sits at
// place 1 of its result chain, so for every convolution one result arrives
// from above and must leave before the PE's own one. Checks: every result
// equals the dot product of the dense vectors; results leave in chain order;
// both flows leave the PE unchanged and complete (to the next PEs); the MAC
// runs only on enable clocks (one enable in 4).
module tb_s2_pe;
  import s2_pkg::*;
  import tb_s2_util::*;

  localparam int NCONV = 12;
  localparam int G     = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        mac_en;
  logic [4:0]  pos;
  logic        f_in_valid, f_in_ready, f_out_valid, f_out_ready;
  logic        w_in_valid, w_in_ready, w_out_valid, w_out_ready;
  feat_t       f_in, f_out;
  wgt_t        w_in, w_out;
  logic        res_up_valid, res_up_ready, res_dn_valid, res_dn_ready;
  logic [31:0] res_up, res_dn;
  logic        ev_sel, ev_pair, ev_mac, ev_wf_full, ev_push_block, ev_rf_stall;

  s2_pe dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  elem_t fq[$], wq[$];
  int    upq[$], exp_res[$], got_res[$];
  feat_t got_f[$];
  wgt_t  got_w[$];
  int    npairs = 0, fi = 0, wi = 0, ui = 0, cyc = 0, mac_off_en = 0, macs = 0, wf_full = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    mac_en <= ((cyc + 1) % 4 == 3);
    if (rst_n) begin
      if (f_in_valid && f_in_ready) fi++;
      if (w_in_valid && w_in_ready) wi++;
      if (res_up_valid && res_up_ready) ui++;
      if (f_out_valid && f_out_ready) got_f.push_back(f_out);
      if (w_out_valid && w_out_ready) got_w.push_back(w_out);
      if (res_dn_valid && res_dn_ready) got_res.push_back(int'(res_dn));
      if (ev_mac) begin macs++; if (!mac_en) mac_off_en++; end
      if (ev_wf_full) wf_full++;
    end
    f_in_valid   <= (fi < fq.size()) && ($urandom_range(4, 0) != 0);
    f_in         <= (fi < fq.size()) ? to_feat(fq[fi]) : '0;
    w_in_valid   <= (wi < wq.size()) && ($urandom_range(4, 0) != 0);
    w_in         <= (wi < wq.size()) ? to_wgt(wq[wi]) : '0;
    res_up_valid <= (ui < upq.size()) && ($urandom_range(3, 0) == 0);
    res_up       <= (ui < upq.size()) ? 32'(upq[ui]) : '0;
    f_out_ready  <= ($urandom_range(4, 0) != 0);
    w_out_ready  <= ($urandom_range(4, 0) != 0);
    res_dn_ready <= ($urandom_range(3, 0) != 0);
  end

  initial begin
    automatic int n = 0;
    f_in_valid = 0; w_in_valid = 0; res_up_valid = 0; f_in = '0; w_in = '0; res_up = '0;
    f_out_ready = 0; w_out_ready = 0; res_dn_ready = 0; mac_en = 0; pos = 5'd1;
    for (int c = 0; c < NCONV; c++) begin
      int fv[$], wv[$], dens, wide;
      fv.delete(); wv.delete();
      dens = 10 + 15 * (c % 6);
      wide = (c % 3 == 2) ? 25 : 0;
      for (int i = 0; i < G * GROUP_LEN; i++) begin
        fv.push_back(rand_val(dens, wide));
        wv.push_back(rand_val(dens, wide));
      end
      enc_groups(fv, 1'b0, fq);
      enc_groups(wv, 1'b1, wq);
      upq.push_back(int'($urandom));
      exp_res.push_back(upq[c]);
      exp_res.push_back(dot(fv, wv));
      foreach (fv[i]) if (fv[i] != 0 && wv[i] != 0) npairs++;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while ((got_res.size() < exp_res.size() || got_f.size() < fq.size() ||
            got_w.size() < wq.size()) && n < 100000) begin
      @(negedge clk); n++;
    end
    check(got_res.size() == exp_res.size(), $sformatf("%0d results, expected %0d", got_res.size(), exp_res.size()));
    foreach (exp_res[i]) if (i < got_res.size())
      check(got_res[i] == exp_res[i], $sformatf("result %0d = %0d, expected %0d", i, got_res[i], exp_res[i]));
    check(got_f.size() == fq.size(), "feature flow forwarded completely");
    check(got_w.size() == wq.size(), "weight flow forwarded completely");
    foreach (got_f[i]) if (i < fq.size() && got_f[i] != to_feat(fq[i])) begin
      check(0, $sformatf("forwarded feature %0d differs", i)); break;
    end
    foreach (got_w[i]) if (i < wq.size() && got_w[i] != to_wgt(wq[i])) begin
      check(0, $sformatf("forwarded weight %0d differs", i)); break;
    end
    check(macs > 0 && mac_off_en == 0, $sformatf("%0d MAC operations, %0d off the enable", macs, mac_off_en));
    $display("tb_s2_pe: %0d clocks, %0d MAC operations, %0d clocks waiting on a full WF-FIFO, %0d nonzero products", n, macs, wf_full, npairs);
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
