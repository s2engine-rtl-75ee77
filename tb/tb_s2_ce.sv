// tb_s2_ce: self-checking testbench of one collective element (a middle
// CE, with a CE above and below). With K = 3 each slice is: period 0 its own
// group from the FB, periods 1 and 2 the next two groups from the FIFO of
// the CE below. Checks the flow to the PE row, that the copies offered to
// the CE above are exactly the groups of periods 0 and 1, the K = 1 case
// (every group from the FB, no copies) and reuse off.
module tb_s2_ce;
  import s2_pkg::*;
  import tb_s2_util::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] cfg_k;
  logic       cfg_reuse;
  logic       fb_valid, fb_ready, nb_valid, nb_ready, cp_valid, cp_ready, pe_valid, pe_ready;
  logic       ev_fb_read, ev_reuse;
  feat_t      fb, nb, cp, pe;

  s2_ce dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  feat_t fbq[$], nbq[$], exp_pe[$], exp_cp[$], got_pe[$], got_cp[$];
  int fi, ni;

  function automatic void add_group(int label, ref feat_t q[$]);
    int n = 1 + $urandom_range(4, 0);
    for (int i = 0; i < n; i++) begin
      feat_t e;
      e = '{value: 8'(label), offset: 4'(i*3), eog: (i == n-1), tag: 1'b0};
      q.push_back(e);
    end
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (fb_valid && fb_ready) fi++;
      if (nb_valid && nb_ready) ni++;
      if (pe_valid && pe_ready) got_pe.push_back(pe);
      if (cp_valid && cp_ready) got_cp.push_back(cp);
    end
    fb_valid <= (fi < fbq.size()) && ($urandom_range(3, 0) != 0);
    fb       <= (fi < fbq.size()) ? fbq[fi] : '0;
    nb_valid <= (ni < nbq.size()) && ($urandom_range(3, 0) != 0);
    nb       <= (ni < nbq.size()) ? nbq[ni] : '0;
    pe_ready <= ($urandom_range(3, 0) != 0);
    cp_ready <= ($urandom_range(3, 0) != 0);
  end

  task automatic run(int k, bit reuse, int slices);
    feat_t tmp[$];
    int n = 0;
    rst_n = 0;
    fbq.delete(); nbq.delete(); exp_pe.delete(); exp_cp.delete(); got_pe.delete(); got_cp.delete();
    fi = 0; ni = 0;
    for (int s = 0; s < slices; s++)
      for (int ky = 0; ky < k; ky++) begin
        tmp.delete();
        add_group(s*16 + ky, tmp);
        foreach (tmp[i]) begin
          exp_pe.push_back(tmp[i]);
          if (reuse && ky < k-1) exp_cp.push_back(tmp[i]);
          if (!reuse || ky == 0) fbq.push_back(tmp[i]); else nbq.push_back(tmp[i]);
        end
      end
    cfg_k = 4'(k); cfg_reuse = reuse;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while ((got_pe.size() < exp_pe.size() || got_cp.size() < exp_cp.size()) && n < 20000) begin
      @(negedge clk); n++;
    end
    repeat (10) @(negedge clk);
    check(got_pe.size() == exp_pe.size(), $sformatf("k=%0d reuse=%0d: %0d elements to PE, expected %0d", k, reuse, got_pe.size(), exp_pe.size()));
    check(got_cp.size() == exp_cp.size(), $sformatf("k=%0d reuse=%0d: %0d copies, expected %0d", k, reuse, got_cp.size(), exp_cp.size()));
    foreach (got_pe[i]) if (i < exp_pe.size() && got_pe[i] != exp_pe[i]) begin
      check(0, $sformatf("k=%0d: PE element %0d label %0d expected %0d", k, i, got_pe[i].value, exp_pe[i].value)); break;
    end
    foreach (got_cp[i]) if (i < exp_cp.size() && got_cp[i] != exp_cp[i]) begin
      check(0, $sformatf("k=%0d: copy %0d label %0d expected %0d", k, i, got_cp[i].value, exp_cp[i].value)); break;
    end
  endtask

  initial begin
    fb_valid = 0; nb_valid = 0; pe_ready = 0; cp_ready = 0; fb = '0; nb = '0;
    cfg_k = 4'd3; cfg_reuse = 1;
    run(3, 1'b1, 8);
    run(5, 1'b1, 4);
    run(1, 1'b1, 8);
    run(3, 1'b0, 6);
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
