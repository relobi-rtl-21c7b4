// tb_relobi_cut: one relOBI pipeline register between a test manager and a test subordinate.
//
// Test managers (tb_rel_mgr) issue random requests over relOBI links and
// check every response in order; test subordinates (tb_rel_sbr) check that
// each request arrives intact, at the right port and stable until granted.
// From cycle 40 on, single faults are injected on the managers'
// links: at most one wire per cycle, chosen at random among all req copies
// and packet bits of all managers (about one cycle in eight). The design
// must hide every one of them (no failed check, no uncorrectable report)
// and must report corrections. Latency: the first request (only manager 0
// active) must reach a subordinate 1 cycle(s) after it is raised.
// Also requires that the register held a request while the subordinate
// withheld its grant.
module tb_relobi_cut;
  import relobi_pkg::*;

  localparam int NumMgr = 1;
  localparam int NumSbr = 1;
  localparam int NumReq = 1500;

  logic clk = 1'b0, rst_n = 1'b0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always_ff @(posedge clk) cyc <= cyc + 1;

  logic [NumMgr-1:0][2:0] m_req, m_gnt, m_rvalid;
  relobi_a_t [NumMgr-1:0] m_a;
  relobi_r_t [NumMgr-1:0] m_r;
  logic [NumSbr-1:0][2:0] s_req, s_gnt, s_rvalid;
  relobi_a_t [NumSbr-1:0] s_a;
  relobi_r_t [NumSbr-1:0] s_r;
  relobi_err_t            err;

  relobi_cut dut (
    .clk_i(clk), .rst_ni(rst_n),
    .sbr_req_i(m_req[0]), .sbr_gnt_o(m_gnt[0]), .sbr_a_i(m_a[0]), .sbr_rvalid_o(m_rvalid[0]), .sbr_r_o(m_r[0]),
    .mgr_req_o(s_req[0]), .mgr_gnt_i(s_gnt[0]), .mgr_a_o(s_a[0]), .mgr_rvalid_i(s_rvalid[0]), .mgr_r_i(s_r[0]),
    .err_o(err));

  int     mc[NumMgr], mf[NumMgr], mi[NumMgr], md[NumMgr];
  longint mfirst[NumMgr];
  int     sc[NumSbr], sf[NumSbr], sa[NumSbr], scorr[NumSbr];
  longint sfirst[NumSbr];
  logic [NumMgr-1:0] enable, inject;
  logic              inj_on;

  for (genvar m = 0; m < NumMgr; m++) begin : gen_mgr
    tb_rel_mgr #(.Id(m), .NumReq(NumReq), .NumRegions(1), .ReqPct(70)) i_mgr (
      .clk_i(clk), .rst_ni(rst_n), .enable_i(enable[m]), .inject_i(inject[m]), .cyc_i(cyc),
      .req_o(m_req[m]), .gnt_i(m_gnt[m]), .a_o(m_a[m]), .rvalid_i(m_rvalid[m]), .r_i(m_r[m]),
      .checks(mc[m]), .failures(mf[m]), .issued(mi[m]), .completed(md[m]),
      .first_req_cycle(mfirst[m]));
  end
  for (genvar s = 0; s < NumSbr; s++) begin : gen_sbr
    tb_rel_sbr #(.Idx(s), .GntPct(50), .MaxLat(3)) i_sbr (
      .clk_i(clk), .rst_ni(rst_n), .cyc_i(cyc),
      .req_i(s_req[s]), .gnt_o(s_gnt[s]), .a_i(s_a[s]), .rvalid_o(s_rvalid[s]), .r_o(s_r[s]),
      .checks(sc[s]), .failures(sf[s]), .accepted(sa[s]), .corrected(scorr[s]),
      .first_seen_cycle(sfirst[s]));
  end

  // one fault at a time: pick at most one manager link per cycle
  always_ff @(posedge clk) begin
    inject <= '0;
    if (inj_on && $urandom_range(7, 0) == 0) inject[$urandom_range(NumMgr - 1, 0)] <= 1'b1;
  end

  int n_corr = 0, n_uncorr = 0;
  int n_hold = 0;

  always_ff @(posedge clk) if (rst_n) begin
    n_corr   <= n_corr + int'(err.corrected);
    n_uncorr <= n_uncorr + int'(err.uncorrectable);
    n_hold <= n_hold + int'(dut.valid_q[0] && !s_gnt[0][0]);
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit all_done();
    for (int m = 0; m < NumMgr; m++) if (md[m] != NumReq) return 0;
    return 1;
  endfunction

  initial begin
    enable = '0; inj_on = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    enable[0] = 1'b1;
    repeat (40 - 3) @(posedge clk);
    begin
      automatic longint first_seen = -1;
      for (int s = 0; s < NumSbr; s++)
        if (sfirst[s] >= 0 && (first_seen < 0 || sfirst[s] < first_seen)) first_seen = sfirst[s];
      check(mfirst[0] >= 0 && first_seen - mfirst[0] == 1,
            $sformatf("request latency %0d, expected 1", first_seen - mfirst[0]));
      check(n_corr == 0, "correction reported before any fault");
    end
    enable = '1; inj_on = 1'b1;
    while (!all_done()) @(posedge clk);
    inj_on = 1'b0;
    repeat (20) @(posedge clk);
    begin
      automatic int acc = 0, sc_sum = 0;
      for (int m = 0; m < NumMgr; m++) begin
        checks += mc[m]; failures += mf[m];
        check(mi[m] == NumReq && md[m] == NumReq, $sformatf("manager %0d: %0d/%0d", m, mi[m], md[m]));
      end
      for (int s = 0; s < NumSbr; s++) begin
        checks += sc[s]; failures += sf[s]; acc += sa[s]; sc_sum += scorr[s];
      end
      check(acc == NumMgr * NumReq, $sformatf("subordinates accepted %0d", acc));
      $display("corrections reported: %0d, uncorrectable: %0d, corrected words at subordinates: %0d",
               n_corr, n_uncorr, sc_sum);
      check(n_corr > 0, "no correction reported although faults were injected");
      check(n_uncorr == 0, "uncorrectable error reported for single faults");
    end
    $display("pipeline holds: %0d", n_hold);
    check(n_hold > 0, "register never held a request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Progress watchdog: 20 failures, or 2000 cycles without a completed
  // transaction (a deadlock), end the test early.
  initial begin
    automatic int last = -1, idle = 0, sum, fsum;
    forever begin
      @(posedge clk);
      sum = 0;
      fsum = failures;
      for (int m = 0; m < NumMgr; m++) begin sum += md[m]; fsum += mf[m]; end
      for (int s = 0; s < NumSbr; s++) fsum += sf[s];
      if (fsum >= 20) begin
        for (int m = 0; m < NumMgr; m++) begin checks += mc[m]; failures += mf[m]; end
        for (int s = 0; s < NumSbr; s++) begin checks += sc[s]; failures += sf[s]; end
        $display("FAIL: stopping after %0d failures", fsum);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
      if (sum != last || !rst_n || all_done()) begin
        last = sum;
        idle = 0;
      end else if (++idle == 2000) begin
        failures++;
        $display("FAIL: no transaction completed for 2000 cycles (deadlock)");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
