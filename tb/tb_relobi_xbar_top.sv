// tb_relobi_xbar_top: end-to-end test of the 6x8 relOBI interconnect at its
// default parameters.
//
// Six plain-OBI test managers each issue 1000 random transactions (reads and
// writes to random subordinates); eight plain-OBI test subordinates grant at
// random and answer after 1..(s+1) cycles. Every response is checked against
// the one the addressed subordinate must give, in order; every request is
// checked for correct routing and for OBI stability while waiting for grant.
//
// Latency: during the first cycles only manager 0 is active, and its first
// request must reach a subordinate port exactly two cycles after it is
// raised (two pipeline stages, no extra cycle for the protection).
//
// The test also counts how often each mechanism of the interconnect was
// exercised and fails if one never happened: round-robin contention at a
// multiplexer, an arbiter lock, a demultiplexer stall for response ordering,
// a demultiplexer stall at its outstanding limit, a full multiplexer FIFO,
// a pipeline stage holding a request, and transfers to different
// subordinates in the same cycle. Without injected faults, err_o must stay
// low throughout.
module tb_relobi_xbar_top;
  import relobi_pkg::*;

  localparam int NumMgr      = 6;
  localparam int NumSbr      = 8;
  localparam int NumMaxTrans = 4;
  localparam int NumReq      = 1000;

  logic clk = 1'b0, rst_n = 1'b0;
  longint cyc = 0;
  always #1 clk = ~clk;
  always_ff @(posedge clk) cyc <= cyc + 1;

  logic [NumMgr-1:0]   mgr_req, mgr_gnt, mgr_rvalid;
  obi_a_t [NumMgr-1:0] mgr_a;
  obi_r_t [NumMgr-1:0] mgr_r;
  logic [NumSbr-1:0]   sbr_req, sbr_gnt, sbr_rvalid;
  obi_a_t [NumSbr-1:0] sbr_a;
  obi_r_t [NumSbr-1:0] sbr_r;
  relobi_err_t         err;

  relobi_xbar_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .mgr_req_i(mgr_req), .mgr_gnt_o(mgr_gnt), .mgr_a_i(mgr_a),
    .mgr_rvalid_o(mgr_rvalid), .mgr_r_o(mgr_r),
    .sbr_req_o(sbr_req), .sbr_gnt_i(sbr_gnt), .sbr_a_o(sbr_a),
    .sbr_rvalid_i(sbr_rvalid), .sbr_r_i(sbr_r),
    .err_o(err)
  );

  int     m_checks[NumMgr], m_fail[NumMgr], m_issued[NumMgr], m_done[NumMgr];
  longint m_first[NumMgr], m_last[NumMgr];
  int     s_checks[NumSbr], s_fail[NumSbr], s_acc[NumSbr];
  longint s_first[NumSbr];
  logic [NumMgr-1:0] enable;

  for (genvar m = 0; m < NumMgr; m++) begin : gen_mgr
    tb_obi_mgr #(.Id(m), .NumReq(NumReq), .ReqPct(m == 0 ? 80 : 40 + 10 * m)) i_mgr (
      .clk_i(clk), .rst_ni(rst_n), .enable_i(enable[m]), .cyc_i(cyc),
      .req_o(mgr_req[m]), .gnt_i(mgr_gnt[m]), .a_o(mgr_a[m]),
      .rvalid_i(mgr_rvalid[m]), .r_i(mgr_r[m]),
      .checks(m_checks[m]), .failures(m_fail[m]), .issued(m_issued[m]),
      .completed(m_done[m]), .first_req_cycle(m_first[m]), .last_rsp_cycle(m_last[m])
    );
  end

  for (genvar s = 0; s < NumSbr; s++) begin : gen_sbr
    tb_obi_sbr #(.Idx(s), .GntPct(s == 7 ? 30 : 70), .MaxLat(s + 1)) i_sbr (
      .clk_i(clk), .rst_ni(rst_n), .cyc_i(cyc),
      .req_i(sbr_req[s]), .gnt_o(sbr_gnt[s]), .a_i(sbr_a[s]),
      .rvalid_o(sbr_rvalid[s]), .r_o(sbr_r[s]),
      .checks(s_checks[s]), .failures(s_fail[s]), .accepted(s_acc[s]),
      .first_seen_cycle(s_first[s])
    );
  end

  // ---- mechanism counters (copy 0 of the triplicated control) ----
  int n_contend = 0, n_lock = 0, n_order_stall = 0, n_max_stall = 0, n_fifo_full = 0;
  int n_cut_hold = 0, n_parallel = 0, n_err = 0;
  logic [NumSbr-1:0] contend, lock, fifo_full;
  logic [NumMgr-1:0] order_stall, max_stall;
  logic [NumMgr+NumSbr-1:0] cut_hold;

  for (genvar s = 0; s < NumSbr; s++) begin : gen_mon_sbr
    assign contend[s]   = $countones(dut.i_xbar.i_xbar.gen_sbr[s].i_mux.gen_copy[0].req_k) > 1;
    assign lock[s]      = dut.i_xbar.i_xbar.gen_sbr[s].i_mux.state_q[0].lock;
    assign fifo_full[s] = dut.i_xbar.i_xbar.gen_sbr[s].i_mux.gen_copy[0].full &&
                          dut.i_xbar.i_xbar.gen_sbr[s].i_mux.gen_copy[0].arb_req;
    assign cut_hold[NumMgr+s] = dut.i_xbar.gen_out_cut[s].i_cut.valid_q[0] &&
                                !dut.i_xbar.gen_out_cut[s].i_cut.mgr_gnt_i[0];
  end
  for (genvar m = 0; m < NumMgr; m++) begin : gen_mon_mgr
    logic req0, allow0, at_max;
    assign req0   = dut.i_xbar.i_xbar.gen_mgr[m].i_demux.sbr_req_i[0];
    assign allow0 = dut.i_xbar.i_xbar.gen_mgr[m].i_demux.gen_copy[0].allow;
    assign at_max = dut.i_xbar.i_xbar.gen_mgr[m].i_demux.state_q[0].cnt == NumMaxTrans;
    assign order_stall[m] = req0 && !allow0 && !at_max;
    assign max_stall[m]   = req0 && at_max;
    assign cut_hold[m]    = dut.i_xbar.gen_in_cut[m].i_cut.valid_q[0] &&
                            !dut.i_xbar.gen_in_cut[m].i_cut.mgr_gnt_i[0];
  end

  always_ff @(posedge clk) if (rst_n) begin
    n_contend     <= n_contend + int'(|contend);
    n_lock        <= n_lock + int'(|lock);
    n_fifo_full   <= n_fifo_full + int'(|fifo_full);
    n_order_stall <= n_order_stall + int'(|order_stall);
    n_max_stall   <= n_max_stall + int'(|max_stall);
    n_cut_hold    <= n_cut_hold + int'(|cut_hold);
    n_parallel    <= n_parallel + int'($countones(sbr_req & sbr_gnt) > 1);
    n_err         <= n_err + int'(err.corrected | err.uncorrectable);
  end

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    enable = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    enable = 6'b000001;
    repeat (20) @(posedge clk);
    begin
      automatic longint first_seen = -1;
      for (int s = 0; s < NumSbr; s++)
        if (s_first[s] >= 0 && (first_seen < 0 || s_first[s] < first_seen)) first_seen = s_first[s];
      check(m_first[0] >= 0 && first_seen - m_first[0] == 2,
            $sformatf("request latency %0d cycles, expected 2", first_seen - m_first[0]));
    end
    enable = '1;
    wait (m_done[0] == NumReq && m_done[1] == NumReq && m_done[2] == NumReq &&
          m_done[3] == NumReq && m_done[4] == NumReq && m_done[5] == NumReq);
    repeat (20) @(posedge clk);
    begin
      automatic int total_acc = 0;
      for (int m = 0; m < NumMgr; m++) begin
        checks += m_checks[m]; failures += m_fail[m];
        check(m_issued[m] == NumReq && m_done[m] == NumReq,
              $sformatf("manager %0d issued %0d completed %0d", m, m_issued[m], m_done[m]));
      end
      for (int s = 0; s < NumSbr; s++) begin
        checks += s_checks[s]; failures += s_fail[s]; total_acc += s_acc[s];
      end
      check(total_acc == NumMgr * NumReq, $sformatf("subordinates accepted %0d", total_acc));
    end
    $display("mechanisms: contention=%0d lock=%0d order_stall=%0d max_outstanding_stall=%0d fifo_full=%0d pipeline_hold=%0d parallel=%0d",
             n_contend, n_lock, n_order_stall, n_max_stall, n_fifo_full, n_cut_hold, n_parallel);
    check(n_contend > 0, "no arbitration contention");
    check(n_lock > 0, "arbiter never locked");
    check(n_order_stall > 0, "no ordering stall in a demultiplexer");
    check(n_max_stall > 0, "no stall at the outstanding limit");
    check(n_fifo_full > 0, "no full multiplexer FIFO");
    check(n_cut_hold > 0, "no pipeline stage held a request");
    check(n_parallel > 0, "no parallel transfers");
    check(n_err == 0, $sformatf("error report raised %0d times without faults", n_err));
    $display("completed %0d transactions in %0d cycles", NumMgr * NumReq, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
