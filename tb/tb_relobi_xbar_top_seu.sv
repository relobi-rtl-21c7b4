// tb_relobi_xbar_top_seu: the 6x8 interconnect at its default parameters,
// 6 x 1000 random transactions, with single-event upsets in its flip-flops.
//
// Same traffic and checks as tb_relobi_xbar_top (every response correct and
// in order, every request routed correctly, nothing lost or duplicated),
// while every 40 to 80 cycles one flip-flop inside the pipelined crossbar is
// flipped: a bit of one copy of a voted state register (multiplexer arbiter
// and response FIFO, demultiplexer port and counter, pipeline valid flags)
// or a bit of a pipeline stage's request or response packet register. The
// upset is applied between clock edges with force/release, so the register
// holds the wrong value until its next update, as after a particle strike.
// All 70 such registers are targets, chosen at random. The test expects no
// functional error, at least one reported correction, and no uncorrectable
// report (upsets are far enough apart never to hit one word twice).
module tb_relobi_xbar_top_seu;
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


  // ---- upset injection ----
  int n_ctrl = 0, n_data = 0, n_corr = 0, n_uncorr = 0;
  bit inj_on = 1'b0;
  always_ff @(posedge clk) if (rst_n) begin
    n_corr   <= n_corr + int'(err.corrected);
    n_uncorr <= n_uncorr + int'(err.uncorrectable);
  end

  initial begin
    automatic logic [255:0] tmp;
    automatic int b;
    forever begin
      repeat ($urandom_range(80, 40)) @(posedge clk);
      @(negedge clk);
      if (inj_on) begin
        case ($urandom_range(69, 0))
      0: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_sbr[0].i_mux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_sbr[0].i_mux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_sbr[0].i_mux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_sbr[0].i_mux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_sbr[0].i_mux.i_state.q;
        n_ctrl++;
      end
      1: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_sbr[1].i_mux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_sbr[1].i_mux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_sbr[1].i_mux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_sbr[1].i_mux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_sbr[1].i_mux.i_state.q;
        n_ctrl++;
      end
      2: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_sbr[2].i_mux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_sbr[2].i_mux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_sbr[2].i_mux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_sbr[2].i_mux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_sbr[2].i_mux.i_state.q;
        n_ctrl++;
      end
      3: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_sbr[3].i_mux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_sbr[3].i_mux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_sbr[3].i_mux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_sbr[3].i_mux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_sbr[3].i_mux.i_state.q;
        n_ctrl++;
      end
      4: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_sbr[4].i_mux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_sbr[4].i_mux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_sbr[4].i_mux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_sbr[4].i_mux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_sbr[4].i_mux.i_state.q;
        n_ctrl++;
      end
      5: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_sbr[5].i_mux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_sbr[5].i_mux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_sbr[5].i_mux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_sbr[5].i_mux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_sbr[5].i_mux.i_state.q;
        n_ctrl++;
      end
      6: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_sbr[6].i_mux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_sbr[6].i_mux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_sbr[6].i_mux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_sbr[6].i_mux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_sbr[6].i_mux.i_state.q;
        n_ctrl++;
      end
      7: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_sbr[7].i_mux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_sbr[7].i_mux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_sbr[7].i_mux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_sbr[7].i_mux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_sbr[7].i_mux.i_state.q;
        n_ctrl++;
      end
      8: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_mgr[0].i_demux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_mgr[0].i_demux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_mgr[0].i_demux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_mgr[0].i_demux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_mgr[0].i_demux.i_state.q;
        n_ctrl++;
      end
      9: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_mgr[1].i_demux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_mgr[1].i_demux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_mgr[1].i_demux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_mgr[1].i_demux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_mgr[1].i_demux.i_state.q;
        n_ctrl++;
      end
      10: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_mgr[2].i_demux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_mgr[2].i_demux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_mgr[2].i_demux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_mgr[2].i_demux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_mgr[2].i_demux.i_state.q;
        n_ctrl++;
      end
      11: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_mgr[3].i_demux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_mgr[3].i_demux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_mgr[3].i_demux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_mgr[3].i_demux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_mgr[3].i_demux.i_state.q;
        n_ctrl++;
      end
      12: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_mgr[4].i_demux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_mgr[4].i_demux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_mgr[4].i_demux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_mgr[4].i_demux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_mgr[4].i_demux.i_state.q;
        n_ctrl++;
      end
      13: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.i_xbar.gen_mgr[5].i_demux.i_state.q);
        b = $urandom_range($bits(dut.i_xbar.i_xbar.gen_mgr[5].i_demux.i_state.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.i_xbar.gen_mgr[5].i_demux.i_state.q = tmp[$bits(dut.i_xbar.i_xbar.gen_mgr[5].i_demux.i_state.q)-1:0];
        release dut.i_xbar.i_xbar.gen_mgr[5].i_demux.i_state.q;
        n_ctrl++;
      end
      14: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[0].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[0].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[0].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_in_cut[0].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_in_cut[0].i_cut.i_valid.q;
        n_ctrl++;
      end
      15: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[0].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[0].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[0].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_in_cut[0].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_in_cut[0].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      16: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[0].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[0].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[0].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_in_cut[0].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_in_cut[0].i_cut.a_q;
        n_data++;
      end
      17: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[0].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[0].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[0].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_in_cut[0].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_in_cut[0].i_cut.sbr_r_o;
        n_data++;
      end
      18: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[1].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[1].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[1].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_in_cut[1].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_in_cut[1].i_cut.i_valid.q;
        n_ctrl++;
      end
      19: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[1].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[1].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[1].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_in_cut[1].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_in_cut[1].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      20: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[1].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[1].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[1].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_in_cut[1].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_in_cut[1].i_cut.a_q;
        n_data++;
      end
      21: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[1].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[1].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[1].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_in_cut[1].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_in_cut[1].i_cut.sbr_r_o;
        n_data++;
      end
      22: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[2].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[2].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[2].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_in_cut[2].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_in_cut[2].i_cut.i_valid.q;
        n_ctrl++;
      end
      23: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[2].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[2].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[2].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_in_cut[2].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_in_cut[2].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      24: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[2].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[2].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[2].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_in_cut[2].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_in_cut[2].i_cut.a_q;
        n_data++;
      end
      25: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[2].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[2].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[2].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_in_cut[2].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_in_cut[2].i_cut.sbr_r_o;
        n_data++;
      end
      26: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[3].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[3].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[3].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_in_cut[3].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_in_cut[3].i_cut.i_valid.q;
        n_ctrl++;
      end
      27: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[3].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[3].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[3].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_in_cut[3].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_in_cut[3].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      28: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[3].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[3].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[3].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_in_cut[3].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_in_cut[3].i_cut.a_q;
        n_data++;
      end
      29: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[3].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[3].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[3].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_in_cut[3].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_in_cut[3].i_cut.sbr_r_o;
        n_data++;
      end
      30: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[4].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[4].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[4].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_in_cut[4].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_in_cut[4].i_cut.i_valid.q;
        n_ctrl++;
      end
      31: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[4].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[4].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[4].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_in_cut[4].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_in_cut[4].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      32: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[4].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[4].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[4].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_in_cut[4].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_in_cut[4].i_cut.a_q;
        n_data++;
      end
      33: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[4].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[4].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[4].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_in_cut[4].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_in_cut[4].i_cut.sbr_r_o;
        n_data++;
      end
      34: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[5].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[5].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[5].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_in_cut[5].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_in_cut[5].i_cut.i_valid.q;
        n_ctrl++;
      end
      35: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[5].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[5].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[5].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_in_cut[5].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_in_cut[5].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      36: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[5].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[5].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[5].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_in_cut[5].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_in_cut[5].i_cut.a_q;
        n_data++;
      end
      37: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_in_cut[5].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_in_cut[5].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_in_cut[5].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_in_cut[5].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_in_cut[5].i_cut.sbr_r_o;
        n_data++;
      end
      38: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[0].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[0].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[0].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_out_cut[0].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_out_cut[0].i_cut.i_valid.q;
        n_ctrl++;
      end
      39: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[0].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[0].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[0].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_out_cut[0].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_out_cut[0].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      40: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[0].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[0].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[0].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_out_cut[0].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_out_cut[0].i_cut.a_q;
        n_data++;
      end
      41: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[0].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[0].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[0].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_out_cut[0].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_out_cut[0].i_cut.sbr_r_o;
        n_data++;
      end
      42: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[1].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[1].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[1].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_out_cut[1].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_out_cut[1].i_cut.i_valid.q;
        n_ctrl++;
      end
      43: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[1].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[1].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[1].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_out_cut[1].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_out_cut[1].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      44: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[1].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[1].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[1].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_out_cut[1].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_out_cut[1].i_cut.a_q;
        n_data++;
      end
      45: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[1].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[1].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[1].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_out_cut[1].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_out_cut[1].i_cut.sbr_r_o;
        n_data++;
      end
      46: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[2].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[2].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[2].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_out_cut[2].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_out_cut[2].i_cut.i_valid.q;
        n_ctrl++;
      end
      47: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[2].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[2].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[2].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_out_cut[2].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_out_cut[2].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      48: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[2].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[2].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[2].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_out_cut[2].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_out_cut[2].i_cut.a_q;
        n_data++;
      end
      49: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[2].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[2].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[2].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_out_cut[2].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_out_cut[2].i_cut.sbr_r_o;
        n_data++;
      end
      50: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[3].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[3].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[3].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_out_cut[3].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_out_cut[3].i_cut.i_valid.q;
        n_ctrl++;
      end
      51: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[3].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[3].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[3].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_out_cut[3].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_out_cut[3].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      52: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[3].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[3].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[3].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_out_cut[3].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_out_cut[3].i_cut.a_q;
        n_data++;
      end
      53: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[3].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[3].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[3].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_out_cut[3].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_out_cut[3].i_cut.sbr_r_o;
        n_data++;
      end
      54: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[4].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[4].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[4].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_out_cut[4].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_out_cut[4].i_cut.i_valid.q;
        n_ctrl++;
      end
      55: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[4].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[4].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[4].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_out_cut[4].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_out_cut[4].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      56: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[4].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[4].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[4].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_out_cut[4].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_out_cut[4].i_cut.a_q;
        n_data++;
      end
      57: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[4].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[4].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[4].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_out_cut[4].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_out_cut[4].i_cut.sbr_r_o;
        n_data++;
      end
      58: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[5].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[5].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[5].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_out_cut[5].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_out_cut[5].i_cut.i_valid.q;
        n_ctrl++;
      end
      59: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[5].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[5].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[5].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_out_cut[5].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_out_cut[5].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      60: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[5].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[5].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[5].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_out_cut[5].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_out_cut[5].i_cut.a_q;
        n_data++;
      end
      61: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[5].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[5].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[5].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_out_cut[5].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_out_cut[5].i_cut.sbr_r_o;
        n_data++;
      end
      62: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[6].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[6].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[6].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_out_cut[6].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_out_cut[6].i_cut.i_valid.q;
        n_ctrl++;
      end
      63: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[6].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[6].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[6].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_out_cut[6].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_out_cut[6].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      64: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[6].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[6].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[6].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_out_cut[6].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_out_cut[6].i_cut.a_q;
        n_data++;
      end
      65: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[6].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[6].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[6].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_out_cut[6].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_out_cut[6].i_cut.sbr_r_o;
        n_data++;
      end
      66: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[7].i_cut.i_valid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[7].i_cut.i_valid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[7].i_cut.i_valid.q = tmp[$bits(dut.i_xbar.gen_out_cut[7].i_cut.i_valid.q)-1:0];
        release dut.i_xbar.gen_out_cut[7].i_cut.i_valid.q;
        n_ctrl++;
      end
      67: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[7].i_cut.i_rvalid.q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[7].i_cut.i_rvalid.q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[7].i_cut.i_rvalid.q = tmp[$bits(dut.i_xbar.gen_out_cut[7].i_cut.i_rvalid.q)-1:0];
        release dut.i_xbar.gen_out_cut[7].i_cut.i_rvalid.q;
        n_ctrl++;
      end
      68: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[7].i_cut.a_q);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[7].i_cut.a_q) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[7].i_cut.a_q = tmp[$bits(dut.i_xbar.gen_out_cut[7].i_cut.a_q)-1:0];
        release dut.i_xbar.gen_out_cut[7].i_cut.a_q;
        n_data++;
      end
      69: begin
        tmp = '0;
        tmp = 256'(dut.i_xbar.gen_out_cut[7].i_cut.sbr_r_o);
        b = $urandom_range($bits(dut.i_xbar.gen_out_cut[7].i_cut.sbr_r_o) - 1, 0);
        tmp[b] = ~tmp[b];
        force dut.i_xbar.gen_out_cut[7].i_cut.sbr_r_o = tmp[$bits(dut.i_xbar.gen_out_cut[7].i_cut.sbr_r_o)-1:0];
        release dut.i_xbar.gen_out_cut[7].i_cut.sbr_r_o;
        n_data++;
      end
          default: ;
        endcase
      end
    end
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
    inj_on = 1'b1;
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
    $display("upsets: %0d in control state, %0d in packet registers; corrections reported: %0d, uncorrectable: %0d",
             n_ctrl, n_data, n_corr, n_uncorr);
    check(n_ctrl > 0 && n_data > 0, "no upsets injected");
    check(n_corr > 0, "no correction reported although upsets were injected");
    check(n_uncorr == 0, "uncorrectable error reported for single upsets");
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
