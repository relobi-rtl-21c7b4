// relobi_mux: relOBI multiplexer, NumMgr managers to one subordinate.
//
// Lets several managers share one subordinate. A fair round-robin arbiter
// picks one requesting input; its request packet is forwarded and the
// subordinate's grant is returned to it. Each granted request pushes the
// index of its input into a FIFO; responses come back in order, so each
// rvalid is routed to the input at the head of the FIFO, which is then
// popped. The response packet is broadcast to all inputs. When NumMaxTrans
// requests are outstanding the FIFO is full and no request is forwarded
// (back-pressure), as is the case while another input holds the arbiter.
//
// Control is triplicated: copy k has its own arbiter ("rr_arb"), its own
// response FIFO ("rsp_select") and handles handshake copy k. All their state
// - arbiter pointer and lock, FIFO contents, pointers and count - is held in
// a relobi_tmr_reg and read back voted. The request packet multiplexer is
// steered by the three arbiters' choices, voted separately for every bit,
// so a transient in one voter flips at most one bit of the ECC-protected
// packet. Timing: combinational from request to subordinate, no latency.
//
// Structure follows the paper; the FIFO depth (NumMaxTrans) is assumed.
module relobi_mux
  import relobi_pkg::*;
#(
  parameter int unsigned NumMgr      = 6,
  parameter int unsigned NumMaxTrans = 4,
  localparam int unsigned IdxWidth = (NumMgr > 1) ? $clog2(NumMgr) : 1,
  localparam int unsigned PtrWidth = (NumMaxTrans > 1) ? $clog2(NumMaxTrans) : 1,
  localparam int unsigned CntWidth = $clog2(NumMaxTrans + 1)
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // subordinate ports (the managers / demultiplexers connect here)
  input  logic [NumMgr-1:0][2:0]    sbr_req_i,
  output logic [NumMgr-1:0][2:0]    sbr_gnt_o,
  input  relobi_a_t [NumMgr-1:0]    sbr_a_i,
  output logic [NumMgr-1:0][2:0]    sbr_rvalid_o,
  output relobi_r_t                 sbr_r_o,
  // manager port (towards the subordinate)
  output logic [2:0]                mgr_req_o,
  input  logic [2:0]                mgr_gnt_i,
  output relobi_a_t                 mgr_a_o,
  input  logic [2:0]                mgr_rvalid_i,
  input  relobi_r_t                 mgr_r_i,
  // error report
  output relobi_err_t               err_o
);

  typedef struct packed {
    logic                                lock;
    logic [IdxWidth-1:0]                 lock_idx;
    logic [IdxWidth-1:0]                 last_idx;
    logic [NumMaxTrans-1:0][IdxWidth-1:0] fifo;
    logic [PtrWidth-1:0]                 wptr;
    logic [PtrWidth-1:0]                 rptr;
    logic [CntWidth-1:0]                 cnt;
  } state_t;

  state_t [2:0]              state_d, state_q;
  logic                      state_mm;
  logic [2:0][IdxWidth-1:0]  arb_idx;

  // last_idx resets to the last input so that input 0 has priority first
  localparam state_t ResetState = '{lock: 1'b0, lock_idx: '0,
                                    last_idx: IdxWidth'(NumMgr - 1),
                                    fifo: '0, wptr: '0, rptr: '0, cnt: '0};

  relobi_tmr_reg #(.Width($bits(state_t)), .ResetValue(ResetState)) i_state (
    .clk_i, .rst_ni, .d_i(state_d), .q_o(state_q), .mismatch_o(state_mm)
  );

  function automatic logic [PtrWidth-1:0] ptr_inc(logic [PtrWidth-1:0] p);
    return (32'(p) == NumMaxTrans - 1) ? '0 : p + 1'b1;
  endfunction

  for (genvar k = 0; k < 3; k++) begin : gen_copy
    logic [NumMgr-1:0]   req_k, gnt_k;
    logic                arb_req, arb_gnt, full, push, pop;
    logic [IdxWidth-1:0] head;

    always_comb begin
      for (int unsigned m = 0; m < NumMgr; m++) req_k[m] = sbr_req_i[m][k];
    end

    assign full    = (state_q[k].cnt == CntWidth'(NumMaxTrans));
    assign arb_gnt = mgr_gnt_i[k] & ~full;

    relobi_rr_arb #(.NumIn(NumMgr)) i_rr_arb (
      .req_i        (req_k),
      .gnt_o        (gnt_k),
      .req_o        (arb_req),
      .gnt_i        (arb_gnt),
      .idx_o        (arb_idx[k]),
      .lock_q_i     (state_q[k].lock),
      .lock_idx_q_i (state_q[k].lock_idx),
      .last_idx_q_i (state_q[k].last_idx),
      .lock_d_o     (state_d[k].lock),
      .lock_idx_d_o (state_d[k].lock_idx),
      .last_idx_d_o (state_d[k].last_idx)
    );

    assign mgr_req_o[k] = arb_req & ~full;
    assign head         = state_q[k].fifo[state_q[k].rptr];
    assign push         = mgr_req_o[k] & mgr_gnt_i[k];
    assign pop          = mgr_rvalid_i[k];

    always_comb begin
      for (int unsigned m = 0; m < NumMgr; m++) begin
        sbr_gnt_o[m][k]    = gnt_k[m];
        sbr_rvalid_o[m][k] = pop && (head == IdxWidth'(m));
      end
      state_d[k].fifo = state_q[k].fifo;
      if (push) state_d[k].fifo[state_q[k].wptr] = arb_idx[k];
      state_d[k].wptr = push ? ptr_inc(state_q[k].wptr) : state_q[k].wptr;
      state_d[k].rptr = pop  ? ptr_inc(state_q[k].rptr) : state_q[k].rptr;
      state_d[k].cnt  = state_q[k].cnt + CntWidth'(push) - CntWidth'(pop);
    end
  end

  // ---- request packet: select voted per bit ----
  logic asel_mm;

  relobi_voted_mux #(.NumIn(NumMgr), .Width($bits(relobi_a_t))) i_a_mux (
    .sel_i(arb_idx), .data_i(sbr_a_i), .data_o(mgr_a_o), .mismatch_o(asel_mm)
  );

  // ---- response packet: broadcast ----
  assign sbr_r_o = mgr_r_i;

  logic req_mm;
  assign req_mm = (mgr_req_o[0] != mgr_req_o[1]) || (mgr_req_o[0] != mgr_req_o[2]);
  // the select voters only matter while a request is forwarded
  assign err_o.corrected     = state_mm | req_mm | ((|mgr_req_o) & asel_mm);
  assign err_o.uncorrectable = 1'b0;

endmodule
