// relobi_demux: relOBI demultiplexer, one manager to NumSbr subordinates.
//
// Routes each request of one manager to the subordinate port chosen by the
// address decoders and sends the responses back. The request packet
// (address, data and their check bits) is broadcast to all ports unchanged;
// only the req/gnt/rvalid handshakes are steered.
//
// Control is triplicated: copy k ("port_select" in the paper's figure) sees
// req copy k, the port index sel_i[k] from address decoder copy k and the
// gnt/rvalid copies k of every port, and drives req copy k of the selected
// port. Its state - the port of the outstanding transactions and their count
// - sits in a relobi_tmr_reg, so every copy works from voted state.
// OBI ordering: responses must return in request order, so a request to a
// different port than the outstanding ones is stalled until the count is
// zero; at most NumMaxTrans transactions may be outstanding.
// Response path ("rsp_select"): rvalid copy k comes from the port held in
// copy k's state. The response packet is selected by a multiplexer whose
// select is voted separately for every bit, so a transient in one of those
// voters corrupts at most one bit, which the packet's ECC corrects later.
// Timing: no added latency; gnt_o and req_o are combinational.
//
// Structure follows the paper; NumMaxTrans and the stall rule are taken from
// common OBI demultiplexer practice.
module relobi_demux
  import relobi_pkg::*;
#(
  parameter int unsigned NumSbr      = 8,
  parameter int unsigned NumMaxTrans = 4,
  localparam int unsigned SelWidth = (NumSbr > 1) ? $clog2(NumSbr) : 1,
  localparam int unsigned CntWidth = $clog2(NumMaxTrans + 1)
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // subordinate port (the manager connects here)
  input  logic [2:0]                sbr_req_i,
  output logic [2:0]                sbr_gnt_o,
  input  relobi_a_t                 sbr_a_i,
  output logic [2:0]                sbr_rvalid_o,
  output relobi_r_t                 sbr_r_o,
  // port selection, one per copy, from the address decoders
  input  logic [2:0][SelWidth-1:0]  sel_i,
  // manager ports (towards the subordinates)
  output logic [NumSbr-1:0][2:0]    mgr_req_o,
  input  logic [NumSbr-1:0][2:0]    mgr_gnt_i,
  output relobi_a_t                 mgr_a_o,
  input  logic [NumSbr-1:0][2:0]    mgr_rvalid_i,
  input  relobi_r_t [NumSbr-1:0]    mgr_r_i,
  // error report
  output relobi_err_t               err_o
);

  typedef struct packed {
    logic [SelWidth-1:0] sel;
    logic [CntWidth-1:0] cnt;
  } state_t;

  state_t [2:0] state_d, state_q;
  logic         state_mm;

  relobi_tmr_reg #(.Width($bits(state_t))) i_state (
    .clk_i, .rst_ni, .d_i(state_d), .q_o(state_q), .mismatch_o(state_mm)
  );

  // ---- port_select and rsp_select, one per copy ----
  for (genvar k = 0; k < 3; k++) begin : gen_copy
    logic allow, acc;
    always_comb begin
      allow = ((state_q[k].cnt == '0) || (sel_i[k] == state_q[k].sel)) &&
              (state_q[k].cnt != CntWidth'(NumMaxTrans));
      for (int unsigned p = 0; p < NumSbr; p++) begin
        mgr_req_o[p][k] = sbr_req_i[k] && allow && (sel_i[k] == SelWidth'(p));
      end
      sbr_gnt_o[k]    = sbr_req_i[k] && allow && mgr_gnt_i[sel_i[k]][k];
      sbr_rvalid_o[k] = mgr_rvalid_i[state_q[k].sel][k];

      acc              = sbr_req_i[k] && sbr_gnt_o[k];
      state_d[k].sel   = acc ? sel_i[k] : state_q[k].sel;
      state_d[k].cnt   = state_q[k].cnt + CntWidth'(acc) - CntWidth'(sbr_rvalid_o[k]);
    end
  end

  // ---- request packet: broadcast ----
  assign mgr_a_o = sbr_a_i;

  // ---- response packet: select voted per bit ----
  logic [2:0][SelWidth-1:0] rsel;
  logic                     rsel_mm;

  for (genvar k = 0; k < 3; k++) begin : gen_rsel
    assign rsel[k] = state_q[k].sel;
  end

  relobi_voted_mux #(.NumIn(NumSbr), .Width($bits(relobi_r_t))) i_r_mux (
    .sel_i(rsel), .data_i(mgr_r_i), .data_o(sbr_r_o), .mismatch_o(rsel_mm)
  );

  // ---- error report: any disagreement between the copies ----
  logic gnt_mm, rvalid_mm;
  assign gnt_mm    = (sbr_gnt_o[0] != sbr_gnt_o[1]) || (sbr_gnt_o[0] != sbr_gnt_o[2]);
  assign rvalid_mm = (sbr_rvalid_o[0] != sbr_rvalid_o[1]) || (sbr_rvalid_o[0] != sbr_rvalid_o[2]);
  assign err_o.corrected     = state_mm | rsel_mm | gnt_mm | rvalid_mm;
  assign err_o.uncorrectable = 1'b0;

endmodule
