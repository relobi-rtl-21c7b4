// relobi_xbar_top: a 6x8 OBI interconnect hardened with relOBI.
//
// Plain OBI managers connect on the left, plain OBI subordinates on the
// right; in between, all traffic is relOBI. Each manager's bus passes a
// relobi_encoder (triplicated handshake, SECDED-protected fields), then the
// pipelined relOBI crossbar, then a relobi_decoder per subordinate that turns
// it back into plain OBI. Any single upset or transient inside the relOBI
// part is corrected in flight without retransmission or added latency;
// err_o reports that a correction happened (corrected) or that an ECC word
// was found uncorrectable.
// Latency: two cycles from a manager's request to the subordinate's port,
// two cycles from the subordinate's response back to the manager.
//
// Ports are arrays of plain OBI signals and packet structs (see relobi_pkg).
// The OBI rules apply on both sides: a request is held, unchanged, until
// granted; responses come back in order; there is no response back-pressure.
// The encoders and decoders are outside the unit the paper evaluates but
// are the interface it defines; combining them in one top is this design's
// choice.
module relobi_xbar_top
  import relobi_pkg::*;
#(
  parameter int unsigned NumMgr      = 6,
  parameter int unsigned NumSbr      = 8,
  parameter int unsigned NumMaxTrans = 4,
  parameter int unsigned NumRules    = 8,
  parameter addr_rule_t [NumRules-1:0] AddrMap = DefaultAddrMap,
  parameter int unsigned DefaultIdx  = 0
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // OBI managers
  input  logic [NumMgr-1:0]   mgr_req_i,
  output logic [NumMgr-1:0]   mgr_gnt_o,
  input  obi_a_t [NumMgr-1:0] mgr_a_i,
  output logic [NumMgr-1:0]   mgr_rvalid_o,
  output obi_r_t [NumMgr-1:0] mgr_r_o,
  // OBI subordinates
  output logic [NumSbr-1:0]   sbr_req_o,
  input  logic [NumSbr-1:0]   sbr_gnt_i,
  output obi_a_t [NumSbr-1:0] sbr_a_o,
  input  logic [NumSbr-1:0]   sbr_rvalid_i,
  input  obi_r_t [NumSbr-1:0] sbr_r_i,
  // error report
  output relobi_err_t         err_o
);

  logic [NumMgr-1:0][2:0]   m_req, m_gnt, m_rvalid;
  relobi_a_t [NumMgr-1:0]   m_a;
  relobi_r_t [NumMgr-1:0]   m_r;
  logic [NumSbr-1:0][2:0]   s_req, s_gnt, s_rvalid;
  relobi_a_t [NumSbr-1:0]   s_a;
  relobi_r_t [NumSbr-1:0]   s_r;
  relobi_err_t [NumMgr-1:0] enc_err;
  relobi_err_t [NumSbr-1:0] dec_err;
  relobi_err_t              xbar_err;

  for (genvar m = 0; m < NumMgr; m++) begin : gen_enc
    relobi_encoder i_enc (
      .clk_i, .rst_ni,
      .obi_req_i    (mgr_req_i[m]),
      .obi_gnt_o    (mgr_gnt_o[m]),
      .obi_a_i      (mgr_a_i[m]),
      .obi_rvalid_o (mgr_rvalid_o[m]),
      .obi_r_o      (mgr_r_o[m]),
      .rel_req_o    (m_req[m]),
      .rel_gnt_i    (m_gnt[m]),
      .rel_a_o      (m_a[m]),
      .rel_rvalid_i (m_rvalid[m]),
      .rel_r_i      (m_r[m]),
      .err_o        (enc_err[m])
    );
  end

  relobi_xbar_pipelined #(
    .NumMgr(NumMgr), .NumSbr(NumSbr), .NumMaxTrans(NumMaxTrans),
    .NumRules(NumRules), .AddrMap(AddrMap), .DefaultIdx(DefaultIdx)
  ) i_xbar (
    .clk_i, .rst_ni,
    .sbr_req_i    (m_req),
    .sbr_gnt_o    (m_gnt),
    .sbr_a_i      (m_a),
    .sbr_rvalid_o (m_rvalid),
    .sbr_r_o      (m_r),
    .mgr_req_o    (s_req),
    .mgr_gnt_i    (s_gnt),
    .mgr_a_o      (s_a),
    .mgr_rvalid_i (s_rvalid),
    .mgr_r_i      (s_r),
    .err_o        (xbar_err)
  );

  for (genvar s = 0; s < NumSbr; s++) begin : gen_dec
    relobi_decoder i_dec (
      .clk_i, .rst_ni,
      .rel_req_i    (s_req[s]),
      .rel_gnt_o    (s_gnt[s]),
      .rel_a_i      (s_a[s]),
      .rel_rvalid_o (s_rvalid[s]),
      .rel_r_o      (s_r[s]),
      .obi_req_o    (sbr_req_o[s]),
      .obi_gnt_i    (sbr_gnt_i[s]),
      .obi_a_o      (sbr_a_o[s]),
      .obi_rvalid_i (sbr_rvalid_i[s]),
      .obi_r_i      (sbr_r_i[s]),
      .err_o        (dec_err[s])
    );
  end

  always_comb begin
    err_o = xbar_err;
    for (int unsigned m = 0; m < NumMgr; m++) err_o = err_o | enc_err[m];
    for (int unsigned s = 0; s < NumSbr; s++) err_o = err_o | dec_err[s];
  end

endmodule
