// relobi_xbar_pipelined: the relOBI crossbar with a pipeline register on
// every interface.
//
// Each of the NumMgr manager-side links passes a relobi_cut before it enters
// the crossbar, and each of the NumSbr subordinate-side links passes another
// one after it. Timing paths inside the crossbar therefore start and end at
// registers (register to register through address decode, demultiplexer and
// multiplexer), independent of what is connected outside.
// Latency: a request reaches a subordinate port two cycles after it is
// presented (if not stalled); a response needs two cycles back.
//
// This is the unit the paper evaluates (6x8, interfaces pipelined before and
// after the crossbar, encoders and decoders outside). err_o ORs all reports.
module relobi_xbar_pipelined
  import relobi_pkg::*;
#(
  parameter int unsigned NumMgr      = 6,
  parameter int unsigned NumSbr      = 8,
  parameter int unsigned NumMaxTrans = 4,
  parameter int unsigned NumRules    = 8,
  parameter addr_rule_t [NumRules-1:0] AddrMap = DefaultAddrMap,
  parameter int unsigned DefaultIdx  = 0
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [NumMgr-1:0][2:0] sbr_req_i,
  output logic [NumMgr-1:0][2:0] sbr_gnt_o,
  input  relobi_a_t [NumMgr-1:0] sbr_a_i,
  output logic [NumMgr-1:0][2:0] sbr_rvalid_o,
  output relobi_r_t [NumMgr-1:0] sbr_r_o,
  output logic [NumSbr-1:0][2:0] mgr_req_o,
  input  logic [NumSbr-1:0][2:0] mgr_gnt_i,
  output relobi_a_t [NumSbr-1:0] mgr_a_o,
  input  logic [NumSbr-1:0][2:0] mgr_rvalid_i,
  input  relobi_r_t [NumSbr-1:0] mgr_r_i,
  output relobi_err_t            err_o
);

  logic [NumMgr-1:0][2:0] in_req, in_gnt, in_rvalid;
  relobi_a_t [NumMgr-1:0] in_a;
  relobi_r_t [NumMgr-1:0] in_r;
  logic [NumSbr-1:0][2:0] out_req, out_gnt, out_rvalid;
  relobi_a_t [NumSbr-1:0] out_a;
  relobi_r_t [NumSbr-1:0] out_r;
  relobi_err_t [NumMgr-1:0] in_err;
  relobi_err_t [NumSbr-1:0] out_err;
  relobi_err_t              xbar_err;

  for (genvar m = 0; m < NumMgr; m++) begin : gen_in_cut
    relobi_cut i_cut (
      .clk_i, .rst_ni,
      .sbr_req_i    (sbr_req_i[m]),
      .sbr_gnt_o    (sbr_gnt_o[m]),
      .sbr_a_i      (sbr_a_i[m]),
      .sbr_rvalid_o (sbr_rvalid_o[m]),
      .sbr_r_o      (sbr_r_o[m]),
      .mgr_req_o    (in_req[m]),
      .mgr_gnt_i    (in_gnt[m]),
      .mgr_a_o      (in_a[m]),
      .mgr_rvalid_i (in_rvalid[m]),
      .mgr_r_i      (in_r[m]),
      .err_o        (in_err[m])
    );
  end

  relobi_xbar #(
    .NumMgr(NumMgr), .NumSbr(NumSbr), .NumMaxTrans(NumMaxTrans),
    .NumRules(NumRules), .AddrMap(AddrMap), .DefaultIdx(DefaultIdx)
  ) i_xbar (
    .clk_i, .rst_ni,
    .sbr_req_i    (in_req),
    .sbr_gnt_o    (in_gnt),
    .sbr_a_i      (in_a),
    .sbr_rvalid_o (in_rvalid),
    .sbr_r_o      (in_r),
    .mgr_req_o    (out_req),
    .mgr_gnt_i    (out_gnt),
    .mgr_a_o      (out_a),
    .mgr_rvalid_i (out_rvalid),
    .mgr_r_i      (out_r),
    .err_o        (xbar_err)
  );

  for (genvar s = 0; s < NumSbr; s++) begin : gen_out_cut
    relobi_cut i_cut (
      .clk_i, .rst_ni,
      .sbr_req_i    (out_req[s]),
      .sbr_gnt_o    (out_gnt[s]),
      .sbr_a_i      (out_a[s]),
      .sbr_rvalid_o (out_rvalid[s]),
      .sbr_r_o      (out_r[s]),
      .mgr_req_o    (mgr_req_o[s]),
      .mgr_gnt_i    (mgr_gnt_i[s]),
      .mgr_a_o      (mgr_a_o[s]),
      .mgr_rvalid_i (mgr_rvalid_i[s]),
      .mgr_r_i      (mgr_r_i[s]),
      .err_o        (out_err[s])
    );
  end

  always_comb begin
    err_o = xbar_err;
    for (int unsigned m = 0; m < NumMgr; m++) err_o = err_o | in_err[m];
    for (int unsigned s = 0; s < NumSbr; s++) err_o = err_o | out_err[s];
  end

endmodule
