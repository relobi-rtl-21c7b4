// relobi_xbar: fully connected relOBI crossbar, NumMgr managers x NumSbr
// subordinates.
//
// Every manager connects to a subordinate port of its own demultiplexer;
// every demultiplexer has one manager port towards each of the NumSbr
// multiplexers, and each multiplexer drives one manager port of the
// crossbar. Requests of independent manager/subordinate pairs therefore pass
// each other without interference, and contention at one subordinate is
// resolved round-robin by its multiplexer.
//
// For each manager, three relobi_addr_decode copies correct the
// ECC-protected address independently and produce three port selections, one
// for each copy of the demultiplexer's control. Request and response packets
// pass through untouched apart from selection, keeping their check bits.
//
// err_o ORs the error reports of all internal blocks. Address-decoder
// results count only while that manager presents a request. An address
// matching no rule goes to DefaultIdx (port 0).
// Timing: combinational from every input to every output, no latency.
//
// Structure follows the paper's crossbar figure and its 6x8 configuration.
module relobi_xbar
  import relobi_pkg::*;
#(
  parameter int unsigned NumMgr      = 6,
  parameter int unsigned NumSbr      = 8,
  parameter int unsigned NumMaxTrans = 4,
  parameter int unsigned NumRules    = 8,
  parameter addr_rule_t [NumRules-1:0] AddrMap = DefaultAddrMap,
  parameter int unsigned DefaultIdx  = 0,
  localparam int unsigned SelWidth = (NumSbr > 1) ? $clog2(NumSbr) : 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // subordinate ports: one per manager
  input  logic [NumMgr-1:0][2:0] sbr_req_i,
  output logic [NumMgr-1:0][2:0] sbr_gnt_o,
  input  relobi_a_t [NumMgr-1:0] sbr_a_i,
  output logic [NumMgr-1:0][2:0] sbr_rvalid_o,
  output relobi_r_t [NumMgr-1:0] sbr_r_o,
  // manager ports: one per subordinate
  output logic [NumSbr-1:0][2:0] mgr_req_o,
  input  logic [NumSbr-1:0][2:0] mgr_gnt_i,
  output relobi_a_t [NumSbr-1:0] mgr_a_o,
  input  logic [NumSbr-1:0][2:0] mgr_rvalid_i,
  input  relobi_r_t [NumSbr-1:0] mgr_r_i,
  // error report
  output relobi_err_t            err_o
);

  // demux m, port s  <->  mux s, input m
  logic [NumMgr-1:0][NumSbr-1:0][2:0] dx_req, dx_gnt, dx_rvalid;
  relobi_a_t [NumMgr-1:0]             dx_a;
  relobi_r_t [NumSbr-1:0]             mx_r;
  relobi_err_t [NumMgr-1:0]           demux_err, dec_err;
  relobi_err_t [NumSbr-1:0]           mux_err;

  for (genvar m = 0; m < NumMgr; m++) begin : gen_mgr
    logic [2:0][SelWidth-1:0] sel;
    logic [2:0]               miss, se, ue;
    relobi_r_t [NumSbr-1:0]   r_in;

    for (genvar k = 0; k < 3; k++) begin : gen_dec
      relobi_addr_decode #(
        .NumSbr(NumSbr), .NumRules(NumRules), .AddrMap(AddrMap), .DefaultIdx(DefaultIdx)
      ) i_addr_decode (
        .addr_i          (sbr_a_i[m].addr),
        .addr_ecc_i      (sbr_a_i[m].addr_ecc),
        .sel_o           (sel[k]),
        .dec_miss_o      (miss[k]),
        .single_err_o    (se[k]),
        .uncorrectable_o (ue[k])
      );
    end

    // an unmapped address is routed to DefaultIdx, nothing more to report
    logic miss_unused;
    assign miss_unused = |miss;

    assign dec_err[m].corrected     = (|sbr_req_i[m]) & (|se);
    assign dec_err[m].uncorrectable = (|sbr_req_i[m]) & (|ue);

    for (genvar s = 0; s < NumSbr; s++) begin : gen_rin
      assign r_in[s] = mx_r[s];
    end

    relobi_demux #(.NumSbr(NumSbr), .NumMaxTrans(NumMaxTrans)) i_demux (
      .clk_i, .rst_ni,
      .sbr_req_i    (sbr_req_i[m]),
      .sbr_gnt_o    (sbr_gnt_o[m]),
      .sbr_a_i      (sbr_a_i[m]),
      .sbr_rvalid_o (sbr_rvalid_o[m]),
      .sbr_r_o      (sbr_r_o[m]),
      .sel_i        (sel),
      .mgr_req_o    (dx_req[m]),
      .mgr_gnt_i    (dx_gnt[m]),
      .mgr_a_o      (dx_a[m]),
      .mgr_rvalid_i (dx_rvalid[m]),
      .mgr_r_i      (r_in),
      .err_o        (demux_err[m])
    );
  end

  for (genvar s = 0; s < NumSbr; s++) begin : gen_sbr
    logic [NumMgr-1:0][2:0] req_in, gnt_out, rvalid_out;

    for (genvar m = 0; m < NumMgr; m++) begin : gen_link
      assign req_in[m]       = dx_req[m][s];
      assign dx_gnt[m][s]    = gnt_out[m];
      assign dx_rvalid[m][s] = rvalid_out[m];
    end

    relobi_mux #(.NumMgr(NumMgr), .NumMaxTrans(NumMaxTrans)) i_mux (
      .clk_i, .rst_ni,
      .sbr_req_i    (req_in),
      .sbr_gnt_o    (gnt_out),
      .sbr_a_i      (dx_a),
      .sbr_rvalid_o (rvalid_out),
      .sbr_r_o      (mx_r[s]),
      .mgr_req_o    (mgr_req_o[s]),
      .mgr_gnt_i    (mgr_gnt_i[s]),
      .mgr_a_o      (mgr_a_o[s]),
      .mgr_rvalid_i (mgr_rvalid_i[s]),
      .mgr_r_i      (mgr_r_i[s]),
      .err_o        (mux_err[s])
    );
  end

  always_comb begin
    err_o = '0;
    for (int unsigned m = 0; m < NumMgr; m++) err_o = err_o | demux_err[m] | dec_err[m];
    for (int unsigned s = 0; s < NumSbr; s++) err_o = err_o | mux_err[s];
  end

endmodule
