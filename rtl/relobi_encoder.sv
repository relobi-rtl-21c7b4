// relobi_encoder: plain OBI manager interface -> relOBI.
//
// Sits next to an OBI manager (a core, a DMA) and turns its bus into relOBI.
// A channel: the request is copied onto three req wires; the three gnt wires
// coming back are voted into the manager's single gnt. The address and the
// write data each get their own SECDED check bits, and {we, be, a_optional}
// share one more set. R channel: the three rvalid wires are voted, read data
// and r_optional are decoded and corrected before they reach the manager.
// The block is purely combinational and adds no cycle of latency.
//
// Structure and grouping of the fields follow the paper's encoder figure.
// err_o collects voter mismatches and ECC results of the response path;
// that report, and the Hsiao code, are this design's choices.
// Lint notes that rst_ni is used both as an asynchronous reset (in the
// voted state registers) and synchronously (to disable the handshake
// assertion during reset). The assertion is simulation-only, so this is
// intended and leaves no synchronous use of the reset in the circuit.
module relobi_encoder
  import relobi_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // OBI side (from the manager)
  input  logic        obi_req_i,
  output logic        obi_gnt_o,
  input  obi_a_t      obi_a_i,
  output logic        obi_rvalid_o,
  output obi_r_t      obi_r_o,
  // relOBI side (towards the interconnect)
  output logic [2:0]  rel_req_o,
  input  logic [2:0]  rel_gnt_i,
  output relobi_a_t   rel_a_o,
  input  logic [2:0]  rel_rvalid_i,
  input  relobi_r_t   rel_r_i,
  // error report
  output relobi_err_t err_o
);

  logic gnt_mm, rvalid_mm;
  logic rdata_se, rdata_ue, rother_se, rother_ue;
  logic [DataEccWidth-1:0]   rdata_ecc_unused;
  logic [ROtherEccWidth-1:0] rother_ecc_unused;

  // ---- A channel ----
  assign rel_req_o = {3{obi_req_i}};

  relobi_tmr_voter #(.Width(1)) i_gnt_vote (
    .a_i(rel_gnt_i[0]), .b_i(rel_gnt_i[1]), .c_i(rel_gnt_i[2]),
    .y_o(obi_gnt_o), .mismatch_o(gnt_mm)
  );

  assign rel_a_o.addr       = obi_a_i.addr;
  assign rel_a_o.wdata      = obi_a_i.wdata;
  assign rel_a_o.we         = obi_a_i.we;
  assign rel_a_o.be         = obi_a_i.be;
  assign rel_a_o.a_optional = obi_a_i.a_optional;

  relobi_ecc_enc #(.DataWidth(AddrWidth), .ParityWidth(AddrEccWidth)) i_addr_enc (
    .data_i(obi_a_i.addr), .parity_o(rel_a_o.addr_ecc)
  );
  relobi_ecc_enc #(.DataWidth(DataWidth), .ParityWidth(DataEccWidth)) i_wdata_enc (
    .data_i(obi_a_i.wdata), .parity_o(rel_a_o.wdata_ecc)
  );
  relobi_ecc_enc #(.DataWidth(AOtherWidth), .ParityWidth(AOtherEccWidth)) i_aother_enc (
    .data_i({obi_a_i.we, obi_a_i.be, obi_a_i.a_optional}), .parity_o(rel_a_o.a_other_ecc)
  );

  // ---- R channel ----
  relobi_tmr_voter #(.Width(1)) i_rvalid_vote (
    .a_i(rel_rvalid_i[0]), .b_i(rel_rvalid_i[1]), .c_i(rel_rvalid_i[2]),
    .y_o(obi_rvalid_o), .mismatch_o(rvalid_mm)
  );

  relobi_ecc_dec #(.DataWidth(DataWidth), .ParityWidth(DataEccWidth)) i_rdata_dec (
    .data_i(rel_r_i.rdata), .parity_i(rel_r_i.rdata_ecc),
    .data_o(obi_r_o.rdata), .parity_o(rdata_ecc_unused),
    .single_err_o(rdata_se), .uncorrectable_o(rdata_ue)
  );
  relobi_ecc_dec #(.DataWidth(ROtherWidth), .ParityWidth(ROtherEccWidth)) i_rother_dec (
    .data_i(rel_r_i.r_optional), .parity_i(rel_r_i.r_other_ecc),
    .data_o(obi_r_o.r_optional), .parity_o(rother_ecc_unused),
    .single_err_o(rother_se), .uncorrectable_o(rother_ue)
  );

  // ECC results only matter while a response is valid
  assign err_o.corrected     = gnt_mm | rvalid_mm | (obi_rvalid_o & (rdata_se | rother_se));
  assign err_o.uncorrectable = obi_rvalid_o & (rdata_ue | rother_ue);

  // OBI rule on the manager side: a request is held, unchanged, until granted
  property p_req_stable;
    @(posedge clk_i) disable iff (!rst_ni)
      (obi_req_i && !obi_gnt_o) |=> (obi_req_i && $stable(obi_a_i));
  endproperty
  a_req_stable: assert property (p_req_stable)
    else $error("OBI manager changed or dropped a request before grant");

endmodule
