// relobi_decoder: relOBI -> plain OBI subordinate interface.
//
// Sits next to an OBI subordinate (a memory bank, a peripheral) and turns the
// relOBI bus from the interconnect back into plain OBI. A channel: the three
// req wires are voted into one req; the subordinate's gnt is copied onto three
// gnt wires. Address, write data and {we, be, a_optional} are corrected by
// their SECDED decoders before the subordinate sees them. R channel: rvalid
// is copied onto three wires, read data and r_optional get fresh check bits.
// Purely combinational, no added latency.
//
// Structure follows the paper's decoder figure. The error report and the
// Hsiao code are this design's choices. An assertion checks that the
// interconnect keeps a request stable until it is granted, as OBI requires.
// Lint notes that rst_ni is used both as an asynchronous reset (in the
// voted state registers) and synchronously (to disable the handshake
// assertion during reset). The assertion is simulation-only, so this is
// intended and leaves no synchronous use of the reset in the circuit.
module relobi_decoder
  import relobi_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // relOBI side (from the interconnect)
  input  logic [2:0]  rel_req_i,
  output logic [2:0]  rel_gnt_o,
  input  relobi_a_t   rel_a_i,
  output logic [2:0]  rel_rvalid_o,
  output relobi_r_t   rel_r_o,
  // OBI side (towards the subordinate)
  output logic        obi_req_o,
  input  logic        obi_gnt_i,
  output obi_a_t      obi_a_o,
  input  logic        obi_rvalid_i,
  input  obi_r_t      obi_r_i,
  // error report
  output relobi_err_t err_o
);

  logic req_mm;
  logic addr_se, addr_ue, wdata_se, wdata_ue, aother_se, aother_ue;
  logic [AddrEccWidth-1:0]   addr_ecc_unused;
  logic [DataEccWidth-1:0]   wdata_ecc_unused;
  logic [AOtherEccWidth-1:0] aother_ecc_unused;

  // ---- A channel ----
  relobi_tmr_voter #(.Width(1)) i_req_vote (
    .a_i(rel_req_i[0]), .b_i(rel_req_i[1]), .c_i(rel_req_i[2]),
    .y_o(obi_req_o), .mismatch_o(req_mm)
  );
  assign rel_gnt_o = {3{obi_gnt_i}};

  relobi_ecc_dec #(.DataWidth(AddrWidth), .ParityWidth(AddrEccWidth)) i_addr_dec (
    .data_i(rel_a_i.addr), .parity_i(rel_a_i.addr_ecc),
    .data_o(obi_a_o.addr), .parity_o(addr_ecc_unused),
    .single_err_o(addr_se), .uncorrectable_o(addr_ue)
  );
  relobi_ecc_dec #(.DataWidth(DataWidth), .ParityWidth(DataEccWidth)) i_wdata_dec (
    .data_i(rel_a_i.wdata), .parity_i(rel_a_i.wdata_ecc),
    .data_o(obi_a_o.wdata), .parity_o(wdata_ecc_unused),
    .single_err_o(wdata_se), .uncorrectable_o(wdata_ue)
  );
  relobi_ecc_dec #(.DataWidth(AOtherWidth), .ParityWidth(AOtherEccWidth)) i_aother_dec (
    .data_i({rel_a_i.we, rel_a_i.be, rel_a_i.a_optional}), .parity_i(rel_a_i.a_other_ecc),
    .data_o({obi_a_o.we, obi_a_o.be, obi_a_o.a_optional}), .parity_o(aother_ecc_unused),
    .single_err_o(aother_se), .uncorrectable_o(aother_ue)
  );

  // ---- R channel ----
  assign rel_rvalid_o       = {3{obi_rvalid_i}};
  assign rel_r_o.rdata      = obi_r_i.rdata;
  assign rel_r_o.r_optional = obi_r_i.r_optional;

  relobi_ecc_enc #(.DataWidth(DataWidth), .ParityWidth(DataEccWidth)) i_rdata_enc (
    .data_i(obi_r_i.rdata), .parity_o(rel_r_o.rdata_ecc)
  );
  relobi_ecc_enc #(.DataWidth(ROtherWidth), .ParityWidth(ROtherEccWidth)) i_rother_enc (
    .data_i(obi_r_i.r_optional), .parity_o(rel_r_o.r_other_ecc)
  );

  // ECC results only matter while a request is presented
  assign err_o.corrected     = req_mm | (obi_req_o & (addr_se | wdata_se | aother_se));
  assign err_o.uncorrectable = obi_req_o & (addr_ue | wdata_ue | aother_ue);

  property p_req_stable;
    @(posedge clk_i) disable iff (!rst_ni)
      (obi_req_o && !obi_gnt_i) |=> (obi_req_o && $stable(obi_a_o));
  endproperty
  a_req_stable: assert property (p_req_stable)
    else $error("interconnect changed or dropped a request before grant");

endmodule
