// relobi_addr_decode: one copy of the crossbar's address decoder.
//
// The address travels through relOBI with its own check bits and is not
// triplicated. To route a request, the demultiplexer needs the target port,
// so the crossbar instantiates this block three times per manager, one for
// each copy of the handshake logic. Each copy corrects the address with its
// own SECDED decoder and then looks it up in the address map: the first rule
// whose inclusive range [start_addr, end_addr] holds the address gives the
// port index; if none does, DefaultIdx is used and dec_miss_o is raised.
// Because each copy decodes on its own, a transient in one decoder changes
// only one of three port selections, which the downstream voting outvotes.
// Purely combinational.
//
// Decoding ECC per copy follows the paper (orange blocks of its crossbar
// figure); the rule format, first-match priority and default port are this
// design's choices.
module relobi_addr_decode
  import relobi_pkg::*;
#(
  parameter int unsigned NumSbr   = 8,
  parameter int unsigned NumRules = 8,
  parameter addr_rule_t [NumRules-1:0] AddrMap = DefaultAddrMap,
  parameter int unsigned DefaultIdx = 0,
  localparam int unsigned SelWidth = (NumSbr > 1) ? $clog2(NumSbr) : 1
) (
  input  logic [AddrWidth-1:0]    addr_i,
  input  logic [AddrEccWidth-1:0] addr_ecc_i,
  output logic [SelWidth-1:0]     sel_o,
  output logic                    dec_miss_o,
  output logic                    single_err_o,
  output logic                    uncorrectable_o
);

  logic [AddrWidth-1:0]    addr_corr;
  logic [AddrEccWidth-1:0] ecc_unused;

  relobi_ecc_dec #(.DataWidth(AddrWidth), .ParityWidth(AddrEccWidth)) i_ecc_dec (
    .data_i(addr_i), .parity_i(addr_ecc_i),
    .data_o(addr_corr), .parity_o(ecc_unused),
    .single_err_o(single_err_o), .uncorrectable_o(uncorrectable_o)
  );

  always_comb begin
    sel_o      = SelWidth'(DefaultIdx);
    dec_miss_o = 1'b1;
    // walk the rules from last to first so that the first match wins
    for (int r = NumRules - 1; r >= 0; r--) begin
      if (addr_corr >= AddrMap[r].start_addr && addr_corr <= AddrMap[r].end_addr) begin
        sel_o      = SelWidth'(AddrMap[r].idx);
        dec_miss_o = 1'b0;
      end
    end
  end

endmodule
