// relobi_voted_mux: multiplexer for ECC-protected packets whose select is
// triplicated and voted separately for every data bit.
//
// relOBI does not triplicate packets, so selecting one of NumIn packets goes
// through a single multiplexer. Its select, however, comes from three copies
// of the control logic. A single shared voter would be a weak point: one
// transient in it would switch the whole packet to the wrong input, which no
// ECC can repair. Here every output bit has its own voter on the three select
// copies and its own select decode, so a transient in one voter or decoder
// changes at most one bit of the packet, which its ECC corrects downstream.
//
// The select is kept in bit-plane form: plane i holds bit i of the select,
// repeated once per data bit, and the three copies are voted plane-wise by a
// Width*SelWidth-bit voter - one 2-of-3 voter per data bit and select bit.
// Input m drives the output bits whose voted select equals m.
// Purely combinational. An out-of-range select yields zero.
//
// Per-bit voted selection follows the paper; the bit-plane formulation and
// the mismatch report are this design's choices.
module relobi_voted_mux #(
  parameter int unsigned NumIn = 6,
  parameter int unsigned Width = 114,
  localparam int unsigned SelWidth = (NumIn > 1) ? $clog2(NumIn) : 1
) (
  input  logic [2:0][SelWidth-1:0]   sel_i,
  input  logic [NumIn-1:0][Width-1:0] data_i,
  output logic [Width-1:0]           data_o,
  output logic                       mismatch_o
);

  logic [2:0][SelWidth-1:0][Width-1:0] plane;
  logic [SelWidth-1:0][Width-1:0]      plane_v;

  always_comb begin
    for (int unsigned k = 0; k < 3; k++)
      for (int unsigned i = 0; i < SelWidth; i++)
        plane[k][i] = {Width{sel_i[k][i]}};
  end

  relobi_tmr_voter #(.Width(SelWidth * Width)) i_vote (
    .a_i(plane[0]), .b_i(plane[1]), .c_i(plane[2]), .y_o(plane_v), .mismatch_o(mismatch_o)
  );

  always_comb begin
    data_o = '0;
    for (int unsigned m = 0; m < NumIn; m++) begin
      logic [Width-1:0] hit;
      hit = '1;
      for (int unsigned i = 0; i < SelWidth; i++)
        hit &= ((m >> i) & 1) != 0 ? plane_v[i] : ~plane_v[i];
      data_o |= hit & data_i[m];
    end
  end

endmodule
