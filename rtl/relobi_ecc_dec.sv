// relobi_ecc_dec: SECDED (Hsiao) decoder for one protected field.
//
// Recomputes the check bits of the received data and XORs them with the
// received check bits to form the syndrome. A zero syndrome means the word is
// intact. A syndrome equal to the column of data bit j flips that bit back; a
// syndrome of weight one means a check bit itself was hit, so the data is
// already right and only that check bit is repaired. Both count as a
// corrected single error. Any other non-zero syndrome (even weight: a double
// error; odd weight matching no column) is reported as uncorrectable and the
// data is passed on as received.
// Column matching is done for all data bits at once: data bit j is flipped
// when, for every i, bit i of the syndrome equals bit j of row i.
// Purely combinational, no latency.
//
// Interface: data_i/parity_i in, data_o (corrected) and parity_o (corrected
// check bits), single_err_o and uncorrectable_o flags. The code itself is
// this design's choice.
module relobi_ecc_dec #(
  parameter int unsigned DataWidth   = 32,
  parameter int unsigned ParityWidth = 7
) (
  input  logic [DataWidth-1:0]   data_i,
  input  logic [ParityWidth-1:0] parity_i,
  output logic [DataWidth-1:0]   data_o,
  output logic [ParityWidth-1:0] parity_o,
  output logic                   single_err_o,
  output logic                   uncorrectable_o
);

  localparam relobi_pkg::hsiao_rows_t Rows =
      relobi_pkg::hsiao_rows(DataWidth, ParityWidth);

  logic [ParityWidth-1:0] syndrome;
  logic [DataWidth-1:0]   flip;
  logic                   check_bit_err;

  always_comb begin
    for (int unsigned i = 0; i < ParityWidth; i++)
      syndrome[i] = parity_i[i] ^ (^(data_i & Rows[i][DataWidth-1:0]));

    flip = '1;
    for (int unsigned i = 0; i < ParityWidth; i++)
      flip &= syndrome[i] ? Rows[i][DataWidth-1:0] : ~Rows[i][DataWidth-1:0];
    if (syndrome == '0) flip = '0;

    check_bit_err = ($countones(syndrome) == 1);

    data_o          = data_i ^ flip;
    parity_o        = parity_i ^ (check_bit_err ? syndrome : '0);
    single_err_o    = (|flip) | check_bit_err;
    uncorrectable_o = (syndrome != '0) && !single_err_o;
  end

endmodule
