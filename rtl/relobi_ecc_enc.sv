// relobi_ecc_enc: SECDED (Hsiao) check-bit generator for one protected field.
//
// relOBI protects every non-handshake field with an error-correcting code so
// that any single flipped wire is corrected at the receiving end. This block
// computes the ParityWidth check bits of a DataWidth-bit field: check bit i is
// the XOR of the data bits selected by row i of the Hsiao parity-check matrix
// (see relobi_pkg::hsiao_columns: the column of data bit j is the j-th
// odd-weight vector of weight >= 3). The data itself travels unchanged next to
// the check bits (a separable code), so the field stays readable without
// decoding. Purely combinational, no latency.
//
// The paper specifies ECC per field (address, write data, read data and the
// two groups of remaining signals); the choice of a Hsiao SECDED code is this
// design's.
module relobi_ecc_enc #(
  parameter int unsigned DataWidth   = 32,
  parameter int unsigned ParityWidth = 7
) (
  input  logic [DataWidth-1:0]   data_i,
  output logic [ParityWidth-1:0] parity_o
);

  localparam relobi_pkg::hsiao_rows_t Rows =
      relobi_pkg::hsiao_rows(DataWidth, ParityWidth);

  always_comb begin
    for (int unsigned i = 0; i < ParityWidth; i++)
      parity_o[i] = ^(data_i & Rows[i][DataWidth-1:0]);
  end

endmodule
