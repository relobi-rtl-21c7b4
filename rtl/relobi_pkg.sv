// relobi_pkg: shared widths, packet types and helper functions for the
// relOBI interconnect.
//
// An OBI bus in this configuration carries 137 signals: req, gnt, a 32-bit
// address, 32-bit write data, we, a 4-bit byte enable, 24 bits of optional
// A-channel fields, rvalid, 32-bit read data and 9 bits of optional R-channel
// fields. relOBI keeps the same payload but triplicates the three handshake
// signals (req, gnt, rvalid) and adds SECDED check bits: 7 on the address,
// 7 on the write data, 7 on the group {we, be, a_optional}, 7 on the read
// data and 6 on the group r_optional. That gives 177 signals in total, the
// figure quoted for this configuration.
//
// The check bits come from a Hsiao code: the column of data bit j in the
// parity-check matrix is the j-th odd-weight vector of weight >= 3 in
// ascending numeric order, and check bit i has the unit column (1 << i).
// The exact code is this design's choice; the paper only asks for ECC.
//
// The optional fields are carried as opaque bit vectors; which OBI optional
// signals they hold (atop, aid, rid, err, ...) is left to the integrator.
package relobi_pkg;

  // ---------------------------------------------------------------------------
  // Widths
  // ---------------------------------------------------------------------------
  localparam int unsigned AddrWidth   = 32;
  localparam int unsigned DataWidth   = 32;
  localparam int unsigned BeWidth     = DataWidth / 8;
  localparam int unsigned AOptWidth   = 24;
  localparam int unsigned ROptWidth   = 9;
  // {we, be, a_optional} are protected together
  localparam int unsigned AOtherWidth = 1 + BeWidth + AOptWidth;  // 29
  localparam int unsigned ROtherWidth = ROptWidth;                // 9

  localparam int unsigned AddrEccWidth   = 7;
  localparam int unsigned DataEccWidth   = 7;
  localparam int unsigned AOtherEccWidth = 7;
  localparam int unsigned ROtherEccWidth = 6;

  // Upper bounds for the Hsiao column generator
  localparam int unsigned MaxEccData   = 64;
  localparam int unsigned MaxEccParity = 8;

  // ---------------------------------------------------------------------------
  // Packets
  // ---------------------------------------------------------------------------
  // Plain OBI A channel payload (everything but req/gnt)
  typedef struct packed {
    logic [AddrWidth-1:0] addr;
    logic                 we;
    logic [BeWidth-1:0]   be;
    logic [DataWidth-1:0] wdata;
    logic [AOptWidth-1:0] a_optional;
  } obi_a_t;

  // Plain OBI R channel payload (everything but rvalid)
  typedef struct packed {
    logic [DataWidth-1:0] rdata;
    logic [ROptWidth-1:0] r_optional;
  } obi_r_t;

  // relOBI A channel payload: OBI payload plus check bits
  typedef struct packed {
    logic [AddrWidth-1:0]      addr;
    logic [AddrEccWidth-1:0]   addr_ecc;
    logic [DataWidth-1:0]      wdata;
    logic [DataEccWidth-1:0]   wdata_ecc;
    logic                      we;
    logic [BeWidth-1:0]        be;
    logic [AOptWidth-1:0]      a_optional;
    logic [AOtherEccWidth-1:0] a_other_ecc;
  } relobi_a_t;

  // relOBI R channel payload: OBI payload plus check bits
  typedef struct packed {
    logic [DataWidth-1:0]      rdata;
    logic [DataEccWidth-1:0]   rdata_ecc;
    logic [ROptWidth-1:0]      r_optional;
    logic [ROtherEccWidth-1:0] r_other_ecc;
  } relobi_r_t;

  // Error report of a relOBI block: a fault was corrected (voter mismatch or
  // single-bit ECC error), or an ECC word was found uncorrectable.
  typedef struct packed {
    logic corrected;
    logic uncorrectable;
  } relobi_err_t;

  // Address map rule: addresses start_addr..end_addr (inclusive) go to idx
  typedef struct packed {
    logic [31:0]          idx;
    logic [AddrWidth-1:0] start_addr;
    logic [AddrWidth-1:0] end_addr;
  } addr_rule_t;

  // Default map of the 6x8 crossbar: eight 512 MiB windows
  localparam addr_rule_t [7:0] DefaultAddrMap = '{
    '{idx: 32'd7, start_addr: 32'hE000_0000, end_addr: 32'hFFFF_FFFF},
    '{idx: 32'd6, start_addr: 32'hC000_0000, end_addr: 32'hDFFF_FFFF},
    '{idx: 32'd5, start_addr: 32'hA000_0000, end_addr: 32'hBFFF_FFFF},
    '{idx: 32'd4, start_addr: 32'h8000_0000, end_addr: 32'h9FFF_FFFF},
    '{idx: 32'd3, start_addr: 32'h6000_0000, end_addr: 32'h7FFF_FFFF},
    '{idx: 32'd2, start_addr: 32'h4000_0000, end_addr: 32'h5FFF_FFFF},
    '{idx: 32'd1, start_addr: 32'h2000_0000, end_addr: 32'h3FFF_FFFF},
    '{idx: 32'd0, start_addr: 32'h0000_0000, end_addr: 32'h1FFF_FFFF}
  };

  // ---------------------------------------------------------------------------
  // Functions
  // ---------------------------------------------------------------------------
  typedef logic [MaxEccData-1:0][MaxEccParity-1:0] hsiao_matrix_t;

  // Columns of the Hsiao parity-check matrix for k data bits and r check bits:
  // entry j is the j-th odd-weight (>= 3) r-bit vector in ascending order.
  function automatic hsiao_matrix_t hsiao_columns(int unsigned k, int unsigned r);
    hsiao_matrix_t cols;
    int unsigned   n;
    cols = '0;
    n    = 0;
    for (int unsigned v = 0; v < (32'd1 << r); v++) begin
      if (($countones(v) >= 3) && ($countones(v) % 2 == 1) && (n < k)) begin
        cols[n] = MaxEccParity'(v);
        n++;
      end
    end
    return cols;
  endfunction

  typedef logic [MaxEccParity-1:0][MaxEccData-1:0] hsiao_rows_t;

  // Rows of the same matrix: row i marks the data bits that check bit i covers
  function automatic hsiao_rows_t hsiao_rows(int unsigned k, int unsigned r);
    hsiao_matrix_t cols;
    hsiao_rows_t   rows;
    cols = hsiao_columns(k, r);
    rows = '0;
    for (int unsigned j = 0; j < MaxEccData; j++)
      for (int unsigned i = 0; i < MaxEccParity; i++)
        rows[i][j] = cols[j][i];
    return rows;
  endfunction

  // Bitwise 2-of-3 majority
  function automatic logic maj3(logic a, logic b, logic c);
    return (a & b) | (a & c) | (b & c);
  endfunction

endpackage
