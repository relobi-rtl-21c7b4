// tb_relobi_ref_pkg: reference model of the relOBI encoding for testbenches.
//
// Written independently of the RTL: the Hsiao columns are rebuilt here by
// counting set bits in a loop, and encoding/decoding is done bit by bit.
// Also holds the response a test subordinate returns for a request, so that
// a manager can tell whether it got the response to its own request.
package tb_relobi_ref_pkg;
  import relobi_pkg::*;

  // j-th odd-weight (>= 3) vector of r bits, ascending
  function automatic logic [7:0] ref_col(int j, int r);
    int n = 0;
    for (int v = 0; v < (1 << r); v++) begin
      int w = 0;
      for (int b = 0; b < r; b++) w += (v >> b) & 1;
      if (w >= 3 && (w & 1) == 1) begin
        if (n == j) return 8'(v);
        n++;
      end
    end
    return 8'h00;
  endfunction

  function automatic logic [7:0] ref_enc(logic [63:0] d, int k, int r);
    logic [7:0] p = '0;
    for (int j = 0; j < k; j++) if (d[j]) p ^= ref_col(j, r);
    return p;
  endfunction

  // status: 0 clean, 1 corrected, 2 uncorrectable
  function automatic logic [63:0] ref_dec(logic [63:0] d, logic [7:0] p, int k, int r,
                                          output int status);
    logic [7:0]  s = ref_enc(d, k, r) ^ p;
    logic [63:0] o = d;
    s &= 8'((1 << r) - 1);
    status = 0;
    if (s != 0) begin
      status = 2;
      for (int j = 0; j < k; j++) if (s == ref_col(j, r)) begin o[j] = ~o[j]; status = 1; end
      for (int i = 0; i < r; i++) if (s == 8'(1 << i)) status = 1;
    end
    return o;
  endfunction

  function automatic relobi_a_t ref_enc_a(obi_a_t a);
    relobi_a_t x;
    x.addr        = a.addr;
    x.wdata       = a.wdata;
    x.we          = a.we;
    x.be          = a.be;
    x.a_optional  = a.a_optional;
    x.addr_ecc    = AddrEccWidth'(ref_enc(64'(a.addr), AddrWidth, AddrEccWidth));
    x.wdata_ecc   = DataEccWidth'(ref_enc(64'(a.wdata), DataWidth, DataEccWidth));
    x.a_other_ecc = AOtherEccWidth'(ref_enc(64'({a.we, a.be, a.a_optional}), AOtherWidth,
                                             AOtherEccWidth));
    return x;
  endfunction

  // decode; status = worst of the three fields
  function automatic obi_a_t ref_dec_a(relobi_a_t x, output int status);
    obi_a_t a;
    int s0, s1, s2;
    a.addr  = AddrWidth'(ref_dec(64'(x.addr), 8'(x.addr_ecc), AddrWidth, AddrEccWidth, s0));
    a.wdata = DataWidth'(ref_dec(64'(x.wdata), 8'(x.wdata_ecc), DataWidth, DataEccWidth, s1));
    {a.we, a.be, a.a_optional} = AOtherWidth'(ref_dec(64'({x.we, x.be, x.a_optional}),
                                    8'(x.a_other_ecc), AOtherWidth, AOtherEccWidth, s2));
    status = s0 > s1 ? s0 : s1;
    status = status > s2 ? status : s2;
    return a;
  endfunction

  function automatic relobi_r_t ref_enc_r(obi_r_t r);
    relobi_r_t x;
    x.rdata       = r.rdata;
    x.r_optional  = r.r_optional;
    x.rdata_ecc   = DataEccWidth'(ref_enc(64'(r.rdata), DataWidth, DataEccWidth));
    x.r_other_ecc = ROtherEccWidth'(ref_enc(64'(r.r_optional), ROtherWidth, ROtherEccWidth));
    return x;
  endfunction

  function automatic obi_r_t ref_dec_r(relobi_r_t x, output int status);
    obi_r_t r;
    int s0, s1;
    r.rdata      = DataWidth'(ref_dec(64'(x.rdata), 8'(x.rdata_ecc), DataWidth, DataEccWidth, s0));
    r.r_optional = ROtherWidth'(ref_dec(64'(x.r_optional), 8'(x.r_other_ecc), ROtherWidth,
                                        ROtherEccWidth, s1));
    status = s0 > s1 ? s0 : s1;
    return r;
  endfunction

  // response of test subordinate `sbr` to request `a`
  function automatic obi_r_t resp_for(obi_a_t a, int sbr);
    obi_r_t r;
    r.rdata      = (a.addr * 32'h9E37_79B9) ^ a.wdata ^ {28'h0, 4'(sbr)} ^ {a.a_optional, 3'b0, a.we, a.be};
    r.r_optional = a.addr[8:0] ^ 9'(sbr << 5) ^ {a.we, 8'h00};
    return r;
  endfunction

  function automatic obi_a_t rand_a(int region, int region_shift);
    obi_a_t a;
    a.addr       = $urandom();
    a.addr       = (a.addr & ((32'h1 << region_shift) - 1)) | (32'(region) << region_shift);
    a.we         = 1'($urandom());
    a.be         = 4'($urandom());
    a.wdata      = $urandom();
    a.a_optional = 24'($urandom());
    return a;
  endfunction

endpackage
