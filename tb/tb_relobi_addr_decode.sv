// tb_relobi_addr_decode: checks one address-decoder copy.
// Default map (eight 512 MiB windows): the port must be address[31:29] for
// clean addresses and for addresses with one flipped bit (address or check
// bits), with the single-error flag; two flipped bits must be flagged
// uncorrectable. A second instance with a sparse, overlapping map checks
// first-match priority, the default port and the miss flag.
module tb_relobi_addr_decode;
  import relobi_pkg::*;
  import tb_relobi_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] addr, addr2;
  logic [6:0]  ecc, ecc2;
  logic [2:0]  sel;
  logic [1:0]  sel2;
  logic        miss, se, ue, miss2, se2, ue2;

  relobi_addr_decode dut (
    .addr_i(addr), .addr_ecc_i(ecc), .sel_o(sel), .dec_miss_o(miss),
    .single_err_o(se), .uncorrectable_o(ue));

  // rule 0: 0x1000..0x1FFF -> 2, rule 1: 0x1800..0x27FF -> 1 (overlap, loses),
  // rule 2: 0x8000_0000..0x8FFF_FFFF -> 3, everything else -> default 0
  localparam addr_rule_t [2:0] Map = '{
    '{idx: 32'd3, start_addr: 32'h8000_0000, end_addr: 32'h8FFF_FFFF},
    '{idx: 32'd1, start_addr: 32'h0000_1800, end_addr: 32'h0000_27FF},
    '{idx: 32'd2, start_addr: 32'h0000_1000, end_addr: 32'h0000_1FFF}
  };
  relobi_addr_decode #(.NumSbr(4), .NumRules(3), .AddrMap(Map), .DefaultIdx(0)) dut2 (
    .addr_i(addr2), .addr_ecc_i(ecc2), .sel_o(sel2), .dec_miss_o(miss2),
    .single_err_o(se2), .uncorrectable_o(ue2));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int ref_sel2(logic [31:0] a, output bit m);
    m = 0;
    if (a >= 32'h1000 && a <= 32'h1FFF) return 2;
    if (a >= 32'h1800 && a <= 32'h27FF) return 1;
    if (a >= 32'h8000_0000 && a <= 32'h8FFF_FFFF) return 3;
    m = 1;
    return 0;
  endfunction

  initial begin
    for (int n = 0; n < 1500; n++) begin
      logic [31:0] a, a2; logic [38:0] cw; int nerr, p, q;
      bit m2; int s2;
      a = $urandom();
      nerr = n % 3;
      cw = {a, 7'(ref_enc(64'(a), 32, 7))};
      p = $urandom_range(38, 0); q = (p + $urandom_range(37, 1)) % 39;
      if (nerr >= 1) cw[p] = ~cw[p];
      if (nerr == 2) cw[q] = ~cw[q];
      case (n % 4)
        0: a2 = 32'h1000 + ($urandom() % 32'h2000);
        1: a2 = 32'h8000_0000 + $urandom_range(32'h0FFF_FFFF, 0) * (n % 2) + (n % 2 ? 0 : 32'h1000_0000);
        default: a2 = $urandom();
      endcase
      @(negedge clk);
      {addr, ecc} = cw;
      addr2 = a2; ecc2 = 7'(ref_enc(64'(a2), 32, 7));
      #1;
      if (nerr < 2) begin
        chk(sel == a[31:29], $sformatf("port %0d for %h", sel, a));
        chk(se == (nerr == 1) && !ue && !miss, "flags after 0/1 errors");
      end else begin
        chk(ue && !se, "double error not flagged");
      end
      s2 = ref_sel2(a2, m2);
      chk(sel2 == 2'(s2) && miss2 == m2 && !se2 && !ue2,
          $sformatf("sparse map: %h -> %0d/%b exp %0d/%b", a2, sel2, miss2, s2, m2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
