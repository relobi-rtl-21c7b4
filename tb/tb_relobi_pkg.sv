// tb_relobi_pkg: checks the constants and functions of relobi_pkg.
//
// The Hsiao matrices used on the bus (32 data / 7 check bits, 29 / 7 and
// 9 / 6) must have distinct columns of odd weight >= 3, which makes every
// single-bit syndrome unique and every double-bit syndrome of even weight,
// hence detectable. The row form must be the transpose of the column form.
// The packet widths must add up to the 137 (OBI) and 177 (relOBI) signals of
// the bus, and the default address map must tile the 4 GiB address space
// with eight 512 MiB windows in port order. No clock; the watchdog is a
// time-out.
module tb_relobi_pkg;
  import relobi_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic check_code(input int unsigned k, input int unsigned r);
    hsiao_matrix_t cols;
    hsiao_rows_t   rows;
    cols = hsiao_columns(k, r);
    rows = hsiao_rows(k, r);
    for (int unsigned j = 0; j < k; j++) begin
      automatic int w = $countones(cols[j]);
      check(w >= 3 && w % 2 == 1, $sformatf("k=%0d column %0d weight %0d", k, j, w));
      check(cols[j] < (MaxEccParity'(1) << r), $sformatf("k=%0d column %0d too wide", k, j));
      for (int unsigned i = 0; i < j; i++)
        check(cols[i] != cols[j], $sformatf("k=%0d columns %0d and %0d equal", k, i, j));
      for (int unsigned i = 0; i < r; i++)
        check(rows[i][j] == cols[j][i], $sformatf("k=%0d row %0d bit %0d", k, i, j));
    end
  endtask

  initial begin
    check_code(DataWidth, DataEccWidth);
    check_code(AddrWidth, AddrEccWidth);
    check_code(AOtherWidth, AOtherEccWidth);
    check_code(ROtherWidth, ROtherEccWidth);

    check($bits(obi_a_t) + $bits(obi_r_t) + 3 == 137, "OBI bus is not 137 signals");
    check($bits(relobi_a_t) + $bits(relobi_r_t) + 9 == 177, "relOBI bus is not 177 signals");
    check(AOtherWidth == 29, "a_other group width");

    for (int i = 0; i < 8; i++) begin
      check(DefaultAddrMap[i].idx == 32'(i), $sformatf("rule %0d index", i));
      check(DefaultAddrMap[i].start_addr == 32'(i) << 29, $sformatf("rule %0d start", i));
      check(DefaultAddrMap[i].end_addr == ((32'(i) << 29) | 32'h1FFF_FFFF), $sformatf("rule %0d end", i));
    end
    for (int i = 0; i < 8; i++)
      check(maj3(i[0], i[1], i[2]) == ($countones(i[2:0]) >= 2), $sformatf("maj3 %b", i[2:0]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
