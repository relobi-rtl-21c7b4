// tb_relobi_ecc_dec: encodes random words with the reference encoder, flips
// none, one or two random bits of the codeword (data or check bits) and
// checks the decoder: clean words pass unchanged, single errors are
// corrected (data and check bits) and flagged, double errors are flagged as
// uncorrectable. Field sizes 32/7 and 9/6.
module tb_relobi_ecc_dec;
  import tb_relobi_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] d32, o32; logic [6:0] p32, q32; logic se32, ue32;
  logic [8:0]  d9,  o9;  logic [5:0] p9,  q9;  logic se9,  ue9;

  relobi_ecc_dec #(.DataWidth(32), .ParityWidth(7)) dut32 (
    .data_i(d32), .parity_i(p32), .data_o(o32), .parity_o(q32),
    .single_err_o(se32), .uncorrectable_o(ue32));
  relobi_ecc_dec #(.DataWidth(9), .ParityWidth(6)) dut9 (
    .data_i(d9), .parity_i(p9), .data_o(o9), .parity_o(q9),
    .single_err_o(se9), .uncorrectable_o(ue9));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 1500; n++) begin
      logic [31:0] w32; logic [6:0] c32; logic [38:0] cw32;
      logic [8:0]  w9;  logic [5:0] c9;  logic [14:0] cw9;
      int nerr, a, b;
      w32 = $urandom(); c32 = 7'(ref_enc(64'(w32), 32, 7));
      w9  = 9'($urandom()); c9 = 6'(ref_enc(64'(w9), 9, 6));
      nerr = n % 3;
      cw32 = {w32, c32}; cw9 = {w9, c9};
      a = $urandom_range(38, 0); b = (a + $urandom_range(37, 1)) % 39;
      if (nerr >= 1) cw32[a] = ~cw32[a];
      if (nerr == 2) cw32[b] = ~cw32[b];
      a = $urandom_range(14, 0); b = (a + $urandom_range(13, 1)) % 15;
      if (nerr >= 1) cw9[a] = ~cw9[a];
      if (nerr == 2) cw9[b] = ~cw9[b];
      @(negedge clk);
      {d32, p32} = cw32; {d9, p9} = cw9;
      #1;
      if (nerr < 2) begin
        chk(o32 == w32 && q32 == c32, $sformatf("32-bit word, %0d errors, not restored", nerr));
        chk(o9 == w9 && q9 == c9, $sformatf("9-bit word, %0d errors, not restored", nerr));
        chk(se32 == (nerr == 1) && !ue32, $sformatf("32-bit flags %b%b for %0d errors", se32, ue32, nerr));
        chk(se9 == (nerr == 1) && !ue9, $sformatf("9-bit flags %b%b for %0d errors", se9, ue9, nerr));
      end else begin
        chk(ue32 && !se32, "32-bit double error not detected");
        chk(ue9 && !se9, "9-bit double error not detected");
      end
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
