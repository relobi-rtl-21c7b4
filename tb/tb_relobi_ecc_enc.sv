// tb_relobi_ecc_enc: checks the check bits of the three field sizes used by
// relOBI (32/7, 29/7, 9/6) against an independently written reference
// encoder, and that every single data-bit flip changes at least three check
// bits (a Hsiao column has odd weight >= 3).
module tb_relobi_ecc_enc;
  import tb_relobi_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] d32; logic [6:0] p32;
  logic [28:0] d29; logic [6:0] p29;
  logic [8:0]  d9;  logic [5:0] p9;

  relobi_ecc_enc #(.DataWidth(32), .ParityWidth(7)) dut32 (.data_i(d32), .parity_o(p32));
  relobi_ecc_enc #(.DataWidth(29), .ParityWidth(7)) dut29 (.data_i(d29), .parity_o(p29));
  relobi_ecc_enc #(.DataWidth(9),  .ParityWidth(6)) dut9  (.data_i(d9),  .parity_o(p9));

  task automatic chk(input logic [7:0] got, input logic [7:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  initial begin
    // single-bit data words: the check bits are the column itself
    for (int j = 0; j < 32; j++) begin
      @(negedge clk);
      d32 = 32'h1 << j; d29 = 29'(32'h1 << (j % 29)); d9 = 9'(32'h1 << (j % 9));
      #1;
      checks++;
      if ($countones(p32) < 3 || ($countones(p32) % 2) != 1) begin
        failures++; $display("FAIL column %0d weight", j);
      end
      chk(8'(p32), ref_enc(64'(d32), 32, 7), "enc32 unit");
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      d32 = $urandom(); d29 = 29'($urandom()); d9 = 9'($urandom());
      #1;
      chk(8'(p32), ref_enc(64'(d32), 32, 7), "enc32");
      chk(8'(p29), ref_enc(64'(d29), 29, 7), "enc29");
      chk(8'(p9),  ref_enc(64'(d9), 9, 6),   "enc9");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
