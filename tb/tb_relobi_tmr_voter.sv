// tb_relobi_tmr_voter: checks the 2-of-3 voter bit by bit against a count of
// ones, for random inputs, inputs with one copy disturbed and identical
// inputs, and checks the mismatch flag.
module tb_relobi_tmr_voter;
  localparam int W = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [W-1:0] a, b, c, y;
  logic mm;
  int checks = 0, failures = 0;

  relobi_tmr_voter #(.Width(W)) dut (.a_i(a), .b_i(b), .c_i(c), .y_o(y), .mismatch_o(mm));

  initial begin
    for (int n = 0; n < 600; n++) begin
      logic [W-1:0] exp;
      @(negedge clk);
      a = W'($urandom());
      case (n % 3)
        0: begin b = W'($urandom()); c = W'($urandom()); end
        1: begin b = a; c = a ^ W'($urandom()); end
        default: begin b = a; c = a; end
      endcase
      if (n % 5 == 4) begin automatic logic [W-1:0] t = a; a = c; c = t; end
      #1;
      for (int i = 0; i < W; i++) exp[i] = (int'(a[i]) + int'(b[i]) + int'(c[i])) >= 2;
      checks += 2;
      if (y !== exp) begin failures++; $display("FAIL vote %h %h %h -> %h exp %h", a, b, c, y, exp); end
      if (mm !== ((a != b) || (b != c))) begin failures++; $display("FAIL mismatch flag"); end
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
