// tb_relobi_tmr_reg: checks the triplicated register: reset value, one cycle
// delay, every copy reading the majority of the three stored values when one
// copy was written differently (a modelled upset), and the mismatch flag.
module tb_relobi_tmr_reg;
  localparam int W = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0][W-1:0] d, q;
  logic mm;

  relobi_tmr_reg #(.Width(W), .ResetValue(12'hA5C)) dut (
    .clk_i(clk), .rst_ni(rst_n), .d_i(d), .q_o(q), .mismatch_o(mm));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    d = '0;
    @(posedge clk); #1;
    chk(q == {3{12'hA5C}} && !mm, "reset value");
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      logic [W-1:0] v; int bad;
      v = W'($urandom());
      bad = $urandom_range(3, 0);  // 3: all copies equal
      @(negedge clk);
      d = {3{v}};
      if (bad < 3) d[bad] = v ^ W'($urandom_range(4095, 1));
      @(posedge clk); #1;
      chk(q[0] == v && q[1] == v && q[2] == v, $sformatf("voted value, upset copy %0d", bad));
      chk(mm == (bad < 3), "mismatch flag");
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
