// tb_relobi_voted_mux: 6-input, 114-bit voted multiplexer. With three equal
// select copies, or with one copy wrong, the output must be the input named
// by the majority; the mismatch flag must report the disagreement.
module tb_relobi_voted_mux;
  localparam int N = 6, W = 114;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0][2:0]     sel;
  logic [N-1:0][W-1:0] data;
  logic [W-1:0]        y;
  logic                mm;

  relobi_voted_mux #(.NumIn(N), .Width(W)) dut (
    .sel_i(sel), .data_i(data), .data_o(y), .mismatch_o(mm));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 1000; n++) begin
      int s, bad;
      @(negedge clk);
      for (int m = 0; m < N; m++)
        for (int w = 0; w < W; w += 32) data[m][w +: 32] = $urandom();
      s = $urandom_range(N - 1, 0);
      bad = $urandom_range(3, 0);
      sel = {3{3'(s)}};
      if (bad < 3) sel[bad] = 3'((s + $urandom_range(N - 1, 1)) % N);
      #1;
      chk(y == data[s], $sformatf("output for select %0d (copy %0d wrong)", s, bad));
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
