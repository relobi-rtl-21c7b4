// tb_relobi_encoder: drives random OBI requests and relOBI responses into the
// encoder. Checks that req is copied three times, the A packet equals the
// reference encoding, gnt and rvalid are voted correctly when one copy is
// disturbed, responses with a single flipped bit are corrected, responses
// with two flipped bits are flagged uncorrectable, and the error report
// matches. Requests follow OBI: one is only dropped in a granted cycle.
module tb_relobi_encoder;
  import relobi_pkg::*;
  import tb_relobi_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        obi_req, obi_gnt, obi_rvalid;
  obi_a_t      obi_a;
  obi_r_t      obi_r;
  logic [2:0]  rel_req, rel_gnt, rel_rvalid;
  relobi_a_t   rel_a;
  relobi_r_t   rel_r;
  relobi_err_t err;

  relobi_encoder dut (
    .clk_i(clk), .rst_ni(rst_n),
    .obi_req_i(obi_req), .obi_gnt_o(obi_gnt), .obi_a_i(obi_a),
    .obi_rvalid_o(obi_rvalid), .obi_r_o(obi_r),
    .rel_req_o(rel_req), .rel_gnt_i(rel_gnt), .rel_a_o(rel_a),
    .rel_rvalid_i(rel_rvalid), .rel_r_i(rel_r), .err_o(err)
  );

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [2:0] disturb(logic v, int mode);
    // mode 0: clean, 1: one copy flipped, 2: two copies flipped
    logic [2:0] x = {3{v}};
    int p = $urandom_range(2, 0);
    if (mode >= 1) x[p] = ~x[p];
    if (mode == 2) x[(p + 1) % 3] = ~x[(p + 1) % 3];
    return x;
  endfunction

  initial begin
    obi_req = 0; obi_a = '0; rel_gnt = '0; rel_rvalid = '0; rel_r = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      logic gnt_v, rv_v; int gmode, rmode, nflip;
      obi_r_t r;
      relobi_r_t rr;
      @(negedge clk);
      // OBI: keep the request unless it was granted in the last cycle
      if (!obi_req || obi_gnt) begin
        obi_req = 1'($urandom());
        obi_a   = rand_a($urandom_range(7, 0), 29);
      end
      gnt_v = 1'($urandom()); gmode = $urandom_range(1, 0);
      rel_gnt = disturb(gnt_v, gmode);
      rv_v = 1'($urandom()); rmode = $urandom_range(1, 0);
      rel_rvalid = disturb(rv_v, rmode);
      r.rdata = $urandom(); r.r_optional = 9'($urandom());
      rr = ref_enc_r(r);
      nflip = $urandom_range(2, 0);
      begin
        automatic logic [$bits(relobi_r_t)-1:0] bits = rr;
        automatic int a = $urandom_range($bits(relobi_r_t) - 1, 0);
        automatic int b = (a + $urandom_range(7, 1)) % $bits(relobi_r_t);
        // the two flips land in the same field with high probability only if
        // both are in rdata; keep double errors inside rdata for a clean check
        if (nflip == 2) begin a = $urandom_range(53, 22); b = (a == 22) ? 23 : a - 1; end
        if (nflip >= 1) bits[a] = ~bits[a];
        if (nflip == 2) bits[b] = ~bits[b];
        rel_r = relobi_r_t'(bits);
      end
      #1;
      chk(rel_req == {3{obi_req}}, "req not triplicated");
      chk(rel_a == ref_enc_a(obi_a), "A packet differs from reference encoding");
      chk(obi_gnt == gnt_v, "gnt vote");
      chk(obi_rvalid == rv_v, "rvalid vote");
      if (nflip < 2) chk(obi_r == r, "response not corrected");
      chk(err.uncorrectable == (rv_v && nflip == 2), "uncorrectable flag");
      chk(err.corrected == (gmode == 1 || rmode == 1 || (rv_v && nflip == 1)), "corrected flag");
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
