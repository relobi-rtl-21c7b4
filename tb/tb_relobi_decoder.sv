// tb_relobi_decoder: drives relOBI requests (with disturbed req copies and
// flipped packet bits) and plain OBI responses into the decoder. Checks the
// voted req, the corrected A fields, the uncorrectable flag for two flipped
// bits in one field, the triplicated gnt/rvalid, the reference encoding of
// the response, and the error report. Requests are held until granted.
module tb_relobi_decoder;
  import relobi_pkg::*;
  import tb_relobi_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0]  rel_req, rel_gnt, rel_rvalid;
  relobi_a_t   rel_a;
  relobi_r_t   rel_r;
  logic        obi_req, obi_gnt, obi_rvalid;
  obi_a_t      obi_a;
  obi_r_t      obi_r;
  relobi_err_t err;

  relobi_decoder dut (
    .clk_i(clk), .rst_ni(rst_n),
    .rel_req_i(rel_req), .rel_gnt_o(rel_gnt), .rel_a_i(rel_a),
    .rel_rvalid_o(rel_rvalid), .rel_r_o(rel_r),
    .obi_req_o(obi_req), .obi_gnt_i(obi_gnt), .obi_a_o(obi_a),
    .obi_rvalid_i(obi_rvalid), .obi_r_i(obi_r), .err_o(err)
  );

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic   req_v;
    obi_a_t a;
    int     rmode, nflip;
    req_v = 0; a = '0;
    rel_req = '0; rel_a = '0; obi_gnt = 0; obi_rvalid = 0; obi_r = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      logic [$bits(relobi_a_t)-1:0] bits;
      @(negedge clk);
      if (!req_v || obi_gnt) begin
        req_v = 1'($urandom());
        a     = rand_a($urandom_range(7, 0), 29);
      end
      rmode = $urandom_range(1, 0);
      rel_req = {3{req_v}};
      if (rmode == 1) rel_req[$urandom_range(2, 0)] ^= 1'b1;
      bits  = ref_enc_a(a);
      // double errors only on idle cycles (a real request must stay intact)
      nflip = req_v ? $urandom_range(1, 0) : $urandom_range(2, 0);
      begin
        automatic int p = $urandom_range($bits(relobi_a_t) - 1, 0);
        // second flip inside the address field (bits 113..82)
        if (nflip == 2) begin p = $urandom_range(113, 83); bits[p - 1] = ~bits[p - 1]; end
        if (nflip >= 1) bits[p] = ~bits[p];
      end
      rel_a = relobi_a_t'(bits);
      obi_gnt = 1'($urandom());
      obi_rvalid = 1'($urandom());
      obi_r.rdata = $urandom(); obi_r.r_optional = 9'($urandom());
      #1;
      chk(obi_req == req_v, "req vote");
      if (nflip < 2) chk(obi_a == a, "A fields not corrected");
      chk(rel_gnt == {3{obi_gnt}}, "gnt not triplicated");
      chk(rel_rvalid == {3{obi_rvalid}}, "rvalid not triplicated");
      chk(rel_r == ref_enc_r(obi_r), "R packet differs from reference encoding");
      chk(err.uncorrectable == (req_v && nflip == 2), "uncorrectable flag");
      chk(err.corrected == (rmode == 1 || (req_v && nflip == 1)), "corrected flag");
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
