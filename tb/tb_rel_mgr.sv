// tb_rel_mgr: relOBI test manager.
//
// Issues NumReq random requests (random region out of NumRegions, each region
// being 2**RegionShift bytes), holds each until the voted grant, and checks
// every response, in order, against the response the test subordinate of the
// target region must return. Responses are decoded with the reference model;
// an uncorrectable word counts as a failure. When `inject` is high at a
// clock edge, one randomly chosen wire of the outgoing link (one of the three
// req copies or one packet bit) is inverted during the following cycle.
module tb_rel_mgr
  import relobi_pkg::*;
  import tb_relobi_ref_pkg::*;
#(
  parameter int Id          = 0,
  parameter int NumReq      = 100,
  parameter int NumRegions  = 8,
  parameter int FirstRegion = 0,
  parameter int RegionShift = 29,
  parameter int ReqPct      = 60
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       enable_i,
  input  logic       inject_i,
  input  longint     cyc_i,
  output logic [2:0] req_o,
  input  logic [2:0] gnt_i,
  output relobi_a_t  a_o,
  input  logic [2:0] rvalid_i,
  input  relobi_r_t  r_i,
  output int         checks,
  output int         failures,
  output int         issued,
  output int         completed,
  output longint     first_req_cycle
);

  localparam int AW = $bits(relobi_a_t);

  logic       req_q;
  obi_a_t     a_q;
  int         region_q;
  obi_r_t     exp_q[$];
  logic [2:0] req_flip;
  logic [AW-1:0] a_flip;

  assign req_o = {3{req_q}} ^ req_flip;
  assign a_o   = relobi_a_t'(ref_enc_a(a_q) ^ a_flip);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      req_q <= 1'b0; a_q <= '0; region_q <= 0;
      checks <= 0; failures <= 0; issued <= 0; completed <= 0;
      first_req_cycle <= -1;
      req_flip <= '0; a_flip <= '0;
    end else begin
      // fault injection for the next cycle
      req_flip <= '0; a_flip <= '0;
      if (inject_i) begin
        automatic int pos = $urandom_range(AW + 2, 0);
        if (pos < 3) req_flip[pos] <= 1'b1;
        else         a_flip[pos-3] <= 1'b1;
      end

      if (req_q && first_req_cycle < 0) first_req_cycle <= cyc_i;

      // request side
      if (req_q && maj3(gnt_i[0], gnt_i[1], gnt_i[2])) begin
        exp_q.push_back(resp_for(a_q, region_q));
        issued <= issued + 1;
        req_q  <= 1'b0;
      end
      if ((!req_q || maj3(gnt_i[0], gnt_i[1], gnt_i[2])) && enable_i &&
          (issued + int'(req_q)) < NumReq && $urandom_range(99, 0) < ReqPct) begin
        automatic int region = FirstRegion + $urandom_range(NumRegions - 1, 0);
        req_q    <= 1'b1;
        region_q <= region;
        a_q      <= rand_a(region, RegionShift);
      end

      // response side
      if (maj3(rvalid_i[0], rvalid_i[1], rvalid_i[2])) begin
        int st;
        obi_r_t got;
        got = ref_dec_r(r_i, st);
        checks <= checks + 1;
        if (exp_q.size() == 0) begin
          failures <= failures + 1;
          $display("[mgr %0d] response without request", Id);
        end else begin
          automatic obi_r_t exp = exp_q.pop_front();
          if (st == 2 || got != exp) begin
            failures <= failures + 1;
            $display("[mgr %0d] bad response: got %h exp %h (ecc status %0d)", Id, got, exp, st);
          end
          completed <= completed + 1;
        end
      end
    end
  end

endmodule
