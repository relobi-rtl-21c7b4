// tb_obi_mgr: plain OBI test manager.
//
// Issues NumReq random requests to random regions (2**RegionShift bytes
// each), holds each one unchanged until granted, and checks each response,
// in order, against what the test subordinate of that region returns.
module tb_obi_mgr
  import relobi_pkg::*;
  import tb_relobi_ref_pkg::*;
#(
  parameter int Id          = 0,
  parameter int NumReq      = 100,
  parameter int NumRegions  = 8,
  parameter int RegionShift = 29,
  parameter int ReqPct      = 60
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   enable_i,
  input  longint cyc_i,
  output logic   req_o,
  input  logic   gnt_i,
  output obi_a_t a_o,
  input  logic   rvalid_i,
  input  obi_r_t r_i,
  output int     checks,
  output int     failures,
  output int     issued,
  output int     completed,
  output longint first_req_cycle,
  output longint last_rsp_cycle
);

  int     region_q;
  obi_r_t exp_q[$];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      req_o <= 1'b0; a_o <= '0; region_q <= 0;
      checks <= 0; failures <= 0; issued <= 0; completed <= 0;
      first_req_cycle <= -1; last_rsp_cycle <= -1;
    end else begin
      if (req_o && first_req_cycle < 0) first_req_cycle <= cyc_i;
      if (req_o && gnt_i) begin
        exp_q.push_back(resp_for(a_o, region_q));
        issued <= issued + 1;
        req_o  <= 1'b0;
      end
      if ((!req_o || gnt_i) && enable_i && (issued + int'(req_o)) < NumReq &&
          $urandom_range(99, 0) < ReqPct) begin
        automatic int region = $urandom_range(NumRegions - 1, 0);
        req_o    <= 1'b1;
        region_q <= region;
        a_o      <= rand_a(region, RegionShift);
      end
      if (rvalid_i) begin
        checks <= checks + 1;
        last_rsp_cycle <= cyc_i;
        if (exp_q.size() == 0) begin
          failures <= failures + 1;
          $display("[mgr %0d] response without request", Id);
        end else begin
          automatic obi_r_t exp = exp_q.pop_front();
          if (r_i != exp) begin
            failures <= failures + 1;
            $display("[mgr %0d] bad response: got %h exp %h", Id, r_i, exp);
          end
          completed <= completed + 1;
        end
      end
    end
  end

endmodule
