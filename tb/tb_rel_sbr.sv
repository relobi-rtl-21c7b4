// tb_rel_sbr: relOBI test subordinate.
//
// Grants requests at random (GntPct percent of the cycles), checks that each
// granted request decodes without an uncorrectable error and belongs to its
// own region (address >> RegionShift == Idx), and answers in order after a
// random delay of 1 to MaxLat cycles with resp_for(request, Idx). It also
// checks the OBI rule that an ungranted request stays presented and
// unchanged in the next cycle.
module tb_rel_sbr
  import relobi_pkg::*;
  import tb_relobi_ref_pkg::*;
#(
  parameter int Idx         = 0,
  parameter int RegionShift = 29,
  parameter int GntPct      = 70,
  parameter int MaxLat      = 3
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  longint     cyc_i,
  input  logic [2:0] req_i,
  output logic [2:0] gnt_o,
  input  relobi_a_t  a_i,
  output logic [2:0] rvalid_o,
  output relobi_r_t  r_o,
  output int         checks,
  output int         failures,
  output int         accepted,
  output int         corrected,
  output longint     first_seen_cycle
);

  typedef struct { obi_r_t r; longint due; } pend_t;
  pend_t  pend_q[$];
  logic   gnt_q, rvalid_q, wait_q;
  obi_a_t wait_a_q;
  obi_r_t r_q;

  assign gnt_o    = {3{gnt_q}};
  assign rvalid_o = {3{rvalid_q}};
  assign r_o      = ref_enc_r(r_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      gnt_q <= 1'b0; rvalid_q <= 1'b0; r_q <= '0; wait_q <= 1'b0; wait_a_q <= '0;
      checks <= 0; failures <= 0; accepted <= 0; corrected <= 0;
      first_seen_cycle <= -1;
    end else begin
      logic   req_v;
      obi_a_t a;
      int     st;
      req_v = maj3(req_i[0], req_i[1], req_i[2]);
      a     = ref_dec_a(a_i, st);
      gnt_q <= ($urandom_range(99, 0) < GntPct);

      if (req_v && first_seen_cycle < 0) first_seen_cycle <= cyc_i;
      if (req_v && st == 1) corrected <= corrected + 1;

      // OBI: an ungranted request must persist unchanged
      if (wait_q) begin
        checks <= checks + 1;
        if (!req_v || a != wait_a_q) begin
          failures <= failures + 1;
          $display("[sbr %0d] request dropped or changed before grant", Idx);
        end
      end
      wait_q   <= req_v && !gnt_q;
      wait_a_q <= a;

      if (req_v && gnt_q) begin
        checks   <= checks + 1;
        accepted <= accepted + 1;
        if (st == 2 || (a.addr >> RegionShift) != 32'(Idx)) begin
          failures <= failures + 1;
          $display("[sbr %0d] misrouted or corrupt request addr=%h st=%0d", Idx, a.addr, st);
        end
        pend_q.push_back('{r: resp_for(a, Idx), due: cyc_i + longint'($urandom_range(MaxLat, 1))});
      end

      rvalid_q <= 1'b0;
      if (pend_q.size() > 0 && pend_q[0].due <= cyc_i) begin
        automatic pend_t p = pend_q.pop_front();
        rvalid_q <= 1'b1;
        r_q      <= p.r;
      end
    end
  end

endmodule
