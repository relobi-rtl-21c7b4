// tb_obi_sbr: plain OBI test subordinate.
//
// Grants at random, checks that each granted request belongs to its region
// (address >> RegionShift == Idx) and that ungranted requests persist
// unchanged, and answers in order after 1 to MaxLat cycles with
// resp_for(request, Idx).
module tb_obi_sbr
  import relobi_pkg::*;
  import tb_relobi_ref_pkg::*;
#(
  parameter int Idx         = 0,
  parameter int RegionShift = 29,
  parameter int GntPct      = 70,
  parameter int MaxLat      = 3
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  input  longint cyc_i,
  input  logic   req_i,
  output logic   gnt_o,
  input  obi_a_t a_i,
  output logic   rvalid_o,
  output obi_r_t r_o,
  output int     checks,
  output int     failures,
  output int     accepted,
  output longint first_seen_cycle
);

  typedef struct { obi_r_t r; longint due; } pend_t;
  pend_t  pend_q[$];
  logic   wait_q;
  obi_a_t wait_a_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      gnt_o <= 1'b0; rvalid_o <= 1'b0; r_o <= '0; wait_q <= 1'b0; wait_a_q <= '0;
      checks <= 0; failures <= 0; accepted <= 0; first_seen_cycle <= -1;
    end else begin
      gnt_o <= ($urandom_range(99, 0) < GntPct);
      if (req_i && first_seen_cycle < 0) first_seen_cycle <= cyc_i;
      if (wait_q) begin
        checks <= checks + 1;
        if (!req_i || a_i != wait_a_q) begin
          failures <= failures + 1;
          $display("[sbr %0d] request dropped or changed before grant", Idx);
        end
      end
      wait_q   <= req_i && !gnt_o;
      wait_a_q <= a_i;
      if (req_i && gnt_o) begin
        checks   <= checks + 1;
        accepted <= accepted + 1;
        if ((a_i.addr >> RegionShift) != 32'(Idx)) begin
          failures <= failures + 1;
          $display("[sbr %0d] misrouted request addr=%h", Idx, a_i.addr);
        end
        pend_q.push_back('{r: resp_for(a_i, Idx), due: cyc_i + longint'($urandom_range(MaxLat, 1))});
      end
      rvalid_o <= 1'b0;
      if (pend_q.size() > 0 && pend_q[0].due <= cyc_i) begin
        automatic pend_t p = pend_q.pop_front();
        rvalid_o <= 1'b1;
        r_o      <= p.r;
      end
    end
  end

endmodule
