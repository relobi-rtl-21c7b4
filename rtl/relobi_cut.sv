// relobi_cut: pipeline register for one relOBI interface.
//
// Puts a register stage into both channels of a relOBI link, so that what
// lies before and after it is timed on its own. A channel: one entry. The
// entry's valid flag exists three times (one per req/gnt copy) in a
// relobi_tmr_reg and is read back voted; copy k offers req copy k while its
// entry is valid and accepts a new request when the entry is empty or is
// being granted downstream in the same cycle (full throughput, the grant
// path stays combinational). The request packet is stored once, as it is
// ECC-protected; its load enable is voted separately for each bit.
// R channel: rvalid copies go through a relobi_tmr_reg, the response packet
// through a plain register; OBI has no response back-pressure here, so this
// is a one-cycle delay.
// Latency: one cycle on requests, one cycle on responses.
//
// That every interface is pipelined before and after the crossbar, and that
// the pipeline state is voted, follows the paper; the one-entry structure
// with combinational grant is this design's choice.
module relobi_cut
  import relobi_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // subordinate port (upstream manager connects here)
  input  logic [2:0]  sbr_req_i,
  output logic [2:0]  sbr_gnt_o,
  input  relobi_a_t   sbr_a_i,
  output logic [2:0]  sbr_rvalid_o,
  output relobi_r_t   sbr_r_o,
  // manager port (towards the downstream subordinate)
  output logic [2:0]  mgr_req_o,
  input  logic [2:0]  mgr_gnt_i,
  output relobi_a_t   mgr_a_o,
  input  logic [2:0]  mgr_rvalid_i,
  input  relobi_r_t   mgr_r_i,
  // error report
  output relobi_err_t err_o
);

  localparam int unsigned AWidth = $bits(relobi_a_t);

  logic [2:0] valid_d, valid_q, load;
  logic       valid_mm, rvalid_mm;
  logic [AWidth-1:0] a_q;
  logic [AWidth-1:0] load_bit;
  logic              load_mm;

  relobi_tmr_reg #(.Width(1)) i_valid (
    .clk_i, .rst_ni, .d_i(valid_d), .q_o(valid_q), .mismatch_o(valid_mm)
  );

  for (genvar k = 0; k < 3; k++) begin : gen_copy
    always_comb begin
      sbr_gnt_o[k] = ~valid_q[k] | mgr_gnt_i[k];
      mgr_req_o[k] = valid_q[k];
      load[k]      = sbr_gnt_o[k] & sbr_req_i[k];
      valid_d[k]   = sbr_gnt_o[k] ? sbr_req_i[k] : valid_q[k];
    end
  end

  // one voter per stored bit on the three load enables
  relobi_tmr_voter #(.Width(AWidth)) i_load_vote (
    .a_i({AWidth{load[0]}}), .b_i({AWidth{load[1]}}), .c_i({AWidth{load[2]}}),
    .y_o(load_bit), .mismatch_o(load_mm)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) a_q <= '0;
    else         a_q <= (load_bit & sbr_a_i) | (~load_bit & a_q);
  end
  assign mgr_a_o = relobi_a_t'(a_q);

  // ---- R channel ----
  relobi_tmr_reg #(.Width(1)) i_rvalid (
    .clk_i, .rst_ni, .d_i(mgr_rvalid_i), .q_o(sbr_rvalid_o), .mismatch_o(rvalid_mm)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) sbr_r_o <= '0;
    else         sbr_r_o <= mgr_r_i;
  end

  assign err_o.corrected     = valid_mm | rvalid_mm | load_mm;
  assign err_o.uncorrectable = 1'b0;

endmodule
