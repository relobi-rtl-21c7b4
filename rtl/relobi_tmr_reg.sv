// relobi_tmr_reg: triplicated state register with a voter behind each copy.
//
// All control state of the relOBI blocks is held three times. Each of the
// three copies of the control logic computes its own next state d_i[k]; the
// three registers are then voted, and copy k reads its state through its own
// voter q_o[k]. A flipped register bit is thus outvoted at once and
// overwritten with the voted value on the next clock edge, so faults do not
// accumulate, and a transient in one voter reaches only one copy.
// mismatch_o flags any disagreement between the three registers.
// One cycle latency from d_i to q_o; asynchronous active-low reset.
//
// Voters directly after the registers follow the paper; packaging them as a
// reusable block is this design's choice.
module relobi_tmr_reg #(
  parameter int unsigned     Width      = 1,
  parameter logic [Width-1:0] ResetValue = '0
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [2:0][Width-1:0] d_i,
  output logic [2:0][Width-1:0] q_o,
  output logic                  mismatch_o
);

  logic [2:0][Width-1:0] q;
  logic [2:0]            mm;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) q <= {3{ResetValue}};
    else         q <= d_i;
  end

  for (genvar k = 0; k < 3; k++) begin : gen_vote
    relobi_tmr_voter #(.Width(Width)) i_vote (
      .a_i(q[0]), .b_i(q[1]), .c_i(q[2]), .y_o(q_o[k]), .mismatch_o(mm[k])
    );
  end

  assign mismatch_o = |mm;

endmodule
