// relobi_tmr_voter: bitwise 2-of-3 majority voter with a mismatch flag.
//
// Every handshake signal and every piece of control state in relOBI exists
// three times. A voter turns three copies into one value: each output bit is
// the majority of the three input bits, so any single wrong copy is outvoted.
// mismatch_o is high when the three copies do not all agree, which reports
// that a fault was corrected. The voter is purely combinational (no latency).
//
// The paper places voters on incoming handshakes, after every state register
// and in front of every selection that uses triplicated control; the mismatch
// output feeding the "corrected" error report is this design's choice.
module relobi_tmr_voter #(
  parameter int unsigned Width = 1
) (
  input  logic [Width-1:0] a_i,
  input  logic [Width-1:0] b_i,
  input  logic [Width-1:0] c_i,
  output logic [Width-1:0] y_o,
  output logic             mismatch_o
);

  always_comb begin
    y_o        = (a_i & b_i) | (a_i & c_i) | (b_i & c_i);
    mismatch_o = (a_i != b_i) || (a_i != c_i);
  end

endmodule
