// relobi_rr_arb: one copy of the multiplexer's round-robin arbiter.
//
// The relOBI multiplexer holds three copies of this arbiter, one per copy of
// the req/gnt handshake. The arbiter is combinational; its state lives in a
// triplicated register (relobi_tmr_reg) outside and comes in already voted.
//
// State: last_idx, the input granted most recently, and lock/lock_idx. While
// the arbiter is not locked it grants the first requesting input after
// last_idx, wrapping around (fair round robin). If the chosen request is
// presented downstream but not granted in this cycle, the arbiter locks onto
// it, because OBI forbids a request from changing before it is granted. Once
// granted, the lock is released and last_idx moves to the granted input.
// gnt_o[i] passes the downstream grant to input i when i is selected.
//
// Round-robin arbitration is the paper's; the lock and the exact priority
// rotation follow common OBI practice and are this design's choices.
module relobi_rr_arb #(
  parameter int unsigned NumIn = 6,
  localparam int unsigned IdxWidth = (NumIn > 1) ? $clog2(NumIn) : 1
) (
  input  logic [NumIn-1:0]    req_i,
  output logic [NumIn-1:0]    gnt_o,
  output logic                req_o,
  input  logic                gnt_i,
  output logic [IdxWidth-1:0] idx_o,
  // voted state in, next state out
  input  logic                lock_q_i,
  input  logic [IdxWidth-1:0] lock_idx_q_i,
  input  logic [IdxWidth-1:0] last_idx_q_i,
  output logic                lock_d_o,
  output logic [IdxWidth-1:0] lock_idx_d_o,
  output logic [IdxWidth-1:0] last_idx_d_o
);

  logic [IdxWidth-1:0] rr_idx;
  logic                found;

  always_comb begin
    // first requester strictly after last_idx, wrapping around
    rr_idx = last_idx_q_i;
    found  = 1'b0;
    for (int unsigned off = 1; off <= NumIn; off++) begin
      logic [IdxWidth-1:0] cand;
      cand = IdxWidth'((32'(last_idx_q_i) + off) % NumIn);
      if (!found && req_i[cand]) begin
        rr_idx = IdxWidth'(cand);
        found  = 1'b1;
      end
    end

    if (lock_q_i) begin
      idx_o = lock_idx_q_i;
      req_o = req_i[lock_idx_q_i];
    end else begin
      idx_o = rr_idx;
      req_o = found;
    end

    gnt_o        = '0;
    gnt_o[idx_o] = req_o & gnt_i;

    lock_d_o     = req_o & ~gnt_i;
    lock_idx_d_o = idx_o;
    last_idx_d_o = (req_o & gnt_i) ? idx_o : last_idx_q_i;
  end

endmodule
