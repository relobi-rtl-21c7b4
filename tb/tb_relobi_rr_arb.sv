// tb_relobi_rr_arb: runs one arbiter copy against a reference model that the
// testbench keeps itself (state registers included). Requests are random but
// follow OBI: a request that was presented and not granted stays. Checks the
// chosen input, req/gnt outputs and next state every cycle, that a waiting
// request is never overtaken (lock), and that every input is served within
// NumIn grants of another input while it requests (fairness).
module tb_relobi_rr_arb;
  localparam int N = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req, gnt;
  logic         req_o, gnt_i, lock_d;
  logic [2:0]   idx, lock_idx_d, last_d;
  // reference state, also fed to the DUT
  logic         lock_q;
  logic [2:0]   lock_idx_q, last_q;

  relobi_rr_arb #(.NumIn(N)) dut (
    .req_i(req), .gnt_o(gnt), .req_o(req_o), .gnt_i(gnt_i), .idx_o(idx),
    .lock_q_i(lock_q), .lock_idx_q_i(lock_idx_q), .last_idx_q_i(last_q),
    .lock_d_o(lock_d), .lock_idx_d_o(lock_idx_d), .last_idx_d_o(last_d));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int wait_grants[N];
  logic [N-1:0] granted;
  int n_lock = 0;

  initial begin
    lock_q = 0; lock_idx_q = 0; last_q = 3'(N - 1); req = '0; gnt_i = 0;
    for (int i = 0; i < N; i++) wait_grants[i] = 0;
    granted = '0;
    for (int n = 0; n < 3000; n++) begin
      int e_idx; bit e_req;
      @(negedge clk);
      // OBI: keep requests that were not granted
      for (int i = 0; i < N; i++)
        if (!req[i] || granted[i]) req[i] = ($urandom_range(99, 0) < 35);
      gnt_i = ($urandom_range(99, 0) < 50);
      #1;
      // reference choice
      if (lock_q) begin e_idx = lock_idx_q; e_req = req[lock_idx_q]; end
      else begin
        e_idx = last_q; e_req = 0;
        for (int off = 1; off <= N; off++) begin
          automatic int c = (int'(last_q) + off) % N;
          if (!e_req && req[c]) begin e_idx = c; e_req = 1; end
        end
      end
      chk(req_o == e_req, "req_o");
      if (e_req) chk(idx == 3'(e_idx), $sformatf("idx %0d exp %0d", idx, e_idx));
      for (int i = 0; i < N; i++) chk(gnt[i] == (e_req && gnt_i && i == e_idx), "gnt_o");
      chk(lock_d == (e_req && !gnt_i), "lock_d");
      if (e_req && !gnt_i) begin chk(lock_idx_d == 3'(e_idx), "lock_idx_d"); n_lock++; end
      chk(last_d == ((e_req && gnt_i) ? 3'(e_idx) : last_q), "last_d");
      // fairness bookkeeping
      if (e_req && gnt_i) begin
        for (int i = 0; i < N; i++)
          if (i != e_idx && req[i]) begin
            wait_grants[i]++;
            chk(wait_grants[i] < N, $sformatf("input %0d starved", i));
          end
        wait_grants[e_idx] = 0;
      end
      granted = '0;
      if (e_req && gnt_i) granted[e_idx] = 1'b1;
      // reference state update
      if (e_req && !gnt_i) begin lock_q = 1; lock_idx_q = 3'(e_idx); end
      else lock_q = 0;
      if (e_req && gnt_i) last_q = 3'(e_idx);
    end
    chk(n_lock > 0, "lock never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
