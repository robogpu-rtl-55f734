// tb_set_dispatch: drives the dispatcher from a packet source under random
// entry-port back-pressure and random packet departures from each set.
// A reference model keeps the tests held by each set. Checks: a packet goes
// to exactly one set and passes in the cycle it is offered when that set is
// ready; no set ever holds more than MAX_INFLIGHT tests; the set chosen is
// the first one after the last taker, in round-robin order, that is below
// its limit; when every set is at its limit nothing passes; all four sets are
// used.
module tb_set_dispatch;
  import robocore_pkg::*;

  localparam int NSETS = 4, MAXI = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready;
  pkt_t in_pkt;
  logic [NSETS-1:0] out_valid, out_ready;
  pkt_t out_pkt [NSETS];
  logic [NSETS-1:0][1:0] leave;
  int checks = 0, failures = 0;

  set_dispatch #(.NSETS(NSETS), .MAX_INFLIGHT(MAXI)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int m_cnt [NSETS];
  int m_last = NSETS - 1;
  int used [NSETS];
  int all_full = 0;

  // compare with the model in the middle of the cycle (inputs settled)
  always @(negedge clk) if (rst_n) begin
    int exp_s;
    #2;
    exp_s = -1;
    for (int k = 1; k <= NSETS && exp_s < 0; k++)
      if (m_cnt[(m_last + k) % NSETS] < MAXI) exp_s = (m_last + k) % NSETS;
    if (exp_s < 0) all_full++;
    chk($countones(out_valid) <= 1, "one set at a time");
    if (in_valid) begin
      if (exp_s < 0) chk(out_valid == '0 && !in_ready, "nothing passes when all sets are full");
      else begin
        chk(out_valid[exp_s], $sformatf("packet offered to set %0d", exp_s));
        chk(in_ready == out_ready[exp_s], "passes when the chosen set is ready");
        chk(out_pkt[exp_s] == in_pkt, "packet unchanged");
      end
    end else chk(out_valid == '0, "no packet, no valid");
  end

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NSETS; s++) begin
      if (out_valid[s] && out_ready[s]) begin m_cnt[s]++; used[s]++; m_last = s; end
      m_cnt[s] -= int'(leave[s]);
      chk(m_cnt[s] <= MAXI && m_cnt[s] >= 0, "count within limit");
    end
  end

  // departures: only tests that are held may leave
  always @(negedge clk) begin
    for (int s = 0; s < NSETS; s++) begin
      int n;
      n = ($urandom % 100 < lv_pct) ? 1 + $urandom % 2 : 0;
      if (n > m_cnt[s]) n = m_cnt[s];
      leave[s] = 2'(n);
      out_ready[s] = ($urandom % 100) < 75;
    end
  end
  int lv_pct = 30;

  logic acc_q;
  always @(posedge clk) acc_q <= in_valid && in_ready;

  initial begin
    in_valid = 1'b0; in_pkt = '0;
    for (int s = 0; s < NSETS; s++) begin m_cnt[s] = 0; used[s] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      if (n == 2000) lv_pct = 10;   // slow departures: sets fill up
      if (n == 4000) lv_pct = 60;
      if (!in_valid || acc_q) begin
        in_valid = ($urandom % 100) < 80;
        in_pkt.node_addr = $urandom; in_pkt.lane = 5'($urandom); in_pkt.d[0] = $urandom;
      end
    end
    for (int s = 0; s < NSETS; s++) chk(used[s] > 100, $sformatf("set %0d used %0d times", s, used[s]));
    chk(all_full > 0, "all sets reached their limit at some point");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
