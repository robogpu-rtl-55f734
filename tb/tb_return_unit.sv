// tb_return_unit: programs the per-PC hit bit of the RETURN unit through the
// configuration bus (random bit for each of the 64 PCs), then offers random
// packets on random cycles. Every accepted packet must come out as one thread
// return, in order, exactly two cycles after acceptance (input buffer plus
// output register), with the packet's warp and lane and the hit bit of the
// packet's PC. Writes addressed to another unit must be ignored.
// A second phase holds ret_ready low on random cycles: every completion
// must then stay on the output until taken, and none may be lost or
// reordered.
module tb_return_unit;
  import robocore_pkg::*;
  import robocore_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic in_valid, in_ready, ret_valid, ret_ready, busy, ret_hit;
  pkt_t in_pkt;
  logic [WARP_W-1:0] ret_warp;
  logic [LANE_W-1:0] ret_lane;
  int checks = 0, failures = 0;
  longint cyc = 0;
  bit hitmap [64];

  return_unit dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  logic acc_q;
  always @(posedge clk) acc_q <= in_valid && in_ready;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pkt_t   exp_q [$];
  longint t_q   [$];
  int     bp_q  [$];   // back-pressure setting when each packet was taken
  int     bp_pct = 0;   // percentage of cycles with ret_ready low
  always @(negedge clk) ret_ready = ($urandom % 100) >= bp_pct;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin exp_q.push_back(in_pkt); t_q.push_back(cyc); bp_q.push_back(bp_pct); end
    if (ret_valid && ret_ready) begin
      pkt_t e; longint t; int bp;
      chk(exp_q.size() != 0, "return with nothing sent");
      if (exp_q.size() != 0) begin
        e = exp_q.pop_front(); t = t_q.pop_front(); bp = bp_q.pop_front();
        if (bp == 0) chk(cyc - t == 2, $sformatf("latency %0d", cyc - t));
        else chk(cyc - t >= 2, "latency at least 2");
        chk(ret_warp == e.warp && ret_lane == e.lane, "warp/lane");
        chk(ret_hit == hitmap[e.pc], $sformatf("hit bit of pc %0d", e.pc));
      end
    end
  end

  initial begin
    cfg = '0; in_valid = 1'b0; in_pkt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pc = 0; pc < 64; pc++) begin
      hitmap[pc] = 1'($urandom);
      @(negedge clk) cfg = cw_ucfg(P_RETURN, pc, int'(hitmap[pc]), 0, 0, 0, 0);
      // a write to another unit with the opposite bit must not land here
      @(negedge clk) cfg = cw_ucfg(P_PUSH, pc, int'(!hitmap[pc]), 0, 0, 0, 0);
    end
    @(negedge clk) cfg = '0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 100) < 70;
      in_pkt = '0;
      in_pkt.warp = 2'($urandom); in_pkt.lane = 5'($urandom);
      in_pkt.pc = 6'($urandom); in_pkt.leaf = 1'($urandom);
      #1 if (bp_pct == 0) chk(in_ready, "no stall without back-pressure");
    end
    // phase 2: random back-pressure on the output; a packet is held
    // until the unit takes it
    @(negedge clk) in_valid = 1'b0;
    bp_pct = 40;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (!in_valid || acc_q) in_valid = ($urandom % 100) < 70;
      else continue;
      in_pkt = '0;
      in_pkt.warp = 2'($urandom); in_pkt.lane = 5'($urandom);
      in_pkt.pc = 6'($urandom); in_pkt.leaf = 1'($urandom);
      #1 if (bp_pct == 0) chk(in_ready, "no stall without back-pressure");
    end
    @(negedge clk) in_valid = 1'b0;
    while (!acc_q && in_valid) @(negedge clk);
    bp_pct = 0;
    repeat (20) @(negedge clk);
    chk(exp_q.size() == 0, "all returns delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
