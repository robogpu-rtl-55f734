// tb_push_unit: random packets are offered to the PUSH unit on random cycles.
// Every accepted packet must come out as one stack push, in order, exactly two
// cycles after it was accepted (one cycle in the input buffer, one in the
// output register), carrying the packet's warp, lane, node address, node
// centre (words 15..17) and half-size (word 18). The unit never stalls, so
// in_ready must stay high.
// A second phase holds push_ready low on random cycles: every completion
// must then stay on the output until taken, and none may be lost or
// reordered.
module tb_push_unit;
  import robocore_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, push_valid, push_ready, busy;
  pkt_t in_pkt;
  logic [WARP_W-1:0] push_warp;
  logic [LANE_W-1:0] push_lane;
  stk_t push_ent;
  int checks = 0, failures = 0;
  longint cyc = 0;

  push_unit dut (.*);

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
  int     bp_pct = 0;   // percentage of cycles with push_ready low
  always @(negedge clk) push_ready = ($urandom % 100) >= bp_pct;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin exp_q.push_back(in_pkt); t_q.push_back(cyc); bp_q.push_back(bp_pct); end
    if (push_valid && push_ready) begin
      pkt_t e; longint t; int bp;
      chk(exp_q.size() != 0, "push with nothing sent");
      if (exp_q.size() != 0) begin
        e = exp_q.pop_front(); t = t_q.pop_front(); bp = bp_q.pop_front();
        if (bp == 0) chk(cyc - t == 2, $sformatf("latency %0d", cyc - t));
        else chk(cyc - t >= 2, "latency at least 2");
        chk(push_warp == e.warp && push_lane == e.lane, "warp/lane");
        chk(push_ent.addr == e.node_addr, "address");
        chk(push_ent.center == getv(e.d, WIDX_W'(W_AC)) && push_ent.half == e.d[W_AH], "box");
      end
    end
  end

  initial begin
    in_valid = 1'b0; in_pkt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 100) < 70;
      in_pkt = '0;
      in_pkt.warp = 2'($urandom); in_pkt.lane = 5'($urandom);
      in_pkt.node_addr = $urandom;
      for (int w = 0; w < NW; w++) in_pkt.d[w] = $urandom;
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
      in_pkt.node_addr = $urandom;
      for (int w = 0; w < NW; w++) in_pkt.d[w] = $urandom;
      #1 if (bp_pct == 0) chk(in_ready, "no stall without back-pressure");
    end
    @(negedge clk) in_valid = 1'b0;
    while (!acc_q && in_valid) @(negedge clk);
    bp_pct = 0;
    repeat (20) @(negedge clk);
    chk(exp_q.size() == 0, "all pushes delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
