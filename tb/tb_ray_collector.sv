// tb_ray_collector: offers random child records and answers the OBB read
// port with a per-thread OBB pattern, under random back-pressure on the
// packet output. The retire input is driven from the tb's own count of
// packets sent (each packet retires after a random delay, up to two per
// cycle). Checks: each packet holds the child's warp, lane, leaf bit and
// address, the start PC and port, the thread's OBB in words 0..14 and the
// child box in words 15..20; a packet is valid the cycle after its child is
// taken; packets keep order; the number of tests in flight never exceeds
// MAX_INFLIGHT and, once it is reached, no child is taken until one retires.
module tb_ray_collector;
  import robocore_pkg::*;

  localparam int MAXI = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [PC_W-1:0] start_pc;
  logic [PORT_W-1:0] start_port;
  logic [1:0] retire;
  logic ch_valid, ch_ready, pkt_valid, pkt_ready;
  child_t ch;
  logic [WARP_W-1:0] rd_warp;
  logic [LANE_W-1:0] rd_lane;
  obb_t rd_obb;
  pkt_t pkt;
  int checks = 0, failures = 0;
  longint cyc = 0;

  ray_collector #(.MAX_INFLIGHT(MAXI)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic obb_t obb_of(logic [WARP_W-1:0] w, logic [LANE_W-1:0] l);
    obb_t o;
    for (int a = 0; a < 3; a++) begin
      o.c[a]  = {w, l, 8'(a), 17'h1_2345};
      o.e[a]  = {l, w, 8'(a), 17'h0_6789};
      o.u0[a] = 32'(a) ^ {25'h1ab_cdef, w, l};
      o.u1[a] = 32'(a) ^ {25'h0f0_f0f0, l, w};
      o.u2[a] = 32'(a + 100) ^ {w, 23'h7_7777, l, 2'b01};
    end
    return o;
  endfunction
  assign rd_obb = obb_of(rd_warp, rd_lane);

  child_t exp_q [$];
  logic [PC_W+PORT_W-1:0] start_q [$];   // start pc/port at acceptance
  int inflight = 0, max_seen = 0, sent = 0;
  longint ret_due [$];
  int rdy_pct = 70;

  always @(posedge clk) if (rst_n) begin
    if (ch_valid && ch_ready) begin
      exp_q.push_back(ch);
      start_q.push_back({start_pc, start_port});
      chk(inflight < MAXI, "admitted over the limit");
    end
    if (ch_valid && !ch_ready && inflight >= MAXI) checks++;
    if (pkt_valid && pkt_ready) begin
      child_t c;
      pkt_t e;
      chk(exp_q.size() != 0, "packet with no child");
      c = exp_q.pop_front();
      e = '0;
      e.warp = c.warp; e.lane = c.lane; e.leaf = c.leaf; e.node_addr = c.node.addr;
      {e.pc, e.dest} = start_q.pop_front();
      e.d = putv(e.d, WIDX_W'(W_OC), obb_of(c.warp, c.lane).c);
      e.d = putv(e.d, WIDX_W'(W_OE), obb_of(c.warp, c.lane).e);
      e.d = putv(e.d, WIDX_W'(W_OU0), obb_of(c.warp, c.lane).u0);
      e.d = putv(e.d, WIDX_W'(W_OU1), obb_of(c.warp, c.lane).u1);
      e.d = putv(e.d, WIDX_W'(W_OU2), obb_of(c.warp, c.lane).u2);
      e.d = putv(e.d, WIDX_W'(W_AC), c.node.center);
      e.d = putv(e.d, WIDX_W'(W_AH), {c.node.half, c.node.half, c.node.half});
      chk(pkt == e, "packet contents");
      ret_due.push_back(cyc + 3 + $urandom % 25);
    end
    inflight += int'(ch_valid && ch_ready) - int'(retire);
    if (inflight > max_seen) max_seen = inflight;
  end

  // child taken at an edge -> packet valid right after it
  always @(posedge clk) if (rst_n && ch_valid && ch_ready) begin
    child_t c;
    c = ch;
    #1 chk(pkt_valid && pkt.node_addr == c.node.addr && pkt.lane == c.lane, "one-cycle packet");
  end

  always @(negedge clk) begin
    int r;
    pkt_ready = ($urandom % 100) < rdy_pct;
    // retire up to two due tests
    r = 0;
    ret_due.sort();
    while (r < 2 && ret_due.size() != 0 && ret_due[0] <= cyc) begin
      void'(ret_due.pop_front()); r++;
    end
    retire = 2'(r);
  end

  logic taken_q;
  always @(posedge clk) taken_q <= ch_valid && ch_ready;

  initial begin
    start_pc = 6'd0; start_port = P_ADDSUB;
    ch_valid = 1'b0; ch = '0; retire = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      if (n == 3000) begin start_pc = 6'd17; start_port = P_BOXN; end
      if (n == 2000) rdy_pct = 100;
      if (!ch_valid || taken_q) begin
        ch_valid = ($urandom % 100) < 80;
        ch.warp = 2'($urandom); ch.lane = 5'($urandom); ch.leaf = 1'($urandom);
        ch.node.addr = $urandom; ch.node.half = $urandom;
        ch.node.center = {$urandom, $urandom, $urandom};
      end
    end
    @(negedge clk);
    while (ch_valid && !taken_q) @(negedge clk);
    ch_valid = 1'b0;
    repeat (100) @(negedge clk);
    chk(exp_q.size() == 0 && inflight == 0, "everything delivered and retired");
    chk(max_seen == MAXI, $sformatf("limit reached (max in flight %0d)", max_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
