// tb_node_decoder: feeds random octree node words (random occupancy and leaf
// masks, including empty nodes) with random boxes, under random child
// back-pressure. Checks: dec_count equals the number of occupied octants and
// is reported in the cycle the node is accepted; the children come out in
// octant order with address base + rank, the right leaf bit, half the parent
// half-size and the right octant centre; the first child is valid the cycle
// after acceptance and, with ch_ready held high, an n-child node takes exactly
// n cycles; no new node is accepted while children are still pending.
module tb_node_decoder;
  import robocore_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, dec_valid, ch_valid, ch_ready;
  logic [WARP_W-1:0] in_warp, dec_warp;
  logic [LANE_W-1:0] in_lane, dec_lane;
  logic [NODE_W-1:0] in_node;
  stk_t in_box;
  logic [3:0] dec_count;
  child_t ch;
  int checks = 0, failures = 0;
  longint cyc = 0;

  node_decoder dut (.*);

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

  child_t exp_q [$];
  longint acc_c [$];   // acceptance cycle, one per node with children
  int     nkids [$];
  int     rd_pct = 70;
  int     nodes = 0, kids = 0;
  longint first_c = -1;

  always @(posedge clk) if (rst_n) begin
    chk(dec_valid == (in_valid && in_ready), "dec_valid");
    if (in_valid && in_ready) begin
      int n, r;
      n = 0; r = 0;
      for (int k = 0; k < 8; k++) n += int'(in_node[k]);
      chk(int'(dec_count) == n && dec_warp == in_warp && dec_lane == in_lane, "dec_count");
      chk(exp_q.size() == 0, "accepted while children pending");
      for (int k = 0; k < 8; k++)
        if (in_node[k]) begin
          child_t c;
          word_t q;
          q = word_t'(in_box.half) >>> 1;
          c.warp = in_warp; c.lane = in_lane; c.leaf = in_node[8 + k];
          c.node.addr = in_node[63:32] + 32'(r);
          c.node.half = q;
          for (int a = 0; a < 3; a++)
            c.node.center[a] = k[a] ? word_t'(in_box.center[a]) + q : word_t'(in_box.center[a]) - q;
          exp_q.push_back(c);
          r++;
        end
      if (n != 0) begin acc_c.push_back(cyc); nkids.push_back(n); end
      nodes++;
    end
    if (ch_valid && ch_ready) begin
      chk(exp_q.size() != 0, "child with nothing expected");
      if (exp_q.size() != 0) chk(ch == exp_q.pop_front(), "child record");
      kids++;
    end
  end

  // timing with ch_ready high: first child one cycle after acceptance,
  // last child n cycles after acceptance
  always @(posedge clk) if (rst_n && rd_pct == 100 && in_valid && in_ready && in_node[7:0] != 0) begin
    int n;
    n = 0;
    for (int k = 0; k < 8; k++) n += int'(in_node[k]);
    #1 chk(ch_valid, "first child next cycle");
    repeat (n - 1) @(posedge clk);
    #1 chk(ch_valid, $sformatf("%0d children: still emitting after %0d cycles", n, n - 1));
    @(posedge clk);
    #1 chk(in_ready && !ch_valid, $sformatf("%0d children: done after %0d cycles", n, n));
  end

  always @(negedge clk) ch_ready = ($urandom % 100) < rd_pct;

  task automatic feed(int count);
    int sent;
    sent = 0;
    while (sent < count) begin
      @(negedge clk);
      if (!in_valid || in_ready_q) begin
        in_valid = ($urandom % 100) < 60;
        in_warp = 2'($urandom); in_lane = 5'($urandom);
        in_node = {$urandom, $urandom};
        if ($urandom % 10 == 0) in_node[7:0] = '0;
        in_box.addr = $urandom;
        for (int a = 0; a < 3; a++) in_box.center[a] = 32'($signed($urandom) >>> 4);
        in_box.half = 32'($urandom % 32'h0100_0000);
        if (in_valid) sent++;
      end
    end
    @(negedge clk);
    while (in_valid && !in_ready_q) @(negedge clk);
    in_valid = 1'b0;
  endtask

  logic in_ready_q;
  always @(posedge clk) in_ready_q <= in_ready && in_valid;

  initial begin
    in_valid = 1'b0; in_warp = '0; in_lane = '0; in_node = '0; in_box = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    feed(1500);
    rd_pct = 100;
    feed(500);
    repeat (20) @(negedge clk);
    chk(exp_q.size() == 0 && nodes >= 2000, $sformatf("nodes %0d children %0d left %0d",
        nodes, kids, exp_q.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
