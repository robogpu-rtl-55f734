// tb_memory_scheduler: issues node fetches for random threads (at most one
// outstanding per thread, as in the core), serves them with a memory model
// that answers out of order after a random delay, and drains the decoder
// side under random back-pressure. Checks: each request carries the issued
// node address and the thread's tag and appears one cycle after issue;
// requests leave in issue order; each response reaches the decoder side with
// the right warp, lane and node word and with the box (address, centre,
// half-size) that was stored at issue; with the memory stalled the queue
// accepts exactly QDEPTH fetches and then drops can_issue.
module tb_memory_scheduler;
  import robocore_pkg::*;

  localparam int QDEPTH = 8;
  localparam int TW = WARP_W + LANE_W;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic can_issue, iss_valid, mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  logic nd_valid, nd_ready;
  logic [WARP_W-1:0] iss_warp, nd_warp;
  logic [LANE_W-1:0] iss_lane, nd_lane;
  stk_t iss_ent, nd_box;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [TW-1:0] mem_req_tag, mem_rsp_tag;
  logic [NODE_W-1:0] mem_rsp_data, nd_node;
  int checks = 0, failures = 0;
  longint cyc = 0;

  memory_scheduler #(.QDEPTH(QDEPTH)) dut (.*);

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

  function automatic logic [NODE_W-1:0] node_of(logic [ADDR_W-1:0] a);
    return {a ^ 32'h5a5a_0f0f, ~a};
  endfunction

  bit     busy_t [1 << TW];
  stk_t   ent_t  [1 << TW];
  logic [TW-1:0] iss_q [$];     // issue order
  longint iss_c [$];
  // memory model: pending responses
  logic [TW-1:0] mq_tag [$];
  logic [ADDR_W-1:0] mq_addr [$];
  longint mq_due [$];
  int reqs = 0, rsps = 0, issued = 0;
  int mem_stall = 0, nd_pct = 70;

  always @(posedge clk) if (rst_n) begin
    if (iss_valid) begin
      chk(can_issue, "issue only when allowed");
      iss_q.push_back({iss_warp, iss_lane}); iss_c.push_back(cyc);
    end
    if (mem_req_valid && mem_req_ready) begin
      logic [TW-1:0] t; longint c;
      t = iss_q.pop_front(); c = iss_c.pop_front();
      chk(mem_req_tag == t, "request order");
      chk(mem_req_addr == ent_t[mem_req_tag].addr, "request address");
      reqs++;
      mq_tag.push_back(mem_req_tag); mq_addr.push_back(mem_req_addr);
      mq_due.push_back(cyc + 5 + $urandom % 30);
    end
    if (mem_rsp_valid && mem_rsp_ready) begin
      void'(mq_tag.pop_front()); void'(mq_addr.pop_front()); void'(mq_due.pop_front());
    end
    if (nd_valid && nd_ready) begin
      logic [TW-1:0] t;
      t = {nd_warp, nd_lane};
      chk(busy_t[t], "response for an idle thread");
      chk(nd_node == node_of(ent_t[t].addr), "node word");
      chk(nd_box == ent_t[t], "stored box");
      busy_t[t] = 1'b0;
      rsps++;
    end
  end

  // first-cycle visibility of a request (queue was empty)
  always @(posedge clk) if (rst_n && iss_valid && !mem_req_valid) begin
    logic [TW-1:0] t;
    t = {iss_warp, iss_lane};
    #1 chk(mem_req_valid && mem_req_tag == t, "request one cycle after issue");
  end

  // memory model driving: pick a due response (random one of the due ones)
  always @(negedge clk) begin
    mem_req_ready = mem_stall ? 1'b0 : (($urandom % 100) < 80);
    mem_rsp_valid = 1'b0;
    if (mq_tag.size() != 0) begin
      int i;
      i = $urandom % mq_tag.size();
      if (mq_due[i] <= cyc) begin
        // move it to the front so the pop above removes it
        logic [TW-1:0] t; logic [ADDR_W-1:0] a; longint d;
        t = mq_tag[i]; a = mq_addr[i]; d = mq_due[i];
        mq_tag.delete(i); mq_addr.delete(i); mq_due.delete(i);
        mq_tag.push_front(t); mq_addr.push_front(a); mq_due.push_front(d);
        mem_rsp_valid = 1'b1; mem_rsp_tag = t; mem_rsp_data = node_of(a);
      end
    end
    nd_ready = ($urandom % 100) < nd_pct;
  end

  task automatic try_issue(int pct);
    @(negedge clk);
    iss_valid = 1'b0;
    #2;
    if (can_issue && ($urandom % 100) < pct) begin
      logic [TW-1:0] t;
      t = TW'($urandom);
      if (!busy_t[t]) begin
        busy_t[t] = 1'b1;
        iss_warp = t[TW-1:LANE_W]; iss_lane = t[LANE_W-1:0];
        iss_ent.addr = $urandom; iss_ent.center = {$urandom, $urandom, $urandom};
        iss_ent.half = $urandom;
        ent_t[t] = iss_ent;
        iss_valid = 1'b1; issued++;
      end
    end
  endtask

  initial begin
    iss_valid = 1'b0; iss_warp = '0; iss_lane = '0; iss_ent = '0;
    mem_rsp_tag = '0; mem_rsp_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) try_issue(60);
    nd_pct = 20;
    for (int n = 0; n < 2000; n++) try_issue(90);
    nd_pct = 100;
    for (int n = 0; n < 300; n++) try_issue(0);
    chk(issued > 1000 && rsps == issued && reqs == issued,
        $sformatf("issued %0d requested %0d answered %0d", issued, reqs, rsps));
    // queue capacity with the memory stalled
    mem_stall = 1;
    begin
      int acc;
      acc = 0;
      for (int n = 0; n < 20; n++) begin
        try_issue(100);
        if (iss_valid) acc++;
      end
      @(negedge clk) iss_valid = 1'b0;
      chk(acc == QDEPTH, $sformatf("queue took %0d with memory stalled", acc));
      #2 chk(!can_issue, "can_issue low when full");
    end
    mem_stall = 0;
    for (int n = 0; n < 200; n++) try_issue(0);
    chk(rsps == issued, "stalled fetches answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
