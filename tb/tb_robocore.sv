// tb_robocore: end-to-end test of the RoboCore unit.
//
// Builds a random octree (robocore_tb_pkg::build_octree), loads the collision
// intersection program, launches NWT warps of 32 random OBB queries (more
// warps than the warp buffer holds, so launches must wait for free slots),
// serves node fetches from a memory model with random latency, out-of-order
// returns and back-pressure, and compares every lane's result with the
// reference (the OBB overlaps some leaf cube, by the separating axis test).
// A lane flagged as stack overflow must report a collision (the safe answer)
// and is not compared further. The stack depth is reduced so that the
// overflow path is exercised. The test also counts how often each mechanism
// happened (early return on a separating axis, collision-confirmed return,
// push, stack overflow, interconnect contention, memory back-pressure, full
// warp buffer, a set dispatch that waited because every set held its
// maximum of tests, a PUSH or RETURN that waited for the shared warp-buffer
// port, work sent to each of the four sets) and counts a failure for any
// that never happened. It also checks the node-fetch and query counters.
// MAX_INFLIGHT is reduced so the dispatch limit is hit.
module tb_robocore;
  import robocore_pkg::*;
  import robocore_tb_pkg::*;

  localparam int   NWT       = 8;       // warps launched in total
  localparam int   DEPTH     = 5;       // octree levels
  localparam real  ROOT_HALF = 16.0;
  localparam real  P_OCC     = 0.35;
  localparam real  P_LEAF    = 0.05;
  localparam int   WATCHDOG  = 400000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t                     cfg;
  logic                     launch_valid, launch_ready, launch_first, launch_last, launch_active;
  logic [LANE_W-1:0]        launch_lane;
  obb_t                     launch_obb;
  stk_t                     launch_root;
  logic [7:0]               launch_tag;
  logic                     mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  logic [ADDR_W-1:0]        mem_req_addr;
  logic [WARP_W+LANE_W-1:0] mem_req_tag, mem_rsp_tag;
  logic [NODE_W-1:0]        mem_rsp_data;
  logic                     res_valid, err, idle;
  logic [31:0]              stat_nodes, stat_queries;
  int                       n_req = 0, n_qry = 0;
  logic [7:0]               res_tag;
  logic [NLANES-1:0]        res_hit, res_ovf;

  robocore #(.STACK_DEPTH(6), .MAX_INFLIGHT(3)) dut (.*);

  tb_node_mem #(.LAT_MIN(20), .LAT_MAX(40), .OUTS(16), .STALL_PCT(10)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .req_tag(mem_req_tag), .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready),
    .rsp_tag(mem_rsp_tag), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  obb_t q_obb [NWT][NLANES];
  bit   q_act [NWT][NLANES];
  bit   q_ref [NWT][NLANES];
  bit   got   [NWT];
  int   n_res = 0, n_hit_ref = 0;
  longint cyc = 0;
  // mechanism counters
  int ev_early = 0, ev_hit = 0, ev_push = 0, ev_ovf = 0, ev_icnt = 0, ev_memstall = 0,
      ev_full = 0, ev_fetch = 0, ev_merge = 0, ev_disp = 0;
  int ev_set [4];   // packets taken by each set of OP units

  initial for (int s = 0; s < 4; s++) ev_set[s] = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d cycles, %0d of %0d warps done (fetches=%0d early=%0d hits=%0d pushes=%0d err=%0b)",
             WATCHDOG, n_res, NWT, ev_fetch, ev_early, ev_hit, ev_push, err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (dut.ret_valid && !dut.ret_hit) ev_early++;
    if (dut.ret_valid &&  dut.ret_hit) ev_hit++;
    if (dut.push_valid) ev_push++;
    if (dut.gnt_valid) ev_fetch++;
    if (dut.set_stall != '0) ev_icnt++;
    if (((dut.s_push_valid & ~dut.s_push_ready) | (dut.s_ret_valid & ~dut.s_ret_ready)) != '0) ev_merge++;
    if (dut.rc_valid && !dut.rc_ready) ev_disp++;
    for (int s = 0; s < dut.NSETS; s++) if (dut.set_in_valid[s] && dut.set_in_ready[s]) ev_set[s]++;
    if (mem_req_valid && !mem_req_ready) ev_memstall++;
    if (mem_req_valid && mem_req_ready) n_req++;
    if (launch_valid && launch_ready && launch_active) n_qry++;
    if (launch_valid && !launch_ready) ev_full++;
    if (res_valid) begin
      int w;
      w = int'(res_tag);
      if (w >= NWT || got[w]) begin
        failures++;
        $display("unexpected result tag %0d", w);
      end else begin
        got[w] = 1'b1;
        n_res++;
        for (int l = 0; l < NLANES; l++) begin
          checks++;
          if (res_ovf[l]) begin
            ev_ovf++;
            if (!res_hit[l] || !q_act[w][l]) begin
              failures++;
              $display("warp %0d lane %0d: overflow without collision report", w, l);
            end
          end else if (res_hit[l] != (q_act[w][l] && q_ref[w][l])) begin
            failures++;
            $display("warp %0d lane %0d: hit=%0b expected %0b", w, l, res_hit[l], q_ref[w][l]);
          end
        end
      end
    end
  end

  task automatic beat(int w, int l);
    @(negedge clk);
    launch_valid  = 1'b1;
    launch_first  = (l == 0);
    launch_last   = (l == NLANES - 1);
    launch_lane   = LANE_W'(l);
    launch_active = q_act[w][l];
    launch_obb    = q_obb[w][l];
    launch_tag    = 8'(w);
    launch_root   = '{addr: '0, center: '0, half: fx(ROOT_HALF)};
    #1;
    while (!launch_ready) begin @(negedge clk); #1; end
  endtask

  initial begin
    cfg_t prog [$];
    cfg = '0;
    launch_valid = 1'b0; launch_first = 1'b0; launch_last = 1'b0; launch_active = 1'b0;
    launch_lane = '0; launch_obb = '0; launch_root = '0; launch_tag = '0;
    build_octree(ROOT_HALF, DEPTH, P_OCC, P_LEAF);
    $display("octree: %0d nodes, %0d leaves", n_nodes, n_leaves);
    for (int w = 0; w < NWT; w++) begin
      got[w] = 1'b0;
      for (int l = 0; l < NLANES; l++) begin
        q_act[w][l] = ($urandom_range(0, 15) != 0);
        // warp 0 holds large boxes that sweep much of the tree (stack overflow)
        q_obb[w][l] = (w == 0) ? rand_obb(4.0, 6.0, 12.0) : rand_obb(ROOT_HALF - 2.0, 0.25, 2.0);
        q_ref[w][l] = ref_query(q_obb[w][l]);
        if (q_act[w][l] && q_ref[w][l]) n_hit_ref++;
      end
    end
    $display("reference: %0d colliding queries", n_hit_ref);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    make_collision_program(prog);
    foreach (prog[i]) begin
      @(negedge clk);
      cfg = prog[i];
    end
    @(negedge clk);
    cfg = '0;
    for (int w = 0; w < NWT; w++)
      for (int l = 0; l < NLANES; l++) beat(w, l);
    @(negedge clk);
    launch_valid = 1'b0;
    while (n_res < NWT) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (err) begin failures++; $display("destination table miss"); end
    checks++;
    if (!idle) begin failures++; $display("unit not idle at end"); end
    $display("cycles=%0d fetches=%0d early_returns=%0d hit_returns=%0d pushes=%0d overflows=%0d icnt_stalls=%0d mem_stalls=%0d launch_waits=%0d",
             cyc, ev_fetch, ev_early, ev_hit, ev_push, ev_ovf, ev_icnt, ev_memstall, ev_full);
    checks += 7;
    if (ev_early == 0)    begin failures++; $display("no early return"); end
    if (ev_hit == 0)      begin failures++; $display("no collision-confirmed return"); end
    if (ev_push == 0)     begin failures++; $display("no push"); end
    if (ev_ovf == 0)      begin failures++; $display("no stack overflow"); end
    if (ev_icnt == 0)     begin failures++; $display("no interconnect contention"); end
    if (ev_memstall == 0) begin failures++; $display("no memory back-pressure"); end
    if (ev_full == 0)     begin failures++; $display("warp buffer never full"); end
    $display("completion merge waits=%0d dispatch waits=%0d packets per set=%0d %0d %0d %0d",
             ev_merge, ev_disp, ev_set[0], ev_set[1], ev_set[2], ev_set[3]);
    checks += 2;
    if (ev_merge == 0)    begin failures++; $display("no wait at the push/return merge"); end
    if (ev_disp == 0)     begin failures++; $display("no wait at the set dispatcher"); end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (ev_set[s] == 0) begin failures++; $display("set %0d never used", s); end
    end
    checks++;
    if (stat_nodes != 32'(n_req) || stat_queries != 32'(n_qry)) begin
      failures++;
      $display("statistics counters %0d/%0d, expected %0d/%0d", stat_nodes, stat_queries, n_req, n_qry);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
