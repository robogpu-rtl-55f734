// warp_buffer: per-thread state of RoboCore: queries, traversal stacks and
// results for WARPS warps of LANES threads.
//
// Each thread runs one collision query: its OBB is checked against the
// octree by a depth-first traversal. The warp buffer holds, per thread, the
// OBB, a traversal stack of nodes still to visit (node address and the cube
// it covers), and a small controller state:
//   pend   a node fetch is in flight (popped, not yet decoded)
//   outst  child tests in flight (set by the node decoder, decremented by
//          every PUSH or RETURN completion)
//   hit    a collision has been confirmed (RETURN with the hit flag)
//   ovf    a push found the stack full; the query is reported as colliding,
//          which is the safe answer for a motion planner
// A thread is ready to fetch when it is active, has no fetch or test in
// flight, has neither hit nor overflowed and its stack is not empty. It is
// finished when it is inactive, or when nothing is in flight and it has hit,
// overflowed or emptied its stack. A hit therefore ends the query early: no
// further nodes are fetched, and only tests already in flight drain.
//
// Launch: a warp is uploaded one lane per cycle (launch_first on the first
// beat, launch_last on the last; lanes not sent stay inactive). The first
// beat takes the lowest free warp slot; each beat stores the lane's OBB and
// pushes the root node. When every thread of a fully launched warp has
// finished, a result (host tag, per-lane hit mask, per-lane overflow mask) is
// issued for one cycle on res_* and the slot is freed.
//
// The warp buffer itself (per-ray data and traversal stack) and its size of
// 4 warps follow the RoboCore description; the launch/result protocol, the
// stack depth and the overflow rule are this design's choices.
module warp_buffer
  import robocore_pkg::*;
#(
  parameter int WARPS       = NWARPS,
  parameter int LANES       = NLANES,
  parameter int STACK_DEPTH = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // launch
  input  logic                        launch_valid,
  output logic                        launch_ready,
  input  logic                        launch_first,
  input  logic                        launch_last,
  input  logic [LANE_W-1:0]           launch_lane,
  input  logic                        launch_active,
  input  obb_t                        launch_obb,
  input  stk_t                        launch_root,
  input  logic [7:0]                  launch_tag,
  // scheduling / pop
  output logic [WARPS-1:0][LANES-1:0] ready,
  input  logic                        pop_valid,
  input  logic [WARP_W-1:0]           pop_warp,
  input  logic [LANE_W-1:0]           pop_lane,
  output stk_t                        pop_ent,
  // node decoder: number of child tests started
  input  logic                        dec_valid,
  input  logic [WARP_W-1:0]           dec_warp,
  input  logic [LANE_W-1:0]           dec_lane,
  input  logic [3:0]                  dec_count,
  // PUSH completion
  input  logic                        push_valid,
  input  logic [WARP_W-1:0]           push_warp,
  input  logic [LANE_W-1:0]           push_lane,
  input  stk_t                        push_ent,
  // RETURN completion
  input  logic                        ret_valid,
  input  logic [WARP_W-1:0]           ret_warp,
  input  logic [LANE_W-1:0]           ret_lane,
  input  logic                        ret_hit,
  // query read for the ray collector
  input  logic [WARP_W-1:0]           rd_warp,
  input  logic [LANE_W-1:0]           rd_lane,
  output obb_t                        rd_obb,
  // results
  output logic                        res_valid,
  output logic [7:0]                  res_tag,
  output logic [LANES-1:0]            res_hit,
  output logic [LANES-1:0]            res_ovf,
  output logic [WARPS-1:0]            slot_busy
);
  localparam int SPW = $clog2(STACK_DEPTH + 1);
  localparam int TW  = WARP_W + LANE_W;

  // ------------------------------------------------------------ storage
  obb_t obb_mem [1 << TW];
  stk_t stk_mem [(1 << TW) * STACK_DEPTH];

  logic [SPW-1:0] sp    [WARPS][LANES];
  logic [3:0]     outst [WARPS][LANES];
  logic           act   [WARPS][LANES];
  logic           pend  [WARPS][LANES];
  logic           hit   [WARPS][LANES];
  logic           ovf   [WARPS][LANES];
  logic [WARPS-1:0] busy, filling;
  logic [7:0]     tag   [WARPS];
  logic [WARP_W-1:0] lslot;

  // ------------------------------------------------------------ launch
  logic [WARP_W-1:0] free_slot;
  logic              any_free;
  always_comb begin
    any_free  = 1'b0;
    free_slot = '0;
    for (int w = WARPS - 1; w >= 0; w--)
      if (!busy[w]) begin any_free = 1'b1; free_slot = WARP_W'(w); end
  end
  assign launch_ready = launch_first ? any_free : 1'b1;
  logic              l_do;
  logic [WARP_W-1:0] l_slot;
  assign l_do   = launch_valid && launch_ready;
  assign l_slot = launch_first ? free_slot : lslot;

  // ------------------------------------------------------------ status
  logic [WARPS-1:0][LANES-1:0] fin;
  always_comb begin
    for (int w = 0; w < WARPS; w++)
      for (int l = 0; l < LANES; l++) begin
        ready[w][l] = busy[w] && act[w][l] && !hit[w][l] && !ovf[w][l] && !pend[w][l]
                      && (outst[w][l] == '0) && (sp[w][l] != '0);
        fin[w][l]   = !act[w][l] || ((hit[w][l] || ovf[w][l] || sp[w][l] == '0)
                                     && !pend[w][l] && (outst[w][l] == '0));
      end
  end

  logic              done_v;
  logic [WARP_W-1:0] done_w;
  always_comb begin
    done_v = 1'b0;
    done_w = '0;
    for (int w = WARPS - 1; w >= 0; w--)
      if (busy[w] && !filling[w] && (&fin[w])) begin done_v = 1'b1; done_w = WARP_W'(w); end
  end

  // ------------------------------------------------------------ stack ports
  logic [SPW-1:0] pop_sp, push_sp;
  assign pop_sp  = sp[pop_warp][pop_lane];
  assign push_sp = sp[push_warp][push_lane];
  // stack of thread t occupies entries t*STACK_DEPTH .. t*STACK_DEPTH+STACK_DEPTH-1
  function automatic int sidx(logic [WARP_W-1:0] w, logic [LANE_W-1:0] l, logic [SPW-1:0] p);
    return int'({w, l}) * STACK_DEPTH + int'(p);
  endfunction
  assign pop_ent = stk_mem[sidx(pop_warp, pop_lane, pop_sp - 1'b1)];
  assign rd_obb  = obb_mem[{rd_warp, rd_lane}];

  always_ff @(posedge clk) begin
    if (push_valid && push_sp != SPW'(STACK_DEPTH))
      stk_mem[sidx(push_warp, push_lane, push_sp)] <= push_ent;
    if (l_do)
      stk_mem[sidx(l_slot, launch_lane, '0)] <= launch_root;
    if (l_do)
      obb_mem[{l_slot, launch_lane}] <= launch_obb;
  end

  // ------------------------------------------------------------ thread state
  // per-thread event strobes: child-test count, push, return, node pop
  logic [WARPS-1:0][LANES-1:0] dh, ph, rh, oh;
  always_comb
    for (int w = 0; w < WARPS; w++)
      for (int l = 0; l < LANES; l++) begin
        dh[w][l] = dec_valid  && dec_warp  == WARP_W'(w) && dec_lane  == LANE_W'(l);
        ph[w][l] = push_valid && push_warp == WARP_W'(w) && push_lane == LANE_W'(l);
        rh[w][l] = ret_valid  && ret_warp  == WARP_W'(w) && ret_lane  == LANE_W'(l);
        oh[w][l] = pop_valid  && pop_warp  == WARP_W'(w) && pop_lane  == LANE_W'(l);
      end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0; filling <= '0; lslot <= '0;
      res_valid <= 1'b0; res_tag <= '0; res_hit <= '0; res_ovf <= '0;
      for (int w = 0; w < WARPS; w++) begin
        tag[w] <= '0;
        for (int l = 0; l < LANES; l++) begin
          sp[w][l] <= '0; outst[w][l] <= '0; act[w][l] <= 1'b0;
          pend[w][l] <= 1'b0; hit[w][l] <= 1'b0; ovf[w][l] <= 1'b0;
        end
      end
    end else begin
      for (int w = 0; w < WARPS; w++)
        for (int l = 0; l < LANES; l++) begin
          outst[w][l] <= outst[w][l] + (dh[w][l] ? dec_count : 4'd0) - (ph[w][l] ? 4'd1 : 4'd0)
                         - (rh[w][l] ? 4'd1 : 4'd0);
          if (oh[w][l]) pend[w][l] <= 1'b1;
          else if (dh[w][l]) pend[w][l] <= 1'b0;
          if (ph[w][l]) begin
            if (sp[w][l] == SPW'(STACK_DEPTH)) ovf[w][l] <= 1'b1;
            else                               sp[w][l]  <= sp[w][l] + 1'b1;
          end else if (oh[w][l]) begin
            sp[w][l] <= sp[w][l] - 1'b1;
          end
          if (rh[w][l] && ret_hit) hit[w][l] <= 1'b1;
        end

      // launch (a fresh slot has nothing in flight, so it overrides the above)
      if (l_do) begin
        if (launch_first) begin
          busy[l_slot]    <= 1'b1;
          filling[l_slot] <= 1'b1;
          tag[l_slot]     <= launch_tag;
          lslot           <= l_slot;
          for (int l = 0; l < LANES; l++) act[l_slot][l] <= 1'b0;
        end
        act[l_slot][launch_lane]   <= launch_active;
        sp[l_slot][launch_lane]    <= launch_active ? SPW'(1) : SPW'(0);
        outst[l_slot][launch_lane] <= '0;
        pend[l_slot][launch_lane]  <= 1'b0;
        hit[l_slot][launch_lane]   <= 1'b0;
        ovf[l_slot][launch_lane]   <= 1'b0;
        if (launch_last) filling[l_slot] <= 1'b0;
      end

      // result of a finished warp
      res_valid <= done_v;
      if (done_v) begin
        busy[done_w] <= 1'b0;
        res_tag      <= tag[done_w];
        for (int l = 0; l < LANES; l++) begin
          res_hit[l] <= act[done_w][l] && (hit[done_w][l] || ovf[done_w][l]);
          res_ovf[l] <= act[done_w][l] && ovf[done_w][l];
        end
      end
    end
  end

  assign slot_busy = busy;

  // protocol checks: a pop only for a ready thread, no completion without a
  // test in flight. The violations are registered and checked one cycle
  // later so that the check sees the values of the offending cycle.
  logic bad_pop, bad_ret;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bad_pop <= 1'b0;
      bad_ret <= 1'b0;
    end else begin
      bad_pop <= pop_valid && !ready[pop_warp][pop_lane];
      bad_ret <= ret_valid && (outst[ret_warp][ret_lane] == '0);
    end
  end
  a_pop_ready:    assert property (@(posedge clk) disable iff (!rst_n) !bad_pop);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !bad_ret);

endmodule
