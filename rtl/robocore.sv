// robocore: a RoboCore unit, the collision-detection accelerator that sits
// beside each streaming multiprocessor of a RoboGPU in place of the ray
// tracing accelerator.
//
// Threads of a GPU kernel each hand over one collision query: "does this
// oriented box (a robot link in some pose) touch any occupied cube of the
// environment octree?". Up to WARPS warps of LANES queries are held in the
// warp buffer. Traversal front end: the warp scheduler picks a ready thread,
// the warp buffer pops its next node, the memory scheduler fetches it, the
// node decoder splits it into occupied octants, and the ray collector turns
// every (query, octant) pair into a packet that starts an intersection
// program. Intersection back end: the packet hops between OP units over the
// interconnect, each unit running one uop and choosing the next uop and unit
// from its operation destination table. This is the configuration with
// conditional returns and collision OP units: a CMP uop that finds a
// separating axis sends the packet straight to the RETURN unit, ending the
// test early; Box-Normal and Edge x Edge units run a whole axis test as one
// uop. Overlapping internal octants go to the PUSH unit (pushed on the
// thread's stack); an overlapping leaf octant returns with the hit flag and
// ends that thread's query.
//
// The back end has NSETS identical sets of OP units (op_set). A dispatcher
// hands each new packet to a set round-robin, with a limit on the tests each
// set holds; the sets' pushes and returns are merged round-robin into the
// warp buffer's single push port and single return port.
//
// Interface (plain signals):
//   cfg            configuration writes (uop config registers, destination
//                  tables, start PC/port), issued before launching work
//   launch_*       query upload, one lane per cycle, see warp_buffer
//   mem_req_*/mem_rsp_*  node fetch port towards the L1 cache; responses
//                  carry the request tag and may return in any order
//   res_*          one cycle per finished warp: tag, hit mask, overflow mask
//   err            sticky: a packet found no destination table entry
//   idle           nothing launched or in flight
//   stat_nodes     node fetches issued since reset (32-bit, wraps)
//   stat_queries   active queries launched since reset (32-bit, wraps)
// The two counters let software compute the average number of nodes a query
// traversed in the last kernel (difference of stat_nodes over difference of
// stat_queries); the source switches a kernel between this unit and the CUDA
// cores on that average. Where the source keeps the metric is not stated;
// these counters are this design's choice.
// Port numbers on the interconnect are given by robocore_pkg::port_e; the
// unit set (ADDSUB, CROSS, MINMAX, DOT, MUL, CMP, PUSH, RETURN, Box-Normal,
// Edge x Edge, no RCP), the 4 warps of the warp buffer and the 4 sets of
// intersection units follow the collision configuration of the source;
// latencies, depths, numbering and how the sets share the warp buffer are
// this design's choices.
module robocore
  import robocore_pkg::*;
#(
  parameter int WARPS       = NWARPS,
  parameter int LANES       = NLANES,
  parameter int STACK_DEPTH = 64,
  parameter int COLL_LAT    = 4,
  parameter int QDEPTH      = 8,
  parameter int MAX_INFLIGHT = 16,
  parameter int NSETS       = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_t                      cfg,
  input  logic                      launch_valid,
  output logic                      launch_ready,
  input  logic                      launch_first,
  input  logic                      launch_last,
  input  logic [LANE_W-1:0]         launch_lane,
  input  logic                      launch_active,
  input  obb_t                      launch_obb,
  input  stk_t                      launch_root,
  input  logic [7:0]                launch_tag,
  output logic                      mem_req_valid,
  input  logic                      mem_req_ready,
  output logic [ADDR_W-1:0]         mem_req_addr,
  output logic [WARP_W+LANE_W-1:0]  mem_req_tag,
  input  logic                      mem_rsp_valid,
  output logic                      mem_rsp_ready,
  input  logic [WARP_W+LANE_W-1:0]  mem_rsp_tag,
  input  logic [NODE_W-1:0]         mem_rsp_data,
  output logic                      res_valid,
  output logic [7:0]                res_tag,
  output logic [LANES-1:0]          res_hit,
  output logic [LANES-1:0]          res_ovf,
  output logic                      err,
  output logic                      idle,
  output logic [31:0]               stat_nodes,
  output logic [31:0]               stat_queries
);
  // ------------------------------------------------------------ start regs
  logic [PC_W-1:0]   start_pc;
  logic [PORT_W-1:0] start_port;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_pc   <= '0;
      start_port <= P_ADDSUB;
    end else if (cfg.valid && cfg.tbl == CT_START) begin
      start_pc   <= cfg.data[PORT_W +: PC_W];
      start_port <= cfg.data[PORT_W-1:0];
    end
  end

  // ------------------------------------------------------------ front end
  logic [WARPS-1:0][LANES-1:0] ready;
  logic              can_issue;
  logic              gnt_valid;
  logic [WARP_W-1:0] gnt_warp;
  logic [LANE_W-1:0] gnt_lane;
  stk_t              pop_ent;
  logic              dec_valid;
  logic [WARP_W-1:0] dec_warp;
  logic [LANE_W-1:0] dec_lane;
  logic [3:0]        dec_count;
  logic              push_valid, ret_valid, ret_hit;
  logic [WARP_W-1:0] push_warp, ret_warp, rd_warp;
  logic [LANE_W-1:0] push_lane, ret_lane, rd_lane;
  stk_t              push_ent;
  obb_t              rd_obb;
  logic [WARPS-1:0]  slot_busy;

  warp_scheduler #(.WARPS(WARPS), .LANES(LANES)) u_ws (
    .clk, .rst_n, .enable(can_issue), .ready,
    .gnt_valid, .gnt_warp, .gnt_lane);

  warp_buffer #(.WARPS(WARPS), .LANES(LANES), .STACK_DEPTH(STACK_DEPTH)) u_wb (
    .clk, .rst_n,
    .launch_valid, .launch_ready, .launch_first, .launch_last, .launch_lane,
    .launch_active, .launch_obb, .launch_root, .launch_tag,
    .ready, .pop_valid(gnt_valid), .pop_warp(gnt_warp), .pop_lane(gnt_lane), .pop_ent,
    .dec_valid, .dec_warp, .dec_lane, .dec_count,
    .push_valid, .push_warp, .push_lane, .push_ent,
    .ret_valid, .ret_warp, .ret_lane, .ret_hit,
    .rd_warp, .rd_lane, .rd_obb,
    .res_valid, .res_tag, .res_hit, .res_ovf, .slot_busy);

  logic              nd_valid, nd_ready;
  logic [WARP_W-1:0] nd_warp;
  logic [LANE_W-1:0] nd_lane;
  logic [NODE_W-1:0] nd_node;
  stk_t              nd_box;

  memory_scheduler #(.WARPS(WARPS), .LANES(LANES), .QDEPTH(QDEPTH)) u_ms (
    .clk, .rst_n, .can_issue,
    .iss_valid(gnt_valid), .iss_warp(gnt_warp), .iss_lane(gnt_lane), .iss_ent(pop_ent),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_tag,
    .mem_rsp_valid, .mem_rsp_ready, .mem_rsp_tag, .mem_rsp_data,
    .nd_valid, .nd_ready, .nd_warp, .nd_lane, .nd_node, .nd_box);

  logic   ch_valid, ch_ready;
  child_t ch;
  node_decoder u_nd (
    .clk, .rst_n, .in_valid(nd_valid), .in_ready(nd_ready), .in_warp(nd_warp),
    .in_lane(nd_lane), .in_node(nd_node), .in_box(nd_box),
    .dec_valid, .dec_warp, .dec_lane, .dec_count,
    .ch_valid, .ch_ready, .ch);

  logic   rc_valid, rc_ready;
  pkt_t   rc_pkt;

  // the collector bounds all tests in flight, including those queued at
  // PUSH/RETURN; the dispatcher bounds each set's OP network to MAX_INFLIGHT
  ray_collector #(.MAX_INFLIGHT(2 * NSETS * MAX_INFLIGHT)) u_rc (
    .clk, .rst_n, .start_pc, .start_port, .retire(2'(push_valid) + 2'(ret_valid)),
    .ch_valid, .ch_ready, .ch, .rd_warp, .rd_lane, .rd_obb,
    .pkt_valid(rc_valid), .pkt_ready(rc_ready), .pkt(rc_pkt));

  // ------------------------------------------------------------ back end
  logic [NSETS-1:0]      set_in_valid, set_in_ready;
  pkt_t                  set_in_pkt [NSETS];
  logic [NSETS-1:0][1:0] set_leave;
  logic [NSETS-1:0]      set_stall, set_busy, set_err;

  set_dispatch #(.NSETS(NSETS), .MAX_INFLIGHT(MAX_INFLIGHT)) u_disp (
    .clk, .rst_n, .in_valid(rc_valid), .in_ready(rc_ready), .in_pkt(rc_pkt),
    .out_valid(set_in_valid), .out_ready(set_in_ready), .out_pkt(set_in_pkt),
    .leave(set_leave));

  typedef struct packed {
    logic [WARP_W-1:0] warp;
    logic [LANE_W-1:0] lane;
    stk_t              ent;
  } push_t;
  typedef struct packed {
    logic [WARP_W-1:0] warp;
    logic [LANE_W-1:0] lane;
    logic              hit;
  } ret_t;
  logic [NSETS-1:0] s_push_valid, s_push_ready, s_ret_valid, s_ret_ready;
  push_t            s_push [NSETS];
  ret_t             s_ret  [NSETS];

  for (genvar s = 0; s < NSETS; s++) begin : g_set
    op_set #(.COLL_LAT(COLL_LAT)) u_set (
      .clk, .rst_n, .cfg,
      .in_valid(set_in_valid[s]), .in_ready(set_in_ready[s]), .in_pkt(set_in_pkt[s]),
      .push_valid(s_push_valid[s]), .push_ready(s_push_ready[s]),
      .push_warp(s_push[s].warp), .push_lane(s_push[s].lane), .push_ent(s_push[s].ent),
      .ret_valid(s_ret_valid[s]), .ret_ready(s_ret_ready[s]),
      .ret_warp(s_ret[s].warp), .ret_lane(s_ret[s].lane), .ret_hit(s_ret[s].hit),
      .leave(set_leave[s]), .stall(set_stall[s]), .busy(set_busy[s]), .err(set_err[s]));
  end

  // the warp buffer takes one push and one return per cycle
  push_t m_push;
  ret_t  m_ret;
  rr_merge #(.T(push_t), .N(NSETS)) u_push_merge (
    .clk, .rst_n, .in_valid(s_push_valid), .in_ready(s_push_ready), .in_data(s_push),
    .out_valid(push_valid), .out_ready(1'b1), .out_data(m_push));
  rr_merge #(.T(ret_t), .N(NSETS)) u_ret_merge (
    .clk, .rst_n, .in_valid(s_ret_valid), .in_ready(s_ret_ready), .in_data(s_ret),
    .out_valid(ret_valid), .out_ready(1'b1), .out_data(m_ret));
  assign push_warp = m_push.warp;
  assign push_lane = m_push.lane;
  assign push_ent  = m_push.ent;
  assign ret_warp  = m_ret.warp;
  assign ret_lane  = m_ret.lane;
  assign ret_hit   = m_ret.hit;

  assign err  = |set_err;
  assign idle = (slot_busy == '0) && (set_busy == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_nodes   <= '0;
      stat_queries <= '0;
    end else begin
      if (mem_req_valid && mem_req_ready) stat_nodes <= stat_nodes + 32'd1;
      if (launch_valid && launch_ready && launch_active) stat_queries <= stat_queries + 32'd1;
    end
  end

endmodule
