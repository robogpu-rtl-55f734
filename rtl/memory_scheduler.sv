// memory_scheduler: node fetch path between the traversal stacks and memory.
//
// When the warp scheduler grants a thread, the warp buffer pops the thread's
// next node (address and the box it covers) and hands it here. The node's box
// is kept in a side table indexed by the thread's {warp, lane} tag, and a read
// request {tag, address} enters the memory access queue, which drives the
// memory port (valid/ready). Responses {tag, node word} may come back in any
// order; they enter the memory response FIFO, and its head is paired with the
// box from the side table and offered to the node decoder. A thread has at
// most one fetch outstanding, so the tag is unique. The queue and FIFO appear
// in the RTA/RoboCore block diagram; the tag scheme, depths and the side
// table are this design's choices.
//
// can_issue is high while the access queue has room; the warp scheduler is
// enabled only then, so an issued fetch is never refused.
module memory_scheduler
  import robocore_pkg::*;
#(
  parameter int WARPS  = NWARPS,
  parameter int LANES  = NLANES,
  parameter int QDEPTH = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // fetch issue (from warp buffer pop)
  output logic                      can_issue,
  input  logic                      iss_valid,
  input  logic [WARP_W-1:0]         iss_warp,
  input  logic [LANE_W-1:0]         iss_lane,
  input  stk_t                      iss_ent,
  // memory port
  output logic                      mem_req_valid,
  input  logic                      mem_req_ready,
  output logic [ADDR_W-1:0]         mem_req_addr,
  output logic [WARP_W+LANE_W-1:0]  mem_req_tag,
  input  logic                      mem_rsp_valid,
  output logic                      mem_rsp_ready,
  input  logic [WARP_W+LANE_W-1:0]  mem_rsp_tag,
  input  logic [NODE_W-1:0]         mem_rsp_data,
  // to node decoder
  output logic                      nd_valid,
  input  logic                      nd_ready,
  output logic [WARP_W-1:0]         nd_warp,
  output logic [LANE_W-1:0]         nd_lane,
  output logic [NODE_W-1:0]         nd_node,
  output stk_t                      nd_box
);
  localparam int TW = WARP_W + LANE_W;

  typedef struct packed {
    logic [TW-1:0]     tag;
    logic [ADDR_W-1:0] addr;
  } req_t;
  typedef struct packed {
    logic [TW-1:0]     tag;
    logic [NODE_W-1:0] data;
  } rsp_t;

  stk_t box_tab [1 << TW];
  always_ff @(posedge clk) if (iss_valid) box_tab[{iss_warp, iss_lane}] <= iss_ent;

  // memory access queue
  req_t q_in, q_out;
  logic q_in_ready;
  logic [$clog2(QDEPTH+1)-1:0] q_count;
  assign q_in = '{tag: {iss_warp, iss_lane}, addr: iss_ent.addr};
  sync_fifo #(.T(req_t), .DEPTH(QDEPTH)) u_maq (
    .clk, .rst_n, .in_valid(iss_valid), .in_ready(q_in_ready), .in_data(q_in),
    .out_valid(mem_req_valid), .out_ready(mem_req_ready), .out_data(q_out), .count(q_count));
  assign can_issue    = q_in_ready;
  assign mem_req_addr = q_out.addr;
  assign mem_req_tag  = q_out.tag;

  // memory response FIFO
  rsp_t r_in, r_out;
  logic [$clog2(QDEPTH+1)-1:0] r_count;
  assign r_in = '{tag: mem_rsp_tag, data: mem_rsp_data};
  sync_fifo #(.T(rsp_t), .DEPTH(QDEPTH)) u_mrf (
    .clk, .rst_n, .in_valid(mem_rsp_valid), .in_ready(mem_rsp_ready), .in_data(r_in),
    .out_valid(nd_valid), .out_ready(nd_ready), .out_data(r_out), .count(r_count));
  assign nd_warp = r_out.tag[TW-1:LANE_W];
  assign nd_lane = r_out.tag[LANE_W-1:0];
  assign nd_node = r_out.data;
  assign nd_box  = box_tab[r_out.tag];

  a_issue_ok: assert property (@(posedge clk) disable iff (!rst_n) iss_valid |-> q_in_ready);

endmodule
