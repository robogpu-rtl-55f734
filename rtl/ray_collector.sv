// ray_collector: starts one intersection program per child test.
//
// For each child record from the node decoder it reads the query of the
// child's thread (the OBB, kept in the warp buffer) and builds a packet:
// OBB centre, half extents and axes, the child's AABB (centre, and its half
// size copied to all three axes), the node type and address, and the start PC
// and start port of the intersection program (launch-time registers). Scratch
// words start at zero. The packet is held in an output register that feeds
// the entry port of the interconnect (valid/ready); a new record is accepted
// when the register is empty or being emptied. The block's name and place
// follow the RTA diagram; the packet layout is this design's.
//
// Admission control (this design's choice): intersection programs route
// packets in cycles (for example Box-Normal -> CMP -> Box-Normal), so if every
// buffer on such a cycle filled up, no unit could make progress. The
// collector therefore keeps at most MAX_INFLIGHT programs in the back end,
// counting one up per packet it starts and one down per program that ends
// (retire = number of PUSH and RETURN completions this cycle). A cycle of two
// units with 4-entry buffers holds 18 packets before it can lock, so the
// default of 16 keeps the back end deadlock-free.
module ray_collector
  import robocore_pkg::*;
#(
  parameter int MAX_INFLIGHT = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PC_W-1:0]   start_pc,
  input  logic [PORT_W-1:0] start_port,
  input  logic [1:0]        retire,
  input  logic              ch_valid,
  output logic              ch_ready,
  input  child_t            ch,
  output logic [WARP_W-1:0] rd_warp,
  output logic [LANE_W-1:0] rd_lane,
  input  obb_t              rd_obb,
  output logic              pkt_valid,
  input  logic              pkt_ready,
  output pkt_t              pkt
);
  localparam int IW = $clog2(MAX_INFLIGHT + 1);
  pkt_t          nxt;
  logic [IW-1:0] inflight;
  logic          start;

  assign rd_warp  = ch.warp;
  assign rd_lane  = ch.lane;
  assign ch_ready = (!pkt_valid || pkt_ready) && (inflight < IW'(MAX_INFLIGHT));
  assign start    = ch_valid && ch_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + IW'(start) - IW'(retire);
  end

  always_comb begin
    nxt           = '0;
    nxt.warp      = ch.warp;
    nxt.lane      = ch.lane;
    nxt.leaf      = ch.leaf;
    nxt.node_addr = ch.node.addr;
    nxt.pc        = start_pc;
    nxt.dest      = start_port;
    nxt.d = putv(nxt.d,   WIDX_W'(W_OC),  rd_obb.c);
    nxt.d = putv(nxt.d,   WIDX_W'(W_OE),  rd_obb.e);
    nxt.d = putv(nxt.d,   WIDX_W'(W_OU0), rd_obb.u0);
    nxt.d = putv(nxt.d,   WIDX_W'(W_OU1), rd_obb.u1);
    nxt.d = putv(nxt.d,   WIDX_W'(W_OU2), rd_obb.u2);
    nxt.d = putv(nxt.d,   WIDX_W'(W_AC),  ch.node.center);
    nxt.d = putv(nxt.d,   WIDX_W'(W_AH),  {ch.node.half, ch.node.half, ch.node.half});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     pkt_valid <= 1'b0;
    else if (ch_valid && ch_ready)  pkt_valid <= 1'b1;
    else if (pkt_ready)             pkt_valid <= 1'b0;
  end
  always_ff @(posedge clk) if (ch_valid && ch_ready) pkt <= nxt;

endmodule
