// push_unit: the PUSH OP unit.
//
// An internal child node that survived every separating-axis test must be
// visited later, so the last uop of its intersection program sends the packet
// here. The unit takes the node address and the node's box (centre, half
// size) from the packet and pushes it onto the traversal stack of the packet's
// thread in the warp buffer. The push also ends that intersection program:
// the warp buffer counts it as one completed child test. This follows the
// PUSH unit of TTA+/RoboCore, which updates the traversal stacks through the
// controller; ending the program at the push, and needing no destination
// table, are this design's choices.
//
// Timing: a packet waits in the input buffer (IN_DEPTH entries) and is turned
// into a registered push one cycle after it reaches the head (two cycles from
// acceptance when nothing waits). The push output is valid/ready: with
// several sets of OP units the pushes of all sets share the warp buffer's
// single push port, so a push may have to wait for its turn; it is held
// until push_ready. busy is high while a packet is held anywhere in the unit.
module push_unit
  import robocore_pkg::*;
#(
  parameter int IN_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  pkt_t              in_pkt,
  output logic              push_valid,
  input  logic              push_ready,
  output logic [WARP_W-1:0] push_warp,
  output logic [LANE_W-1:0] push_lane,
  output stk_t              push_ent,
  output logic              busy
);
  logic ib_valid, ib_take;
  pkt_t ib_pkt;
  logic [$clog2(IN_DEPTH+1)-1:0] ib_count;

  sync_fifo #(.T(pkt_t), .DEPTH(IN_DEPTH)) u_ibuf (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_pkt),
    .out_valid(ib_valid), .out_ready(ib_take), .out_data(ib_pkt), .count(ib_count));

  // output register: refilled when empty or when its push is taken
  assign ib_take = !push_valid || push_ready;
  assign busy    = ib_valid || push_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       push_valid <= 1'b0;
    else if (ib_take) push_valid <= ib_valid;
  end
  always_ff @(posedge clk) if (ib_take) begin
    push_warp       <= ib_pkt.warp;
    push_lane       <= ib_pkt.lane;
    push_ent.addr   <= ib_pkt.node_addr;
    push_ent.center <= getv(ib_pkt.d, WIDX_W'(W_AC));
    push_ent.half   <= ib_pkt.d[W_AH];
  end

endmodule
