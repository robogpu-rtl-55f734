// op_set: one set of RoboCore intersection units.
//
// A set is the OP-unit network that runs intersection programs: the
// interconnect, the eight compute OP units (ADDSUB, CROSS, MINMAX, DOT, MUL,
// CMP, Box-Normal, Edge x Edge), and the PUSH and RETURN units. Packets enter
// at interconnect source 0 (from the ray collector, through the set
// dispatcher) with the start PC and port already stamped; they hop between
// units as their destination tables say until they reach PUSH or RETURN,
// which turn them into a stack push or a completion for the warp buffer.
//
// Interface: in_valid/in_ready/in_pkt is the entry port (valid/ready);
// push_* and ret_* are valid/ready completion outputs (held until taken);
// leave counts the packets that left the OP network this cycle (delivered to
// PUSH or RETURN, 0..2), used by the dispatcher to count the tests inside the
// network; stall is high in any cycle a packet waited for the interconnect;
// busy is high while any packet is inside the set; err is sticky and
// reports a destination-table miss. All units of every set see the same
// configuration writes, so every set runs the same program.
//
// The units are joined in a loop of finite FIFOs, so a set can deadlock if
// too many tests are inside it at once; the set dispatcher caps that number
// (MAX_INFLIGHT), which is this design's form of the admission control the
// ray collector performs.
//
// The unit list follows the collision configuration (the reciprocal unit is
// left out); the collision units run COLL_LAT pipeline stages, the others
// one (a choice of this design).
module op_set
  import robocore_pkg::*;
#(
  parameter int COLL_LAT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              in_valid,
  output logic              in_ready,
  input  pkt_t              in_pkt,
  output logic              push_valid,
  input  logic              push_ready,
  output logic [WARP_W-1:0] push_warp,
  output logic [LANE_W-1:0] push_lane,
  output stk_t              push_ent,
  output logic              ret_valid,
  input  logic              ret_ready,
  output logic [WARP_W-1:0] ret_warp,
  output logic [LANE_W-1:0] ret_lane,
  output logic              ret_hit,
  output logic [1:0]        leave,
  output logic              stall,
  output logic              busy,
  output logic              err
);
  logic [NSRC-1:0] src_valid, src_ready;
  pkt_t            src_pkt [NSRC];
  logic [NDST-1:0] dst_valid, dst_ready;
  pkt_t            dst_pkt [NDST];

  assign src_valid[0] = in_valid;
  assign src_pkt[0]   = in_pkt;
  assign in_ready     = src_ready[0];

  op_interconnect #(.NS(NSRC), .ND(NDST)) u_icnt (
    .clk, .rst_n, .src_valid, .src_ready, .src_pkt, .dst_valid, .dst_ready, .dst_pkt);

  localparam opkind_e           KINDS [NFWD] = '{OPK_ADDSUB, OPK_CROSS, OPK_MINMAX, OPK_DOT,
                                                 OPK_MUL, OPK_CMP, OPK_BOXN, OPK_EDGE};
  localparam logic [PORT_W-1:0] PORTS [NFWD] = '{P_ADDSUB, P_CROSS, P_MINMAX, P_DOT,
                                                 P_MUL, P_CMP, P_BOXN, P_EDGE};
  logic [NFWD-1:0] u_err, u_busy;

  for (genvar i = 0; i < NFWD; i++) begin : g_op
    localparam int LAT = (KINDS[i] == OPK_BOXN || KINDS[i] == OPK_EDGE) ? COLL_LAT : 1;
    op_unit #(.KIND(KINDS[i]), .UNIT(PORTS[i]), .LAT(LAT)) u_op (
      .clk, .rst_n, .cfg,
      .in_valid(dst_valid[PORTS[i]]), .in_ready(dst_ready[PORTS[i]]), .in_pkt(dst_pkt[PORTS[i]]),
      .out_valid(src_valid[i+1]), .out_ready(src_ready[i+1]), .out_pkt(src_pkt[i+1]),
      .busy(u_busy[i]), .err(u_err[i]));
  end

  logic push_busy, ret_busy;
  push_unit u_push (
    .clk, .rst_n,
    .in_valid(dst_valid[P_PUSH]), .in_ready(dst_ready[P_PUSH]), .in_pkt(dst_pkt[P_PUSH]),
    .push_valid, .push_ready, .push_warp, .push_lane, .push_ent, .busy(push_busy));

  return_unit u_ret (
    .clk, .rst_n, .cfg,
    .in_valid(dst_valid[P_RETURN]), .in_ready(dst_ready[P_RETURN]), .in_pkt(dst_pkt[P_RETURN]),
    .ret_valid, .ret_ready, .ret_warp, .ret_lane, .ret_hit, .busy(ret_busy));

  assign leave = 2'(dst_valid[P_PUSH] && dst_ready[P_PUSH])
               + 2'(dst_valid[P_RETURN] && dst_ready[P_RETURN]);
  assign stall = (src_valid & ~src_ready) != '0;
  assign busy  = (u_busy != '0) || (dst_valid != '0) || push_busy || ret_busy;
  assign err   = |u_err;

endmodule
