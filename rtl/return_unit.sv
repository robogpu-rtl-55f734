// return_unit: the RETURN OP unit added by RoboCore for conditional returns.
//
// When a CMP uop finds a separating axis, the intersection program can end at
// once instead of running its remaining uops: the CMP unit's destination
// table sends the packet to this unit, which ends the program and tells the
// controller (the warp buffer) that the child test is complete, so traversal
// can go on. No destination table is needed because a RETURN always ends the
// program. In this design a per-PC configuration bit (ucfg.sub[0]) marks a
// RETURN as "collision confirmed": the leaf-node program returns through such
// a PC when all 15 axes overlap, which stops the whole query of that thread.
//
// Timing: the completion is registered, adding one cycle to the program, as
// the separate RETURN unit does in the RoboCore description (two cycles from
// acceptance when nothing waits). One completion per cycle. The output is
// valid/ready because the returns of all sets of OP units share the warp
// buffer's single return port; a completion is held until ret_ready. busy is
// high while a packet is held anywhere in the unit.
module return_unit
  import robocore_pkg::*;
#(
  parameter logic [PORT_W-1:0] UNIT     = P_RETURN,
  parameter int                IN_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              in_valid,
  output logic              in_ready,
  input  pkt_t              in_pkt,
  output logic              ret_valid,
  input  logic              ret_ready,
  output logic [WARP_W-1:0] ret_warp,
  output logic [LANE_W-1:0] ret_lane,
  output logic              ret_hit,
  output logic              busy
);
  logic hit_cfg [1 << PC_W];
  ucfg_t cfg_word;
  assign cfg_word = ucfg_t'(cfg.data);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < (1 << PC_W); i++) hit_cfg[i] <= 1'b0;
    end else if (cfg.valid && cfg.unit == UNIT && cfg.tbl == CT_UCFG) begin
      hit_cfg[cfg.idx[PC_W-1:0]] <= cfg_word.sub[0];
    end
  end

  logic ib_valid, ib_take;
  pkt_t ib_pkt;
  logic [$clog2(IN_DEPTH+1)-1:0] ib_count;
  sync_fifo #(.T(pkt_t), .DEPTH(IN_DEPTH)) u_ibuf (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_pkt),
    .out_valid(ib_valid), .out_ready(ib_take), .out_data(ib_pkt), .count(ib_count));

  // output register: refilled when empty or when its return is taken
  assign ib_take = !ret_valid || ret_ready;
  assign busy    = ib_valid || ret_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       ret_valid <= 1'b0;
    else if (ib_take) ret_valid <= ib_valid;
  end
  always_ff @(posedge clk) if (ib_take) begin
    ret_warp <= ib_pkt.warp;
    ret_lane <= ib_pkt.lane;
    ret_hit  <= hit_cfg[ib_pkt.pc];
  end

endmodule
