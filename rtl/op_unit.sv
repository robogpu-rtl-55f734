// op_unit: one programmable OP unit of RoboCore (ADDSUB, CROSS, MINMAX, DOT,
// MUL, CMP, Box-Normal or Edge x Edge, chosen by KIND).
//
// Structure, as in the OP unit of the TTA+/RoboCore description:
//   input buffer -> input decoder (config regs) -> compute unit -> output buffer
// plus an operation destination table. A packet arrives from the
// interconnect with the PC of the uop to run here. The input decoder reads the
// configuration register for that PC (sub-operation, source word indices A
// and B, destination word index, axis) and selects the operands from the
// packet. The compute unit writes its result back into the packet's scratch
// words. The destination table, looked up with {node type, PC, compare
// result}, gives the next PC and the port of the next OP unit; both are
// stamped into the packet, which then waits in the output buffer for the
// interconnect. For the CMP unit the compare result chooses between the two
// table entries of the uop, which gives conditional branches and conditional
// returns (a branch to the RETURN unit). Only the CMP unit produces a compare
// result; the others look up with cmp = 0.
//
// Timing: a packet leaves the input buffer into a LAT-stage pipeline and
// reaches the output buffer LAT cycles later; one packet per cycle can be
// started. A packet is only started when the output buffer has a free slot
// for it counting those already in the pipeline, so the pipeline never stalls.
// LAT (1 for simple units, 4 for the collision units by default) and the
// buffer depths are this design's choices; the source does not give them.
//
// Configuration: cfg writes addressed to UNIT (this unit's port number) load
// the config registers (CT_UCFG) or the destination table (CT_DEST).
// err goes high, and stays high, if a packet finds no valid destination entry.
module op_unit
  import robocore_pkg::*;
#(
  parameter opkind_e           KIND      = OPK_ADDSUB,
  parameter logic [PORT_W-1:0] UNIT      = P_ADDSUB,
  parameter int                LAT       = 1,
  parameter int                IN_DEPTH  = 4,
  parameter int                OUT_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic in_valid,
  output logic in_ready,
  input  pkt_t in_pkt,
  output logic out_valid,
  input  logic out_ready,
  output pkt_t out_pkt,
  output logic busy,       // a packet is inside the unit
  output logic err
);
  localparam int CW = $clog2(OUT_DEPTH + LAT + 1);

  // ---------------------------------------------------------- config regs
  ucfg_t ucfg [1 << PC_W];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < (1 << PC_W); i++) ucfg[i] <= '0;
    end else if (cfg.valid && cfg.unit == UNIT && cfg.tbl == CT_UCFG) begin
      ucfg[cfg.idx[PC_W-1:0]] <= ucfg_t'(cfg.data);
    end
  end

  // ---------------------------------------------------------- input buffer
  logic  ib_valid, ib_ready;
  pkt_t  ib_pkt;
  logic [$clog2(IN_DEPTH+1)-1:0] ib_count;
  sync_fifo #(.T(pkt_t), .DEPTH(IN_DEPTH)) u_ibuf (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_pkt),
    .out_valid(ib_valid), .out_ready(ib_ready), .out_data(ib_pkt), .count(ib_count));

  // ---------------------------------------------------------- input decoder
  ucfg_t uc;
  vec3_t a, b;
  assign uc = ucfg[ib_pkt.pc];
  assign a  = getv(ib_pkt.d, uc.src_a);
  assign b  = getv(ib_pkt.d, uc.src_b);

  // ---------------------------------------------------------- compute unit
  word_t  bn_dist, bn_rad, ee_dist, ee_rad;
  generate
    if (KIND == OPK_BOXN) begin : g_bn
      box_normal_cu u_bn (.d(ib_pkt.d), .axis(uc.axis[2:0]), .pdist(bn_dist), .rad(bn_rad));
      assign ee_dist = '0;
      assign ee_rad  = '0;
    end else if (KIND == OPK_EDGE) begin : g_ee
      edge_edge_cu u_ee (.d(ib_pkt.d), .axis(uc.axis), .pdist(ee_dist), .rad(ee_rad));
      assign bn_dist = '0;
      assign bn_rad  = '0;
    end else begin : g_none
      assign bn_dist = '0; assign bn_rad = '0;
      assign ee_dist = '0; assign ee_rad = '0;
    end
  endgenerate

  pdata_t res_d;
  logic   cmp;
  vec3_t  v;
  always_comb begin
    res_d = ib_pkt.d;
    cmp   = 1'b0;
    v     = '0;
    unique case (KIND)
      OPK_ADDSUB: begin
        for (int k = 0; k < 3; k++)
          v[k] = uc.sub[0] ? word_t'(a[k]) - word_t'(b[k]) : word_t'(a[k]) + word_t'(b[k]);
        res_d = putv(ib_pkt.d, uc.dst, v);
      end
      OPK_MINMAX: begin
        for (int k = 0; k < 3; k++)
          case (uc.sub[1:0])
            2'd0:    v[k] = (word_t'(a[k]) < word_t'(b[k])) ? a[k] : b[k];
            2'd1:    v[k] = (word_t'(a[k]) > word_t'(b[k])) ? a[k] : b[k];
            default: v[k] = fxabs(word_t'(a[k]));
          endcase
        res_d = putv(ib_pkt.d, uc.dst, v);
      end
      OPK_CROSS: res_d = putv(ib_pkt.d, uc.dst, cross3(a, b));
      OPK_DOT:   res_d[uc.dst] = dot3(a, b);
      OPK_MUL:   res_d[uc.dst] = fxmul(word_t'(a[0]), word_t'(b[0]));
      OPK_CMP: begin
        if (uc.sub[0]) cmp = (word_t'(a[0]) > word_t'(b[0])) || (word_t'(a[1]) > word_t'(b[1]))
                          || (word_t'(a[2]) > word_t'(b[2]));
        else           cmp = (word_t'(a[0]) > word_t'(b[0]));
      end
      OPK_BOXN: begin
        res_d[uc.dst]                    = bn_dist;
        res_d[WIDX_W'(uc.dst + 1'b1)]    = bn_rad;
      end
      OPK_EDGE: begin
        res_d[uc.dst]                    = ee_dist;
        res_d[WIDX_W'(uc.dst + 1'b1)]    = ee_rad;
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------- dest table
  dest_ent_t dent;
  op_dest_table u_dt (
    .clk, .rst_n,
    .cfg_we (cfg.valid && cfg.unit == UNIT && cfg.tbl == CT_DEST),
    .cfg_idx(cfg.idx[DT_IDX_W-1:0]),
    .cfg_ent(dest_ent_t'(cfg.data[$bits(dest_ent_t)-1:0])),
    .lk_leaf(ib_pkt.leaf), .lk_pc(ib_pkt.pc), .lk_cmp(cmp),
    .ent(dent));

  pkt_t res_pkt;
  always_comb begin
    res_pkt      = ib_pkt;
    res_pkt.d    = res_d;
    res_pkt.pc   = dent.next_pc;
    res_pkt.dest = dent.dest;
  end

  // ---------------------------------------------------------- pipeline
  logic [LAT-1:0] pv;
  pkt_t           pp [LAT];
  logic [$clog2(OUT_DEPTH+1)-1:0] ob_count;
  logic [CW-1:0]  inflight;

  always_comb begin
    inflight = '0;
    for (int s = 0; s < LAT; s++) inflight += CW'(pv[s]);
  end
  assign ib_ready = (CW'(ob_count) + inflight) < CW'(OUT_DEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv  <= '0;
      err <= 1'b0;
    end else begin
      pv[0] <= ib_valid && ib_ready;
      for (int s = 1; s < LAT; s++) pv[s] <= pv[s-1];
      if (ib_valid && ib_ready && !dent.valid) err <= 1'b1;
    end
  end
  always_ff @(posedge clk) begin
    pp[0] <= res_pkt;
    for (int s = 1; s < LAT; s++) pp[s] <= pp[s-1];
  end

  // ---------------------------------------------------------- output buffer
  logic ob_in_ready;
  sync_fifo #(.T(pkt_t), .DEPTH(OUT_DEPTH)) u_obuf (
    .clk, .rst_n, .in_valid(pv[LAT-1]), .in_ready(ob_in_ready), .in_data(pp[LAT-1]),
    .out_valid, .out_ready, .out_data(out_pkt), .count(ob_count));

  assign busy = ib_valid || (pv != '0) || out_valid;

  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n) pv[LAT-1] |-> ob_in_ready);

endmodule
