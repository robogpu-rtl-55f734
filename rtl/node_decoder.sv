// node_decoder: expands a fetched octree node into its occupied children.
//
// The environment is an octree: every node splits its cube into eight
// octants, records which octants are occupied, and subdivides only the
// partly occupied ones. A node word (64 bits, layout chosen by this design) is
//   [7:0]   occupancy mask, bit k = octant k holds obstacles
//   [15:8]  leaf mask, bit k = octant k is fully occupied (no children)
//   [63:32] address of the first child; the occupied children are stored
//           consecutively in octant order (child address = base + rank)
// Octant k has bit 0/1/2 of k selecting the upper half in x/y/z. A child of a
// node with centre c and half size s has half size s/2 and centre
// c +/- s/2 per axis.
//
// On accepting a node the decoder reports to the warp buffer how many child
// tests the thread will run (dec_count = number of occupied octants), then
// emits one child record per cycle (valid/ready), lowest octant first. A node
// is accepted only when the previous one has been fully emitted.
module node_decoder
  import robocore_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [WARP_W-1:0] in_warp,
  input  logic [LANE_W-1:0] in_lane,
  input  logic [NODE_W-1:0] in_node,
  input  stk_t              in_box,
  output logic              dec_valid,
  output logic [WARP_W-1:0] dec_warp,
  output logic [LANE_W-1:0] dec_lane,
  output logic [3:0]        dec_count,
  output logic              ch_valid,
  input  logic              ch_ready,
  output child_t            ch
);
  logic [7:0]        rem, leafm;
  logic [ADDR_W-1:0] base;
  logic [2:0]        rank;
  stk_t              box;
  logic [WARP_W-1:0] warp;
  logic [LANE_W-1:0] lane;
  logic [2:0]        oct;
  word_t             q;

  assign in_ready  = (rem == '0);
  assign ch_valid  = (rem != '0);
  assign dec_valid = in_valid && in_ready;
  assign dec_warp  = in_warp;
  assign dec_lane  = in_lane;
  always_comb begin
    dec_count = '0;
    for (int k = 0; k < 8; k++) dec_count += 4'(in_node[k]);
  end

  always_comb begin
    oct = '0;
    for (int k = 7; k >= 0; k--) if (rem[k]) oct = 3'(k);
    q = word_t'(box.half) >>> 1;
    ch.warp      = warp;
    ch.lane      = lane;
    ch.leaf      = leafm[oct];
    ch.node.addr = base + ADDR_W'(rank);
    ch.node.half = q;
    for (int a = 0; a < 3; a++)
      ch.node.center[a] = oct[a] ? word_t'(box.center[a]) + q : word_t'(box.center[a]) - q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0;
    end else if (in_valid && in_ready) begin
      rem <= in_node[7:0];
    end else if (ch_valid && ch_ready) begin
      rem[oct] <= 1'b0;
    end
  end
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      leafm <= in_node[15:8];
      base  <= in_node[63:32];
      rank  <= '0;
      box   <= in_box;
      warp  <= in_warp;
      lane  <= in_lane;
    end else if (ch_valid && ch_ready) begin
      rank <= rank + 1'b1;
    end
  end

endmodule
