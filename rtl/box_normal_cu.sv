// box_normal_cu: compute core of the Box-Normal collision OP unit.
//
// The separating axis test between an OBB (centre c, half extents e, unit axes
// u0..u2) and an AABB (centre a, half extents h) projects both boxes on 15
// candidate axes. The six "box-normal" axes are the three coordinate axes of
// the AABB and the three axes of the OBB. For axis L this unit returns
//   pdist = |T . L|             with T = c - a (precomputed in the packet), and
//   rad  = sum_i h_i |x_i . L| + sum_j e_j |u_j . L|,
// so that the boxes are separated on L exactly when pdist > rad; that compare
// is left to the CMP OP unit, which also decides where the program goes next.
// axis 0..2 selects AABB axis x/y/z (pdist = |T_k|, rad = h_k + sum_j e_j|u_j[k]|),
// axis 3..5 selects OBB axis u_(axis-3) (pdist = |T.u|, rad = e + sum_i h_i|u[i]|).
// The formula is the standard OBB-tree separating-axis test; the fixed-point
// format (Q16.16, products truncated towards minus infinity) is this design's.
//
// Purely combinational; the enclosing op_unit adds the pipeline latency.
module box_normal_cu
  import robocore_pkg::*;
(
  input  pdata_t     d,      // packet data (OBB, AABB, T)
  input  logic [2:0] axis,
  output word_t      pdist,
  output word_t      rad
);
  vec3_t t, e, h, u [3];
  logic [1:0] j;

  always_comb begin
    t = getv(d, WIDX_W'(W_T));
    e = getv(d, WIDX_W'(W_OE));
    h = getv(d, WIDX_W'(W_AH));
    u[0] = getv(d, WIDX_W'(W_OU0));
    u[1] = getv(d, WIDX_W'(W_OU1));
    u[2] = getv(d, WIDX_W'(W_OU2));
    pdist = '0;
    rad  = '0;
    j    = '0;
    if (axis < 3) begin
      pdist = fxabs(word_t'(t[axis[1:0]]));
      rad  = word_t'(h[axis[1:0]]);
      for (int jj = 0; jj < 3; jj++)
        rad += fxmul(word_t'(e[jj]), fxabs(word_t'(u[jj][axis[1:0]])));
    end else begin
      j    = 2'(axis - 3'd3);
      pdist = fxabs(dot3(t, u[j]));
      rad  = word_t'(e[j]);
      for (int i = 0; i < 3; i++)
        rad += fxmul(word_t'(h[i]), fxabs(word_t'(u[j][i])));
    end
  end

endmodule
