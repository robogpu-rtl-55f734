// edge_edge_cu: compute core of the Edge x Edge collision OP unit.
//
// The nine remaining separating axes of the OBB/AABB test are the cross
// products L = x_i x u_j of an AABB axis x_i (a coordinate axis) and an OBB
// axis u_j, selected by axis = 3*i + j. Because x_i is a unit coordinate
// vector the cross product is a permutation with one sign change and needs no
// multiplier. The unit returns
//   pdist = |T . L|   and   rad = sum_m h_m |L_m| + sum_n e_n |u_n . L|,
// and the boxes are separated on L when pdist > rad (compared by the CMP OP
// unit). A degenerate axis (u_j parallel to x_i) gives L = 0, pdist = rad = 0,
// which never reports a separation, so the test stays conservative.
// The axis formula is the standard separating-axis test; the Q16.16 format
// is this design's choice.
//
// Purely combinational; the enclosing op_unit adds the pipeline latency.
module edge_edge_cu
  import robocore_pkg::*;
(
  input  pdata_t     d,
  input  logic [3:0] axis,    // 3*i + j, 0..8
  output word_t      pdist,
  output word_t      rad
);
  vec3_t t, e, h, u [3], uj, l;
  logic [1:0] i, j;

  always_comb begin
    t = getv(d, WIDX_W'(W_T));
    e = getv(d, WIDX_W'(W_OE));
    h = getv(d, WIDX_W'(W_AH));
    u[0] = getv(d, WIDX_W'(W_OU0));
    u[1] = getv(d, WIDX_W'(W_OU1));
    u[2] = getv(d, WIDX_W'(W_OU2));
    i = (axis >= 4'd6) ? 2'd2 : (axis >= 4'd3) ? 2'd1 : 2'd0;
    j = 2'(axis - 4'(i) * 4'd3);
    uj = u[j];
    // L = x_i x u_j (index 0 = x)
    case (i)
      2'd0: begin l[0] = '0;            l[1] = -word_t'(uj[2]); l[2] = uj[1];          end
      2'd1: begin l[0] = uj[2];         l[1] = '0;              l[2] = -word_t'(uj[0]); end
      default: begin l[0] = -word_t'(uj[1]); l[1] = uj[0];      l[2] = '0;             end
    endcase
    pdist = fxabs(dot3(t, l));
    rad  = '0;
    for (int m = 0; m < 3; m++) rad += fxmul(word_t'(h[m]), fxabs(word_t'(l[m])));
    for (int n = 0; n < 3; n++) rad += fxmul(word_t'(e[n]), fxabs(dot3(u[n], l)));
  end

endmodule
