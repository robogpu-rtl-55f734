// robocore_tb_pkg: testbench helpers for RoboCore.
//
// - A random octree builder that fills node_mem[] with node words in the
//   layout the node decoder expects (occupancy mask, leaf mask, child base)
//   and records the cube of every leaf for the reference model.
// - A random OBB generator whose numbers sit on coarse binary grids (centres
//   on 1/64, half extents on 1/16, axis components on 1/64) so that every
//   product the hardware forms is exact in Q16.16; the reference model can then
//   use `real` arithmetic and must agree bit for bit.
// - sat_overlap(): the separating axis test written directly from its
//   definition (15 axes, projections computed in real arithmetic).
// - make_collision_program(): the configuration writes of the collision
//   intersection program (SUB, 6 Box-Normal and 9 Edge x Edge axis tests, each
//   followed by a CMP with a conditional return).
package robocore_tb_pkg;
  import robocore_pkg::*;

  localparam int MAXN  = 1 << 16;
  localparam int MAXLF = 1 << 16;

  // program counters of the collision program
  localparam int PC_RET_MISS = 40;
  localparam int PC_RET_HIT  = 41;
  localparam int PC_PUSH     = 42;

  logic [63:0] node_mem [MAXN];
  int          n_nodes;
  real         lf_cx [MAXLF], lf_cy [MAXLF], lf_cz [MAXLF], lf_h [MAXLF];
  int          n_leaves;

  function automatic word_t fx(real r);
    return word_t'($rtoi(r * 65536.0));
  endfunction
  function automatic real rl(word_t w);
    return $itor(w) / 65536.0;
  endfunction
  function automatic real rabs(real r);
    return (r < 0.0) ? -r : r;
  endfunction
  function automatic real urand01();
    return $itor($urandom_range(0, 1 << 20)) / $itor(1 << 20);
  endfunction
  function automatic real quant(real r, int frac_bits);
    real s;
    s = $itor(1 << frac_bits);
    return $itor($rtoi(r * s)) / s;
  endfunction

  // Builds an octree breadth first. Root (address 0) covers the cube of
  // half size root_half centred at the origin. Each child octant is occupied
  // with probability p_occ (at least one per node); an occupied child is a
  // leaf with probability p_leaf, and always at depth max_depth.
  function automatic void build_octree(real root_half, int max_depth, real p_occ, real p_leaf);
    int  qa [$];
    int  ql [$];
    real qx [$], qy [$], qz [$], qh [$];
    n_nodes  = 1;
    n_leaves = 0;
    qa.push_back(0); ql.push_back(0);
    qx.push_back(0.0); qy.push_back(0.0); qz.push_back(0.0); qh.push_back(root_half);
    while (qa.size() > 0) begin
      int a, lv, base, rank;
      real x, y, z, h, ch;
      logic [7:0] occ, lfm;
      a = qa.pop_front(); lv = ql.pop_front();
      x = qx.pop_front(); y = qy.pop_front(); z = qz.pop_front(); h = qh.pop_front();
      occ = '0; lfm = '0;
      for (int k = 0; k < 8; k++) occ[k] = (urand01() < p_occ);
      if (occ == '0) occ[$urandom_range(0, 7)] = 1'b1;
      if (n_nodes + 8 >= MAXN || n_leaves + 8 >= MAXLF) occ = 8'h01;
      base = n_nodes;
      rank = 0;
      ch = h / 2.0;
      for (int k = 0; k < 8; k++) if (occ[k]) begin
        real cx, cy, cz;
        cx = x + (k[0] ? ch : -ch);
        cy = y + (k[1] ? ch : -ch);
        cz = z + (k[2] ? ch : -ch);
        if (lv + 1 >= max_depth || urand01() < p_leaf || n_nodes + 16 >= MAXN) begin
          lfm[k] = 1'b1;
          lf_cx[n_leaves] = cx; lf_cy[n_leaves] = cy; lf_cz[n_leaves] = cz; lf_h[n_leaves] = ch;
          n_leaves++;
          node_mem[base + rank] = '0;
        end else begin
          qa.push_back(base + rank); ql.push_back(lv + 1);
          qx.push_back(cx); qy.push_back(cy); qz.push_back(cz); qh.push_back(ch);
        end
        rank++;
      end
      n_nodes += rank;
      node_mem[a] = {32'(base), 16'h0, lfm, occ};
    end
  endfunction

  // Random OBB: centre inside +/-span, half extents in [emin, emax],
  // rotation from three random angles, all quantised to exact binary grids.
  function automatic obb_t rand_obb(real span, real emin, real emax);
    obb_t o;
    real ax, ay, az, r [3][3];
    real cxa, sxa, cya, sya, cza, sza;
    ax = urand01() * 6.283; ay = urand01() * 6.283; az = urand01() * 6.283;
    cxa = $cos(ax); sxa = $sin(ax); cya = $cos(ay); sya = $sin(ay); cza = $cos(az); sza = $sin(az);
    // R = Rz * Ry * Rx, columns are the box axes
    r[0][0] = cza*cya; r[0][1] = cza*sya*sxa - sza*cxa; r[0][2] = cza*sya*cxa + sza*sxa;
    r[1][0] = sza*cya; r[1][1] = sza*sya*sxa + cza*cxa; r[1][2] = sza*sya*cxa - cza*sxa;
    r[2][0] = -sya;    r[2][1] = cya*sxa;               r[2][2] = cya*cxa;
    for (int k = 0; k < 3; k++) begin
      o.c[k]  = fx(quant((urand01() * 2.0 - 1.0) * span, 6));
      o.e[k]  = fx(quant(emin + urand01() * (emax - emin), 4));
      o.u0[k] = fx(quant(r[k][0], 6));
      o.u1[k] = fx(quant(r[k][1], 6));
      o.u2[k] = fx(quant(r[k][2], 6));
    end
    return o;
  endfunction

  // Separating axis test from its definition: project both boxes on each of
  // the 15 candidate axes; separated if any projection pair is disjoint.
  function automatic bit sat_overlap(obb_t o, real bx, real by, real bz, real bh);
    real t [3], u [3][3], e [3], l [3], d, ra, rb;
    real bc [3];
    bc[0] = bx; bc[1] = by; bc[2] = bz;
    for (int k = 0; k < 3; k++) begin
      t[k] = rl(o.c[k]) - bc[k];
      e[k] = rl(o.e[k]);
      u[0][k] = rl(o.u0[k]); u[1][k] = rl(o.u1[k]); u[2][k] = rl(o.u2[k]);
    end
    for (int ax = 0; ax < 15; ax++) begin
      if (ax < 3) begin
        for (int k = 0; k < 3; k++) l[k] = (k == ax) ? 1.0 : 0.0;
      end else if (ax < 6) begin
        for (int k = 0; k < 3; k++) l[k] = u[ax-3][k];
      end else begin
        int i, j;
        real a [3];
        i = (ax - 6) / 3; j = (ax - 6) % 3;
        for (int k = 0; k < 3; k++) a[k] = (k == i) ? 1.0 : 0.0;
        l[0] = a[1]*u[j][2] - a[2]*u[j][1];
        l[1] = a[2]*u[j][0] - a[0]*u[j][2];
        l[2] = a[0]*u[j][1] - a[1]*u[j][0];
      end
      d  = rabs(t[0]*l[0] + t[1]*l[1] + t[2]*l[2]);
      ra = bh * (rabs(l[0]) + rabs(l[1]) + rabs(l[2]));
      rb = 0.0;
      for (int n = 0; n < 3; n++) rb += e[n] * rabs(u[n][0]*l[0] + u[n][1]*l[1] + u[n][2]*l[2]);
      // on its own axis the OBB's radius is its half-extent (the axes are
      // taken as orthonormal, as in the standard test; after quantisation
      // they are only nearly so)
      if (ax >= 3 && ax < 6) rb = e[ax-3];
      if (d > ra + rb) return 1'b0;
    end
    return 1'b1;
  endfunction

  // Reference answer of one query: does the OBB overlap any leaf cube?
  function automatic bit ref_query(obb_t o);
    for (int i = 0; i < n_leaves; i++)
      if (sat_overlap(o, lf_cx[i], lf_cy[i], lf_cz[i], lf_h[i])) return 1'b1;
    return 1'b0;
  endfunction

  function automatic cfg_t cw_ucfg(port_e unit, int pc, int sub, int a, int b, int dst, int axis);
    cfg_t c;
    ucfg_t u;
    u = '{sub: 3'(sub), src_a: 5'(a), src_b: 5'(b), dst: 5'(dst), axis: 4'(axis)};
    c = '{valid: 1'b1, unit: unit, tbl: CT_UCFG, idx: 8'(pc), data: 22'(u)};
    return c;
  endfunction
  function automatic cfg_t cw_dest(port_e unit, bit leaf, int pc, bit cmp, int npc, port_e dst);
    cfg_t c;
    dest_ent_t d;
    d = '{valid: 1'b1, next_pc: 6'(npc), dest: dst};
    c = '{valid: 1'b1, unit: unit, tbl: CT_DEST, idx: 8'({leaf, 6'(pc), cmp}), data: 22'(d)};
    return c;
  endfunction

  // The collision intersection program.
  //   pc 0        ADDSUB  T = OBB centre - AABB centre
  //   pc 1+2k     BOXN    axis k (k = 0..5)  -> {dist, rad} in scratch
  //   pc 2+2k     CMP     dist > rad ? RETURN miss : next axis
  //   pc 13+2m    EDGE    axis m (m = 0..8)
  //   pc 14+2m    CMP     dist > rad ? RETURN miss : next axis; after the last
  //                       axis: leaf -> RETURN hit, internal -> PUSH
  function automatic void make_collision_program(ref cfg_t q [$]);
    cfg_t c;
    q.push_back(cw_ucfg(P_ADDSUB, 0, 1, W_OC, W_AC, W_T, 0));
    for (int lf = 0; lf < 2; lf++) q.push_back(cw_dest(P_ADDSUB, lf[0], 0, 1'b0, 1, P_BOXN));
    for (int ax = 0; ax < 15; ax++) begin
      int pu, pc_cmp;
      port_e unit;
      unit   = (ax < 6) ? P_BOXN : P_EDGE;
      pu     = 1 + 2 * ax;
      pc_cmp = pu + 1;
      q.push_back(cw_ucfg(unit, pu, 0, 0, 0, W_S, (ax < 6) ? ax : ax - 6));
      q.push_back(cw_ucfg(P_CMP, pc_cmp, 0, W_S, W_S + 1, 0, 0));
      for (int lf = 0; lf < 2; lf++) begin
        q.push_back(cw_dest(unit, lf[0], pu, 1'b0, pc_cmp, P_CMP));
        q.push_back(cw_dest(P_CMP, lf[0], pc_cmp, 1'b1, PC_RET_MISS, P_RETURN));
        if (ax < 14)
          q.push_back(cw_dest(P_CMP, lf[0], pc_cmp, 1'b0, pc_cmp + 1, (ax + 1 < 6) ? P_BOXN : P_EDGE));
        else if (lf == 1)
          q.push_back(cw_dest(P_CMP, 1'b1, pc_cmp, 1'b0, PC_RET_HIT, P_RETURN));
        else
          q.push_back(cw_dest(P_CMP, 1'b0, pc_cmp, 1'b0, PC_PUSH, P_PUSH));
      end
    end
    q.push_back(cw_ucfg(P_RETURN, PC_RET_MISS, 0, 0, 0, 0, 0));
    q.push_back(cw_ucfg(P_RETURN, PC_RET_HIT, 1, 0, 0, 0, 0));
    c = '{valid: 1'b1, unit: P_ADDSUB, tbl: CT_START, idx: 8'd0, data: 22'({6'd0, P_ADDSUB})};
    q.push_back(c);
  endfunction

endpackage
