// robocore_pkg: types and constants shared by every RoboCore module.
//
// A RoboCore intersection program is a chain of micro-ops (uops). Each uop is
// executed by one OP unit, which works on a packet that travels between OP
// units over the interconnect. The packet carries the query (an oriented
// bounding box, OBB), the tree node under test (an axis-aligned box, AABB),
// and room for intermediate results, all as 32 words of Q16.16 fixed point.
// The number format, the packet word layout, the port numbering and the
// configuration encodings below are this design's own choices; the structure
// (packet holding query, node and intermediates; per-unit configuration
// registers and operation destination tables keyed by node type, uop PC and
// compare result) follows the RoboCore/TTA+ description.
package robocore_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int WORD_W  = 32;
  localparam int FRAC    = 16;          // Q16.16
  localparam int NW      = 32;          // words of data in a packet
  localparam int WIDX_W  = 5;           // index of a packet word
  localparam int PC_W    = 6;           // uop program counter
  localparam int PORT_W  = 4;           // interconnect port (up to 16)
  localparam int ADDR_W  = 32;          // node address
  localparam int WARP_W  = 2;           // up to 4 warps in the warp buffer
  localparam int LANE_W  = 5;           // 32 threads per warp
  localparam int NWARPS  = 4;
  localparam int NLANES  = 32;
  localparam int NODE_W  = 64;          // octree node word fetched from memory

  typedef logic signed [WORD_W-1:0] word_t;
  typedef logic [2:0][WORD_W-1:0]   vec3_t;   // [0]=x [1]=y [2]=z
  typedef logic [NW-1:0][WORD_W-1:0] pdata_t;

  // Packet word layout
  localparam int W_OC  = 0;   // OBB centre          (3 words)
  localparam int W_OE  = 3;   // OBB half extents    (3 words)
  localparam int W_OU0 = 6;   // OBB axis 0 (unit)   (3 words)
  localparam int W_OU1 = 9;   // OBB axis 1
  localparam int W_OU2 = 12;  // OBB axis 2
  localparam int W_AC  = 15;  // AABB centre         (3 words)
  localparam int W_AH  = 18;  // AABB half extents   (3 words)
  localparam int W_T   = 21;  // scratch: T = OBB centre - AABB centre
  localparam int W_S   = 24;  // scratch: 8 words

  // ---------------------------------------------------------------- ports
  typedef enum logic [PORT_W-1:0] {
    P_ADDSUB = 4'd0, P_CROSS = 4'd1, P_MINMAX = 4'd2, P_DOT = 4'd3,
    P_MUL    = 4'd4, P_CMP   = 4'd5, P_PUSH   = 4'd6, P_RETURN = 4'd7,
    P_BOXN   = 4'd8, P_EDGE  = 4'd9
  } port_e;
  localparam int NDST = 10;   // destinations on the interconnect
  localparam int NFWD = 8;    // OP units that forward packets
  localparam int NSRC = NFWD + 1;  // + entry port (ray collector)

  typedef enum logic [2:0] {
    OPK_ADDSUB, OPK_CROSS, OPK_MINMAX, OPK_DOT, OPK_MUL, OPK_CMP, OPK_BOXN, OPK_EDGE
  } opkind_e;

  // ---------------------------------------------------------------- packet
  typedef struct packed {
    logic [WARP_W-1:0] warp;
    logic [LANE_W-1:0] lane;
    logic              leaf;      // node type: 1 = leaf, 0 = internal
    logic [ADDR_W-1:0] node_addr; // address of the node under test
    logic [PC_W-1:0]   pc;        // uop to execute at the destination
    logic [PORT_W-1:0] dest;      // destination port on the interconnect
    pdata_t            d;
  } pkt_t;

  // ---------------------------------------------------------------- config
  // Per-PC configuration register of an OP unit (the input decoder's table).
  //   ADDSUB : sub 0 = A+B, 1 = A-B            (vec3)
  //   MINMAX : sub 0 = min, 1 = max, 2 = |A|   (vec3)
  //   CROSS  : A x B (vec3)      DOT : A.B (scalar)     MUL : A*B (scalar)
  //   CMP    : sub 0 = A>B (scalar), 1 = any(A[k]>B[k]) (vec3)
  //   BOXN/EDGE : axis selects the separating axis, dst gets {dist, rad}
  //   RETURN : sub[0] = 1 marks a collision-confirmed return
  typedef struct packed {
    logic [2:0]        sub;
    logic [WIDX_W-1:0] src_a;
    logic [WIDX_W-1:0] src_b;
    logic [WIDX_W-1:0] dst;
    logic [3:0]        axis;
  } ucfg_t;

  // Operation destination table entry (11 bits)
  typedef struct packed {
    logic              valid;
    logic [PC_W-1:0]   next_pc;
    logic [PORT_W-1:0] dest;
  } dest_ent_t;
  localparam int DT_IDX_W = 1 + PC_W + 1;   // {leaf, pc, cmp}

  typedef enum logic [1:0] { CT_UCFG = 2'd0, CT_DEST = 2'd1, CT_START = 2'd2 } cfg_tbl_e;

  // Configuration write, broadcast to all units before a kernel launch.
  //   CT_UCFG : idx[PC_W-1:0] = pc, data = ucfg_t
  //   CT_DEST : idx = {leaf, pc, cmp}, data = dest_ent_t
  //   CT_START: data = {start_pc, start_port} (unit field ignored)
  typedef struct packed {
    logic              valid;
    logic [PORT_W-1:0] unit;
    cfg_tbl_e          tbl;
    logic [7:0]        idx;
    logic [21:0]       data;
  } cfg_t;

  // ---------------------------------------------------------------- traversal
  // Traversal stack entry: a node and the box it covers (octree cube).
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    vec3_t             center;
    word_t             half;
  } stk_t;

  typedef struct packed {
    vec3_t c, e, u0, u1, u2;
  } obb_t;

  // Child record produced by the node decoder
  typedef struct packed {
    logic [WARP_W-1:0] warp;
    logic [LANE_W-1:0] lane;
    logic              leaf;
    stk_t              node;
  } child_t;

  // ---------------------------------------------------------------- math
  function automatic word_t fxmul(word_t a, word_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return word_t'(p >>> FRAC);
  endfunction

  function automatic word_t fxabs(word_t a);
    return (a < 0) ? -a : a;
  endfunction

  function automatic word_t dot3(vec3_t a, vec3_t b);
    return fxmul(word_t'(a[0]), word_t'(b[0])) + fxmul(word_t'(a[1]), word_t'(b[1]))
         + fxmul(word_t'(a[2]), word_t'(b[2]));
  endfunction

  function automatic vec3_t cross3(vec3_t a, vec3_t b);
    vec3_t r;
    r[0] = fxmul(word_t'(a[1]), word_t'(b[2])) - fxmul(word_t'(a[2]), word_t'(b[1]));
    r[1] = fxmul(word_t'(a[2]), word_t'(b[0])) - fxmul(word_t'(a[0]), word_t'(b[2]));
    r[2] = fxmul(word_t'(a[0]), word_t'(b[1])) - fxmul(word_t'(a[1]), word_t'(b[0]));
    return r;
  endfunction

  function automatic vec3_t getv(pdata_t d, logic [WIDX_W-1:0] i);
    vec3_t r;
    for (int k = 0; k < 3; k++) r[k] = d[WIDX_W'(i + WIDX_W'(k))];
    return r;
  endfunction

  function automatic pdata_t putv(pdata_t d, logic [WIDX_W-1:0] i, vec3_t v);
    pdata_t r;
    r = d;
    for (int k = 0; k < 3; k++) r[WIDX_W'(i + WIDX_W'(k))] = v[k];
    return r;
  endfunction

endpackage
