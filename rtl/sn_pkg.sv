// sn_pkg: types, constants and elaboration-time functions shared by the Slim NoC RTL.
//
// The network graph is the MMS (McKay-Miller-Siran) diameter-2 graph built over a
// finite field F_q.  Routers are labelled [G|a,b] (G = subgroup type 0/1, a = subgroup,
// b = position); with 0-based field indices a,b the router id is r = G*q*q + a*q + b,
// which is the 1-based index i = G q^2 + (a-1) q + b minus one.  Two routers are linked
// when
//     [0|a,b] - [0|a,b']  iff  b - b' is in X
//     [1|m,c] - [1|m,c']  iff  c - c' is in X'
//     [0|a,b] - [1|m,c]   iff  b = m*a + c
// with X = {1, xi^2, ..., xi^(q-3)}, X' = {xi, xi^3, ..., xi^(q-2)} and xi a primitive
// element found by exhaustive search (the first in element order).  X is the set of
// non-zero squares and X' the set of non-squares, which is how they are tested here.
// This construction is given for q = 4w+1; other q are rejected at elaboration.
//
// Prime q uses integers mod q.  q = 9 uses the hand-built field {0,1,2,u,v,w,x,y,z}
// (element indices 0..8) whose addition and product tables are copied below.  The
// additive inverse is derived from the addition table: the printed inverse table lists
// -2 = 0, which contradicts 2 + 1 = 0 in the addition table; the latter is followed.
//
// Every function here is meant for elaboration (parameters, localparams, generate);
// none of it becomes logic on its own.
package sn_pkg;

  // ---------------------------------------------------------------- link / flit format
  parameter int unsigned FLIT_W = 128;  // link width in bits
  parameter int unsigned NUM_VC = 2;    // VC0 for the first hop, VC1 for the second
  parameter int unsigned VC_W   = 1;
  parameter int unsigned NODE_W = 16;   // node id field in the head flit
  parameter int unsigned LEN_W  = 8;    // packet length field (flits, head included)

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // Layout of data[] in a head flit.  Body flits carry payload only.
  typedef struct packed {
    logic [FLIT_W-2*NODE_W-LEN_W-1:0] payload;
    logic [LEN_W-1:0]                 len;
    logic [NODE_W-1:0]                src;
    logic [NODE_W-1:0]                dst;
  } head_t;

  // Forward half of a link: one flit per cycle tagged with its VC.  The backward half
  // is a ready bit per VC (logic [NUM_VC-1:0]).
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
    flit_t           flit;
  } link_t;

  typedef enum logic [1:0] {
    LAYOUT_BASIC  = 2'd0,  // [G|a,b] at (b, a+Gq)
    LAYOUT_SUBGR  = 2'd1,  // [G|a,b] at (b, 2a-(1-G))
    LAYOUT_GROUP  = 2'd2   // groups of 2q routers placed as close to a square as possible
  } layout_e;

  // ---------------------------------------------------------------- field F_9 tables
  // element order: 0 1 2 u v w x y z
  localparam int F9_ADD [9][9] = '{
    '{0,1,2,3,4,5,6,7,8},
    '{1,2,0,4,5,3,7,8,6},
    '{2,0,1,5,3,4,8,6,7},
    '{3,4,5,6,7,8,0,1,2},
    '{4,5,3,7,8,6,1,2,0},
    '{5,3,4,8,6,7,2,0,1},
    '{6,7,8,0,1,2,3,4,5},
    '{7,8,6,1,2,0,4,5,3},
    '{8,6,7,2,0,1,5,3,4}};
  localparam int F9_MUL [9][9] = '{
    '{0,0,0,0,0,0,0,0,0},
    '{0,1,2,3,4,5,6,7,8},
    '{0,2,1,6,8,7,3,5,4},
    '{0,3,6,2,5,8,1,4,7},
    '{0,4,8,5,6,1,7,2,3},
    '{0,5,7,8,1,3,4,6,2},
    '{0,6,3,1,7,4,2,8,5},
    '{0,7,5,4,2,6,8,3,1},
    '{0,8,4,7,3,2,5,1,6}};

  function automatic int gf_add(int q, int a, int b);
    if (q == 9) return F9_ADD[a][b];
    return (a + b) % q;
  endfunction

  function automatic int gf_mul(int q, int a, int b);
    if (q == 9) return F9_MUL[a][b];
    return (a * b) % q;
  endfunction

  function automatic int gf_neg(int q, int a);
    for (int b = 0; b < q; b++) if (gf_add(q, a, b) == 0) return b;
    return 0;
  endfunction

  function automatic int gf_pow(int q, int a, int e);
    int r = 1;
    for (int i = 0; i < e; i++) r = gf_mul(q, r, a);
    return r;
  endfunction

  // first element (in index order) whose powers reach all q-1 non-zero elements
  function automatic int gf_primitive(int q);
    for (int c = 2; c < q; c++) begin
      int r = 1;
      bit ok = 1'b1;
      for (int e = 1; e < q - 1; e++) begin
        r = gf_mul(q, r, c);
        if (r == 1) ok = 1'b0;
      end
      if (ok) return c;
    end
    return 1;
  endfunction

  // membership in X (odd = 0) or X' (odd = 1) for q = 4w+1.  X holds the even powers
  // of a primitive element, which are exactly the non-zero squares of the field, so the
  // test is a search for a square root (cheap at elaboration); X' is the non-squares.
  function automatic bit in_gen_set(int q, int e, bit odd);
    bit sq = 1'b0;
    if (e == 0) return 1'b0;
    for (int y = 1; y < q; y++) if (gf_mul(q, y, y) == e) sq = 1'b1;
    return odd ? !sq : sq;
  endfunction

  // X listed explicitly as powers of the primitive element (used by the testbenches to
  // cross-check in_gen_set)
  function automatic bit in_gen_set_pow(int q, int e, bit odd);
    int xi = gf_primitive(q);
    for (int i = (odd ? 1 : 0); i <= q - 2; i += 2)
      if (gf_pow(q, xi, i) == e) return 1'b1;
    return 1'b0;
  endfunction

  // ---------------------------------------------------------------- MMS graph
  function automatic int num_routers(int q);
    return 2 * q * q;
  endfunction

  function automatic int net_radix(int q);  // k' = (3q - u)/2 with u = 1
    return (3 * q - 1) / 2;
  endfunction

  function automatic bit q_supported(int q);
    return (q % 4 == 1) && (q == 9 || q == 5 || q == 13 || q == 17 || q == 29);
  endfunction

  function automatic bit connected(int q, int r1, int r2);
    int g1 = r1 / (q * q), a1 = (r1 / q) % q, b1 = r1 % q;
    int g2 = r2 / (q * q), a2 = (r2 / q) % q, b2 = r2 % q;
    if (r1 == r2) return 1'b0;
    if (g1 == 0 && g2 == 0) return (a1 == a2) && in_gen_set(q, gf_add(q, b1, gf_neg(q, b2)), 1'b0);
    if (g1 == 1 && g2 == 1) return (a1 == a2) && in_gen_set(q, gf_add(q, b1, gf_neg(q, b2)), 1'b1);
    if (g1 == 0) return b1 == gf_add(q, gf_mul(q, a2, a1), b2);  // [0|a1,b1] - [1|a2,b2]
    return b2 == gf_add(q, gf_mul(q, a1, a2), b1);               // [1|a1,b1] - [0|a2,b2]
  endfunction

  // j-th neighbour of router r, neighbours sorted by router id; -1 if j is out of range
  function automatic int neighbor(int q, int r, int j);
    int n = 0;
    for (int s = 0; s < num_routers(q); s++)
      if (connected(q, r, s)) begin
        if (n == j) return s;
        n++;
      end
    return -1;
  endfunction

  // network port of router r that leads to neighbour s; -1 if not adjacent
  function automatic int port_of(int q, int r, int s);
    int n = 0;
    for (int t = 0; t < num_routers(q); t++)
      if (connected(q, r, t)) begin
        if (t == s) return n;
        n++;
      end
    return -1;
  endfunction

  // static minimal route: network port of r towards router d (d != r).  Adjacent
  // routers are reached directly; otherwise through the common neighbour with the
  // lowest id (the graph has diameter 2, so one exists).  Ports number the neighbours
  // of r in increasing router id.
  function automatic int route_port(int q, int r, int d);
    int n = 0, via = -1;
    if (connected(q, r, d)) return port_of(q, r, d);
    for (int s = 0; s < num_routers(q); s++)
      if (connected(q, r, s)) begin
        if (via < 0 && connected(q, s, d)) via = n;
        n++;
      end
    return via;
  endfunction

  // ---------------------------------------------------------------- placement model
  function automatic int isqrt_ceil(int v);
    int s = 0;
    while (s * s < v) s++;
    return s;
  endfunction

  // 1-based grid coordinates of router r; a and b are 1-based as in the label [G|a,b]
  function automatic int coord_x(int q, layout_e lay, int r);
    int g = r / (q * q), a = (r / q) % q + 1, b = r % q + 1;
    int s2 = isqrt_ceil(2 * q), s1 = isqrt_ceil(q);
    if (lay == LAYOUT_GROUP) return (((a - 1) * s2) % (s2 * s1)) + ((b + g * q) % s2);
    return b;
  endfunction

  function automatic int coord_y(int q, layout_e lay, int r);
    int g = r / (q * q), a = (r / q) % q + 1, b = r % q + 1;
    int s2 = isqrt_ceil(2 * q), s1 = isqrt_ceil(q);
    case (lay)
      LAYOUT_BASIC: return a + g * q;
      LAYOUT_SUBGR: return 2 * a - (1 - g);
      default:      return ((a - 1) / s1) * ((2 * q + s2 - 1) / s2) + ((b + g * q + s2 - 1) / s2);
    endcase
  endfunction

  function automatic int manhattan(int q, layout_e lay, int r1, int r2);
    int dx = coord_x(q, lay, r1) - coord_x(q, lay, r2);
    int dy = coord_y(q, lay, r1) - coord_y(q, lay, r2);
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy);
  endfunction

  // link cycles = ceil(distance / H), at least one
  function automatic int link_cycles(int q, layout_e lay, int h, int r1, int r2);
    int d = manhattan(q, lay, r1, r2);
    int c = (d + h - 1) / h;
    return (c < 1) ? 1 : c;
  endfunction

  function automatic int clog2_min1(int v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
