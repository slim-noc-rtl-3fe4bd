// slim_noc: a complete Slim NoC network.
//
// 2*Q*Q routers (cb_router) wired as the finite-field MMS graph of sn_pkg, P_CONC nodes
// per router, N = 2*Q*Q*P_CONC nodes in all.  The defaults are the small configuration
// SN-S: Q = 5, 50 routers, network radix 7, 4 nodes per router, 200 nodes, routers placed
// on a 5 x 10 grid with the subgroup layout, SMART-style links crossing H = 9 router
// pitches per cycle, central buffers of 20 flits and 20-flit injection and ejection
// queues.  Q = 9, P_CONC = 8 and LAYOUT_GROUP give the large configuration SN-L
// (162 routers, 1296 nodes).
//
// Every pair of adjacent routers is joined by two es_link pipelines, one per direction,
// of ceil(d / SMART_H) stages for a Manhattan distance d between the two routers in the
// chosen layout.  Router r's network port j leads to its j-th neighbour in increasing id.
// Each node has a network interface (sn_ni) on local port K_NET + (n mod P_CONC) of
// router n / P_CONC.
//
// Node interface (per node n, one flit per cycle, valid/ready):
//   inj_valid[n], inj_flit[n], inj_ready[n]  - packets into the network
//   ej_valid[n],  ej_flit[n],  ej_ready[n]   - packets out of the network
// A packet is a head flit (sn_pkg::head_t in data: dst, src, len) followed by len-1 flits,
// the last with tail set (a one-flit packet has head and tail set).  The nodes themselves
// (cores, caches) are outside this design.
module slim_noc
  import sn_pkg::*;
#(
  parameter int unsigned Q        = 5,
  parameter int unsigned P_CONC   = 4,
  parameter layout_e     LAYOUT   = LAYOUT_SUBGR,
  parameter int unsigned SMART_H  = 9,
  parameter int unsigned CB_DEPTH = 20,
  parameter int unsigned NI_DEPTH = 20,
  parameter int unsigned NR       = num_routers(Q),
  parameter int unsigned N        = NR * P_CONC
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  inj_valid,
  input  flit_t         inj_flit [N],
  output logic [N-1:0]  inj_ready,
  output logic [N-1:0]  ej_valid,
  output flit_t         ej_flit  [N],
  input  logic [N-1:0]  ej_ready
);
  localparam int unsigned K_NET = net_radix(Q);
  localparam int unsigned NPORT = K_NET + P_CONC;

  link_t               rin      [NR][NPORT];
  logic [NUM_VC-1:0]   rin_rdy  [NR][NPORT];
  link_t               rout     [NR][NPORT];
  logic [NUM_VC-1:0]   rout_rdy [NR][NPORT];

  for (genvar r = 0; r < NR; r++) begin : g_r
    logic ev_bypass, ev_to_cb, ev_head_wait;

    cb_router #(.Q(Q), .P_CONC(P_CONC), .ID(r), .CB_DEPTH(CB_DEPTH), .K_NET(K_NET), .NPORT(NPORT)) u_router (
      .clk, .rst_n,
      .in(rin[r]), .in_ready(rin_rdy[r]),
      .out(rout[r]), .out_ready(rout_rdy[r]),
      .ev_bypass, .ev_to_cb, .ev_head_wait
    );

    // outgoing network links of router r
    for (genvar j = 0; j < K_NET; j++) begin : g_link
      localparam int unsigned NB     = neighbor(Q, r, j);
      localparam int unsigned NB_P   = port_of(Q, NB, r);
      localparam int unsigned STAGES = link_cycles(Q, LAYOUT, SMART_H, r, NB);
      es_link #(.STAGES(STAGES)) u_link (
        .clk, .rst_n,
        .up(rout[r][j]), .up_ready(rout_rdy[r][j]),
        .dn(rin[NB][NB_P]), .dn_ready(rin_rdy[NB][NB_P])
      );
    end

    for (genvar l = 0; l < P_CONC; l++) begin : g_node
      localparam int unsigned NODE = r * P_CONC + l;
      sn_ni #(.QDEPTH(NI_DEPTH)) u_ni (
        .clk, .rst_n,
        .inj_valid(inj_valid[NODE]), .inj_flit(inj_flit[NODE]), .inj_ready(inj_ready[NODE]),
        .ej_valid(ej_valid[NODE]), .ej_flit(ej_flit[NODE]), .ej_ready(ej_ready[NODE]),
        .to_rtr(rin[r][K_NET+l]), .to_rtr_ready(rin_rdy[r][K_NET+l]),
        .from_rtr(rout[r][K_NET+l]), .from_rtr_ready(rout_rdy[r][K_NET+l])
      );
    end
  end

endmodule
