// sn_route_compute: route computation (RC) for one Slim NoC router.
//
// Routing is static and minimal: every destination router is at most two hops away
// (the MMS graph has diameter 2).  A 1-entry-per-router table is built at elaboration
// from the finite-field connection rules in sn_pkg: the port of an adjacent router, or
// the port of the lowest-numbered common neighbour.  Ports 0..K_NET-1 are network ports
// (neighbours in increasing router id), ports K_NET..K_NET+P_CONC-1 are the local nodes.
//
// Deadlock freedom follows the two-VC scheme for diameter-2 paths: a packet entering
// from a local node leaves on VC0, a packet arriving from another router leaves on VC1
// (its second and last network hop).  Packets are ejected on VC0, so that a node
// receives the flits of one packet back to back.
//
// Purely combinational: dst_node -> out_port, out_vc.  Node n is attached to router
// n / P_CONC at local port n % P_CONC.
module sn_route_compute
  import sn_pkg::*;
#(
  parameter int unsigned Q      = 5,
  parameter int unsigned P_CONC = 4,
  parameter int unsigned ID     = 0,
  parameter int unsigned K_NET  = net_radix(Q),
  parameter int unsigned NPORT  = K_NET + P_CONC,
  parameter int unsigned PW     = $clog2(NPORT)
) (
  input  logic [NODE_W-1:0] dst_node,
  input  logic              from_node,   // packet enters from a local node port
  output logic [PW-1:0]     out_port,
  output logic [VC_W-1:0]   out_vc
);
  localparam int unsigned NR = num_routers(Q);

  logic [PW-1:0] table_q [NR];
  for (genvar d = 0; d < NR; d++) begin : g_tab
    localparam int unsigned PORT = (d == ID) ? 0 : route_port(Q, ID, d);
    assign table_q[d] = PW'(PORT);
  end

  logic [NODE_W-1:0] dst_r, dst_l;
  always_comb begin
    dst_r = dst_node / NODE_W'(P_CONC);
    dst_l = dst_node % NODE_W'(P_CONC);
    if (dst_r == NODE_W'(ID)) begin
      out_port = PW'(K_NET + dst_l);
      out_vc   = VC_W'(0);
    end else begin
      out_port = (dst_r < NODE_W'(NR)) ? table_q[dst_r[$clog2(NR)-1:0]] : '0;
      out_vc   = from_node ? VC_W'(0) : VC_W'(1);
    end
  end

  initial begin
    assert (q_supported(Q)) else $error("Q must be a prime power q = 4w+1 that sn_pkg supports");
    assert (ID < NR) else $error("router id out of range");
  end

endmodule
