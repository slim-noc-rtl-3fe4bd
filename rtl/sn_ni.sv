// sn_ni: network interface between one node and its router port.
//
// Two queues of QDEPTH flits (20 in the evaluated configuration): the injection queue
// takes flits from the node (inj_valid/inj_ready, a plain valid-ready handshake) and
// feeds the router's local input port on VC0; the ejection queue takes flits arriving
// on the router's local output port (any VC; the router ejects on VC0) and hands them to
// the node (ej_valid/ej_ready).  The node must present whole packets: a head flit with
// the destination node, source node and length, then body flits, the last one marked
// tail.
// Timing: a flit written into an empty queue is offered on the next cycle.
// to_rtr.vc is always 0: every packet starts its trip on VC0, so that output bit is
// constant by design.  The queue depth follows the evaluated configuration; the queue
// structure (a plain FIFO) and the VC rule are this design's choices.
module sn_ni
  import sn_pkg::*;
#(
  parameter int unsigned QDEPTH = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  // node side
  input  logic              inj_valid,
  input  flit_t             inj_flit,
  output logic              inj_ready,
  output logic              ej_valid,
  output flit_t             ej_flit,
  input  logic              ej_ready,
  // router side
  output link_t             to_rtr,
  input  logic [NUM_VC-1:0] to_rtr_ready,
  input  link_t             from_rtr,
  output logic [NUM_VC-1:0] from_rtr_ready
);
  localparam int unsigned CW = $clog2(QDEPTH + 1);

  logic  iq_full, iq_empty, eq_full, eq_empty;
  flit_t iq_head;
  logic [CW-1:0] iq_cnt, eq_cnt;

  sync_fifo #(.T(flit_t), .DEPTH(QDEPTH)) u_injq (
    .clk, .rst_n,
    .wr(inj_valid), .wdata(inj_flit), .full(iq_full),
    .rd(!iq_empty && to_rtr_ready[0]), .rdata(iq_head), .empty(iq_empty), .count(iq_cnt)
  );
  assign inj_ready = !iq_full;

  always_comb begin
    to_rtr       = '0;
    to_rtr.valid = !iq_empty && to_rtr_ready[0];
    to_rtr.vc    = '0;
    to_rtr.flit  = iq_head;
  end

  sync_fifo #(.T(flit_t), .DEPTH(QDEPTH)) u_ejq (
    .clk, .rst_n,
    .wr(from_rtr.valid), .wdata(from_rtr.flit), .full(eq_full),
    .rd(ej_ready && !eq_empty), .rdata(ej_flit), .empty(eq_empty), .count(eq_cnt)
  );
  assign ej_valid       = !eq_empty;
  assign from_rtr_ready = {NUM_VC{!eq_full}};

endmodule
