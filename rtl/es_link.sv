// es_link: a router-to-router link made of STAGES ElastiStore stages (es_stage).
//
// A wire that spans d router pitches is crossed in ceil(d/H) link cycles, H being the
// number of router-to-router hops a signal travels in one cycle (H = 1 for plain
// repeated wires, H = 9 with SMART repeaters at 1 GHz / 45 nm).  Each of those cycles
// is one elastic stage, so the link is a STAGES-deep pipeline that also stores up to
// two flits per stage; it therefore needs no edge buffer at the receiving router to
// run at full rate.  The parent computes STAGES from the placement of the two routers.
//
// Interface: up / up_ready at the sending router, dn / dn_ready at the receiving one.
// Latency: a flit accepted at clock edge t is presented on dn after edge t+STAGES-1
// (each stage adds one register); throughput is one flit per cycle.
module es_link
  import sn_pkg::*;
#(
  parameter int unsigned STAGES = 1,
  parameter int unsigned NVC    = NUM_VC
) (
  input  logic           clk,
  input  logic           rst_n,
  input  link_t          up,
  output logic [NVC-1:0] up_ready,
  output link_t          dn,
  input  logic [NVC-1:0] dn_ready
);
  link_t          s_flit [STAGES+1];
  logic [NVC-1:0] s_rdy  [STAGES+1];

  assign s_flit[0] = up;
  assign up_ready  = s_rdy[0];
  assign dn        = s_flit[STAGES];
  assign s_rdy[STAGES] = dn_ready;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    es_stage #(.NVC(NVC)) u_stage (
      .clk, .rst_n,
      .up(s_flit[s]), .up_ready(s_rdy[s]),
      .dn(s_flit[s+1]), .dn_ready(s_rdy[s+1])
    );
  end

  initial assert (STAGES >= 1) else $error("es_link needs at least one stage");

endmodule
