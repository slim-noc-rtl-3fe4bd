// es_stage: one pipeline stage of an ElastiStore link.
//
// The stage holds at most one flit per VC in a per-VC slave latch (slv) plus one extra
// flit of any VC in a master latch (mst) shared by all VCs.  A VC's oldest flit is
// always in its slave latch; the master only holds a second, younger flit of some VC.
// When that VC's slave latch drains, the master flit moves into it.
//
// Upstream handshake: up_ready[v] is high when VC v can take a flit this cycle, which is
// when its slave latch is empty or the master is free.  It depends only on the stage's
// registers, so the ready wires do not form combinational paths along the link.  One
// flit moves into the stage per cycle (the link carries one flit).
// Downstream: the stage presents one flit per cycle, chosen round-robin among the VCs
// whose slave latch is full and whose dn_ready bit is set; it leaves in that same cycle.
//
// With one active VC the stage passes one flit per cycle (two flits of storage cover the
// one-cycle ready loop).  A VC whose neighbour holds the master runs at half rate: the
// shared master is what keeps the area below one two-flit buffer per VC.
// Following the link description: per-VC slave latches, one shared master latch and a
// per-VC ready/valid pair.  The latch-level timing (master/slave phases) is modelled
// with edge-triggered registers, one stage = one clock cycle.
module es_stage
  import sn_pkg::*;
#(
  parameter int unsigned NVC = NUM_VC
) (
  input  logic            clk,
  input  logic            rst_n,
  input  link_t           up,        // flit from upstream
  output logic [NVC-1:0]  up_ready,
  output link_t           dn,        // flit to downstream
  input  logic [NVC-1:0]  dn_ready
);
  localparam int unsigned VW = (NVC > 1) ? $clog2(NVC) : 1;

  logic [NVC-1:0] slv_v;
  flit_t          slv_f [NVC];
  logic           mst_v;
  logic [VC_W-1:0] mst_vc;
  flit_t          mst_f;
  logic [VW-1:0]  rr;

  logic [NVC-1:0] drain;     // one-hot: VC leaving this cycle
  always_comb begin
    drain = '0;
    for (int k = 0; k < NVC; k++) begin
      int v;
      v = (int'(rr) + k) % NVC;
      if (drain == '0 && slv_v[v] && dn_ready[v]) drain[v] = 1'b1;
    end
  end

  always_comb begin
    dn = '0;
    for (int v = 0; v < NVC; v++)
      if (drain[v]) begin
        dn.valid = 1'b1;
        dn.vc    = VC_W'(v);
        dn.flit  = slv_f[v];
      end
  end

  for (genvar v = 0; v < NVC; v++) begin : g_rdy
    assign up_ready[v] = !slv_v[v] || !mst_v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slv_v  <= '0;
      mst_v  <= 1'b0;
      mst_vc <= '0;
      mst_f  <= '0;
      rr     <= '0;
      for (int v = 0; v < NVC; v++) slv_f[v] <= '0;
    end else begin
      logic mst_free;
      mst_free = !mst_v;
      for (int v = 0; v < NVC; v++) begin
        if (drain[v]) begin
          if (mst_v && int'(mst_vc) == v) begin
            slv_f[v] <= mst_f;        // younger flit of this VC moves up
            mst_free = 1'b1;
          end else begin
            slv_v[v] <= 1'b0;
          end
        end
      end
      if (mst_free) mst_v <= 1'b0;
      if (up.valid) begin
        // slot for the new flit: the slave latch if it is (or becomes) free, else the master
        if (!slv_v[up.vc] || (drain[up.vc] && !(mst_v && mst_vc == up.vc))) begin
          slv_v[up.vc] <= 1'b1;
          slv_f[up.vc] <= up.flit;
        end else begin
          mst_v  <= 1'b1;
          mst_vc <= up.vc;
          mst_f  <= up.flit;
        end
      end
      if (drain != '0) rr <= VW'((int'(rr) + 1) % NVC);
    end
  end

  // the upstream side must respect the per-VC ready
  a_up_ready: assert property (@(posedge clk) disable iff (!rst_n) up.valid |-> up_ready[up.vc]);

endmodule
