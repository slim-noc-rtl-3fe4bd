// cbr_output_unit: output side of one central-buffer router port.
//
// Each VC has a single-flit output buffer.  A flit reaches it either from the crossbar
// (bypass path) or from the central buffer's output register; a 2:1 multiplexer in front
// of the per-VC buffers takes at most one of the two per cycle (the allocator never
// asserts both).  Behind the buffers a round-robin VC multiplexer sends one flit per
// cycle on the outgoing link, picking among the VCs whose buffer is full and whose
// per-VC ready from the link (or the ejection queue) is set.
//
// obuf_free[v] tells the allocator and the central buffer that VC v can take a flit
// this cycle: its buffer is empty or its flit is being sent now.
// Timing: a flit written at edge t is on the link during the following cycle and is taken
// by the link's first stage at edge t+1.
module cbr_output_unit
  import sn_pkg::*;
#(
  parameter int unsigned NVC = NUM_VC
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            xb_we,
  input  logic [VC_W-1:0] xb_vc,
  input  flit_t           xb_flit,
  input  logic            cb_we,
  input  logic [VC_W-1:0] cb_vc,
  input  flit_t           cb_flit,
  output logic [NVC-1:0]  obuf_free,
  output link_t           out,
  input  logic [NVC-1:0]  out_ready
);
  localparam int unsigned VW = (NVC > 1) ? $clog2(NVC) : 1;

  logic [NVC-1:0] ob_v;
  flit_t          ob_f [NVC];
  logic [VW-1:0]  rr;
  logic [NVC-1:0] send;

  logic            we;
  logic [VC_W-1:0] wvc;
  flit_t           wflit;
  assign we    = xb_we || cb_we;
  assign wvc   = cb_we ? cb_vc : xb_vc;
  assign wflit = cb_we ? cb_flit : xb_flit;

  always_comb begin
    send = '0;
    for (int k = 0; k < NVC; k++) begin
      int v;
      v = (int'(rr) + k) % NVC;
      if (send == '0 && ob_v[v] && out_ready[v]) send[v] = 1'b1;
    end
    out = '0;
    for (int v = 0; v < NVC; v++)
      if (send[v]) begin
        out.valid = 1'b1;
        out.vc    = VC_W'(v);
        out.flit  = ob_f[v];
      end
  end

  for (genvar v = 0; v < NVC; v++) begin : g_free
    assign obuf_free[v] = !ob_v[v] || send[v];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_v <= '0;
      rr   <= '0;
      for (int v = 0; v < NVC; v++) ob_f[v] <= '0;
    end else begin
      for (int v = 0; v < NVC; v++) if (send[v]) ob_v[v] <= 1'b0;
      if (we) begin
        ob_v[wvc] <= 1'b1;
        ob_f[wvc] <= wflit;
      end
      if (send != '0) rr <= VW'((int'(rr) + 1) % NVC);
    end
  end

  a_one_source: assert property (@(posedge clk) disable iff (!rst_n) !(xb_we && cb_we));
  a_room:       assert property (@(posedge clk) disable iff (!rst_n) we |-> obuf_free[wvc]);

endmodule
