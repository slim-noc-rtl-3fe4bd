// cb_router: a Slim NoC router with central buffer (CBR) and per-VC staging buffers.
//
// NPORT = K_NET + P_CONC ports: K_NET network ports (to the router's neighbours in the
// MMS graph, in increasing router id) and P_CONC ports to local nodes.  Every port has a
// flit-wide link in each direction carrying one flit per cycle with its VC number and a
// per-VC ready bit going back; the links themselves are ElastiStore pipelines.
//
// Datapath: per-VC single-flit input staging buffers (cbr_input_unit, which also runs
// route computation) -> crossbar (cbr_crossbar) with one extra output that writes the
// central buffer (cb_central_buffer) -> per-VC single-flit output buffers
// (cbr_output_unit), which take a flit either from the crossbar or from the CB's output
// register.  cbr_allocator makes all allocation decisions.
//
// Latency through the router for a flit that finds its way free (bypass path): it is
// written into the staging buffer at edge t, into the output buffer at t+1 and onto the
// link at t+2, i.e. 2 cycles.  On the buffered path it is written into the CB at t+1,
// read into the CB output register at t+2 at the earliest, reaches the output buffer at
// t+3 and the link at t+4, i.e. 4 cycles.
//
// Choices of this implementation: the three allocators are resolved in one cycle with
// rotating priority; packets are wormhole-switched per VC; the CB has one write and one
// read port; injection and ejection use VC0.
//
// The central buffer's per-queue non-empty vector (cb_nonempty) is left unconnected on
// purpose: the allocator learns what the CB holds for an output VC from its own claim
// counters, so lint reports that signal as unused.
module cb_router
  import sn_pkg::*;
#(
  parameter int unsigned Q        = 5,
  parameter int unsigned P_CONC   = 4,
  parameter int unsigned ID       = 0,
  parameter int unsigned CB_DEPTH = 20,
  parameter int unsigned K_NET    = net_radix(Q),
  parameter int unsigned NPORT    = K_NET + P_CONC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  link_t               in       [NPORT],
  output logic [NUM_VC-1:0]   in_ready [NPORT],
  output link_t               out      [NPORT],
  input  logic [NUM_VC-1:0]   out_ready[NPORT],
  output logic                ev_bypass,
  output logic                ev_to_cb,
  output logic                ev_head_wait
);
  localparam int unsigned NVC = NUM_VC;
  localparam int unsigned PW  = $clog2(NPORT);
  localparam int unsigned NQ  = NPORT * NVC;
  localparam int unsigned QW  = $clog2(NQ);
  localparam int unsigned CW  = $clog2(CB_DEPTH + 1);

  // input side
  logic [NVC-1:0]   st_valid [NPORT];
  logic [NVC-1:0]   st_head  [NPORT];
  logic [NVC-1:0]   st_tail  [NPORT];
  flit_t            st_flit  [NPORT][NVC];
  logic [PW-1:0]    rc_port  [NPORT][NVC];
  logic [VC_W-1:0]  rc_vc    [NPORT][NVC];
  logic [LEN_W-1:0] rc_len   [NPORT][NVC];
  logic [NVC-1:0]   deq      [NPORT];
  logic [VC_W-1:0]  in_vc_sel[NPORT];
  flit_t            xb_in    [NPORT];

  for (genvar i = 0; i < NPORT; i++) begin : g_in
    cbr_input_unit #(
      .Q(Q), .P_CONC(P_CONC), .ID(ID), .PORT(i), .K_NET(K_NET), .NPORT(NPORT), .PW(PW), .NVC(NVC)
    ) u_in (
      .clk, .rst_n,
      .in(in[i]), .in_ready(in_ready[i]),
      .st_valid(st_valid[i]), .st_flit(st_flit[i]),
      .rc_port(rc_port[i]), .rc_vc(rc_vc[i]), .rc_len(rc_len[i]),
      .deq(deq[i])
    );
    for (genvar v = 0; v < NVC; v++) begin : g_v
      assign st_head[i][v] = st_flit[i][v].head;
      assign st_tail[i][v] = st_flit[i][v].tail;
    end
    assign xb_in[i] = st_flit[i][in_vc_sel[i]];
  end

  // allocation
  logic [NPORT-1:0] xb_sel   [NPORT+1];
  logic [NVC-1:0]   obuf_free[NPORT];
  logic [NPORT-1:0] ob_xb_we, ob_cb_we;
  logic [VC_W-1:0]  ob_xb_vc [NPORT];
  logic [CW-1:0]    cb_avail;
  logic             cb_reserve, cb_wr, cbo_valid;
  logic [LEN_W-1:0] cb_reserve_len;
  logic [QW-1:0]    cb_wr_q, cbo_q;
  flit_t            cbo_flit;
  logic [NQ-1:0]    owner_busy, obuf_ok, cb_nonempty;

  cbr_allocator #(.NPORT(NPORT), .NVC(NVC), .PW(PW), .NQ(NQ), .QW(QW), .CW(CW)) u_alloc (
    .clk, .rst_n,
    .st_valid, .st_head, .st_tail, .rc_port, .rc_vc, .rc_len,
    .deq, .in_vc_sel, .xb_sel,
    .obuf_free, .ob_xb_we, .ob_xb_vc, .ob_cb_we,
    .cb_avail, .cb_reserve, .cb_reserve_len, .cb_wr, .cb_wr_q,
    .cbo_valid, .cbo_tail(cbo_flit.tail), .cbo_q, .owner_busy,
    .ev_bypass, .ev_to_cb, .ev_head_wait
  );

  // switch
  flit_t            xb_out  [NPORT+1];
  logic [NPORT:0]   xb_valid;
  cbr_crossbar #(.N_IN(NPORT), .N_OUT(NPORT + 1)) u_xbar (
    .in_flit(xb_in), .sel(xb_sel), .out_flit(xb_out), .out_valid(xb_valid)
  );

  // central buffer
  for (genvar q = 0; q < NQ; q++) begin : g_q
    assign obuf_ok[q] = obuf_free[q / NVC][q % NVC];
  end

  cb_central_buffer #(.DEPTH(CB_DEPTH), .NQ(NQ), .QW(QW), .CW(CW)) u_cb (
    .clk, .rst_n,
    .reserve(cb_reserve), .reserve_len(cb_reserve_len), .avail(cb_avail),
    .wr_valid(cb_wr), .wr_flit(xb_out[NPORT]), .wr_q(cb_wr_q),
    .obuf_ok, .owner_busy,
    .cbo_valid, .cbo_flit, .cbo_q, .q_nonempty(cb_nonempty)
  );

  // output side
  for (genvar o = 0; o < NPORT; o++) begin : g_out
    cbr_output_unit #(.NVC(NVC)) u_out (
      .clk, .rst_n,
      .xb_we(ob_xb_we[o]), .xb_vc(ob_xb_vc[o]), .xb_flit(xb_out[o]),
      .cb_we(ob_cb_we[o]), .cb_vc(VC_W'(int'(cbo_q) % NVC)), .cb_flit(cbo_flit),
      .obuf_free(obuf_free[o]),
      .out(out[o]), .out_ready(out_ready[o])
    );
  end

  a_xb_cb: assert property (@(posedge clk) disable iff (!rst_n) cb_wr == xb_valid[NPORT]);

endmodule
