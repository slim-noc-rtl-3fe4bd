// cbr_allocator: VC and switch allocation of the central-buffer router.
//
// The router has three allocation decisions, all made here in the same cycle:
//   - input staging buffer -> output port   (bypass path, 2-cycle router latency)
//   - input staging buffer -> central buffer (buffered path)
//   - central buffer output -> output port   (second half of the buffered path)
// The central buffer's output register has first claim on its output port.  The input
// ports are then served one after the other in a rotating order (round-robin priority),
// each moving at most one flit per cycle, the VC chosen round-robin within the port.
//
// A head flit takes the bypass when its output VC is free (no packet holds it, none
// is queued for it in the CB) and its output buffer can take a flit now.  Otherwise (a
// conflict at the output) the packet goes to the central buffer if the CB has room for
// the whole packet: the allocator reserves rc_len slots at once, and every later flit of
// that packet is written to the CB.  While a packet is being written into a CB queue no
// other packet is admitted to that queue, so each queue holds whole packets in a row.  With neither possible the head waits in its staging
// buffer.  Body flits follow the head's decision; a bypassing packet owns its output VC
// until its tail passes, so packets never interleave on one VC.  Only one flit per
// cycle is written to the CB and one read from it.
//
// A packet that arrived on VC0 can always leave by the bypass once its output VC
// drains, so a CB filled with VC0 packets cannot block it (the CB is treated as part
// of the output buffer of the VC a packet is queued for).
//
// Outputs are combinational from the current state; state (per input-VC packet state,
// output-VC owners, per-queue write locks, per-queue count of packets admitted to the CB and not yet sent on)
// updates on the clock edge.  ev_* pulse once per head for the test counters.
module cbr_allocator
  import sn_pkg::*;
#(
  parameter int unsigned NPORT = 11,
  parameter int unsigned NVC   = NUM_VC,
  parameter int unsigned PW    = $clog2(NPORT),
  parameter int unsigned NQ    = NPORT * NVC,
  parameter int unsigned QW    = $clog2(NQ),
  parameter int unsigned CW    = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  // input staging buffers
  input  logic [NVC-1:0]    st_valid [NPORT],
  input  logic [NVC-1:0]    st_head  [NPORT],
  input  logic [NVC-1:0]    st_tail  [NPORT],
  input  logic [PW-1:0]     rc_port  [NPORT][NVC],
  input  logic [VC_W-1:0]   rc_vc    [NPORT][NVC],
  input  logic [LEN_W-1:0]  rc_len   [NPORT][NVC],
  output logic [NVC-1:0]    deq      [NPORT],
  output logic [VC_W-1:0]   in_vc_sel[NPORT],     // VC each input drives into the crossbar
  // crossbar selects: outputs 0..NPORT-1 are ports, NPORT is the CB write port
  output logic [NPORT-1:0]  xb_sel   [NPORT+1],
  // output units
  input  logic [NVC-1:0]    obuf_free[NPORT],
  output logic [NPORT-1:0]  ob_xb_we,
  output logic [VC_W-1:0]   ob_xb_vc [NPORT],
  output logic [NPORT-1:0]  ob_cb_we,
  // central buffer
  input  logic [CW-1:0]     cb_avail,
  output logic              cb_reserve,
  output logic [LEN_W-1:0]  cb_reserve_len,
  output logic              cb_wr,
  output logic [QW-1:0]     cb_wr_q,
  input  logic              cbo_valid,
  input  logic              cbo_tail,
  input  logic [QW-1:0]     cbo_q,
  output logic [NQ-1:0]     owner_busy,
  // event pulses
  output logic              ev_bypass,
  output logic              ev_to_cb,
  output logic              ev_head_wait
);
  typedef enum logic [1:0] {IDLE, BYPASS, TOCB} ivc_state_e;

  localparam int unsigned VW = (NVC > 1) ? $clog2(NVC) : 1;

  ivc_state_e      st_q   [NPORT][NVC];
  logic [PW-1:0]   prt_q  [NPORT][NVC];
  logic [VC_W-1:0] ovc_q  [NPORT][NVC];
  logic [NQ-1:0]   own_q;                 // output VC held by a bypassing packet
  logic [NQ-1:0]   wlock_q;               // a packet is still being written into this CB queue
  logic [CW-1:0]   claim_q[NQ];           // packets admitted to the CB queue, not yet out
  logic [PW-1:0]   rr_p;
  logic [VW-1:0]   rr_v   [NPORT];

  // next-state values produced by the allocation pass
  ivc_state_e      st_d   [NPORT][NVC];
  logic [PW-1:0]   prt_d  [NPORT][NVC];
  logic [VC_W-1:0] ovc_d  [NPORT][NVC];
  logic [NQ-1:0]   own_set, own_clr, claim_inc, wlock_set, wlock_clr;

  assign owner_busy = own_q;

  always_comb begin
    logic [NPORT-1:0] out_used;
    logic [NQ-1:0]    taken;      // output VC granted to a new head this cycle
    logic [CW-1:0]    avail;
    logic             wr_used;

    out_used  = '0;
    taken     = '0;
    avail     = cb_avail;
    wr_used   = 1'b0;
    own_set   = '0;
    own_clr   = '0;
    claim_inc = '0;
    wlock_set = '0;
    wlock_clr = '0;
    ob_xb_we  = '0;
    ob_cb_we  = '0;
    cb_reserve     = 1'b0;
    cb_reserve_len = '0;
    cb_wr     = 1'b0;
    cb_wr_q   = '0;
    ev_bypass = 1'b0;
    ev_to_cb  = 1'b0;
    ev_head_wait = 1'b0;
    for (int o = 0; o <= NPORT; o++) xb_sel[o] = '0;
    for (int i = 0; i < NPORT; i++) begin
      deq[i]       = '0;
      in_vc_sel[i] = '0;
      ob_xb_vc[i]  = '0;
      for (int v = 0; v < NVC; v++) begin
        st_d[i][v]  = st_q[i][v];
        prt_d[i][v] = prt_q[i][v];
        ovc_d[i][v] = ovc_q[i][v];
      end
    end

    // central buffer output register goes first (its target buffer is known to be free)
    if (cbo_valid) begin
      out_used[int'(cbo_q) / NVC] = 1'b1;
      ob_cb_we[int'(cbo_q) / NVC] = 1'b1;
    end

    for (int k = 0; k < NPORT; k++) begin
      int  i;
      logic moved;
      i = (int'(rr_p) + k) % NPORT;
      moved = 1'b0;
      for (int m = 0; m < NVC; m++) begin
        int v, o, ov, q;
        v = (int'(rr_v[i]) + m) % NVC;
        if (!moved && st_valid[i][v]) begin
          if (st_q[i][v] == IDLE) begin
            o  = int'(rc_port[i][v]);
            ov = int'(rc_vc[i][v]);
          end else begin
            o  = int'(prt_q[i][v]);
            ov = int'(ovc_q[i][v]);
          end
          q = o * NVC + ov;
          case (st_q[i][v])
            IDLE: begin
              if (!own_q[q] && claim_q[q] == '0 && !taken[q] && !out_used[o] && obuf_free[o][ov]) begin
                moved = 1'b1;
                taken[q] = 1'b1;
                out_used[o] = 1'b1;
                xb_sel[o][i] = 1'b1;
                ob_xb_we[o] = 1'b1;
                ob_xb_vc[o] = VC_W'(ov);
                ev_bypass = 1'b1;
                if (!st_tail[i][v]) begin
                  own_set[q] = 1'b1;
                  st_d[i][v] = BYPASS;
                end
              end else if (!wr_used && !wlock_q[q] && avail >= CW'(rc_len[i][v])) begin
                moved = 1'b1;
                taken[q] = 1'b1;
                wr_used = 1'b1;
                avail = avail - CW'(rc_len[i][v]);
                cb_reserve = 1'b1;
                cb_reserve_len = rc_len[i][v];
                cb_wr = 1'b1;
                cb_wr_q = QW'(q);
                xb_sel[NPORT][i] = 1'b1;
                claim_inc[q] = 1'b1;
                ev_to_cb = 1'b1;
                if (!st_tail[i][v]) begin
                  st_d[i][v] = TOCB;
                  wlock_set[q] = 1'b1;
                end
              end else begin
                ev_head_wait = 1'b1;
              end
              if (moved) begin
                prt_d[i][v] = PW'(o);
                ovc_d[i][v] = VC_W'(ov);
              end
            end
            BYPASS: begin
              if (!out_used[o] && obuf_free[o][ov]) begin
                moved = 1'b1;
                out_used[o] = 1'b1;
                xb_sel[o][i] = 1'b1;
                ob_xb_we[o] = 1'b1;
                ob_xb_vc[o] = VC_W'(ov);
                if (st_tail[i][v]) begin
                  own_clr[q] = 1'b1;
                  st_d[i][v] = IDLE;
                end
              end
            end
            default: begin  // TOCB
              if (!wr_used) begin
                moved = 1'b1;
                wr_used = 1'b1;
                cb_wr = 1'b1;
                cb_wr_q = QW'(q);
                xb_sel[NPORT][i] = 1'b1;
                if (st_tail[i][v]) begin
                  st_d[i][v] = IDLE;
                  wlock_clr[q] = 1'b1;
                end
              end
            end
          endcase
          if (moved) begin
            deq[i][v] = 1'b1;
            in_vc_sel[i] = VC_W'(v);
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_q   <= '0;
      wlock_q <= '0;
      rr_p    <= '0;
      for (int q = 0; q < NQ; q++) claim_q[q] <= '0;
      for (int i = 0; i < NPORT; i++) begin
        rr_v[i] <= '0;
        for (int v = 0; v < NVC; v++) begin
          st_q[i][v]  <= IDLE;
          prt_q[i][v] <= '0;
          ovc_q[i][v] <= '0;
        end
      end
    end else begin
      own_q   <= (own_q | own_set) & ~own_clr;
      wlock_q <= (wlock_q | wlock_set) & ~wlock_clr;
      for (int q = 0; q < NQ; q++)
        claim_q[q] <= claim_q[q] + CW'(claim_inc[q])
                      - CW'(cbo_valid && cbo_tail && int'(cbo_q) == q);
      rr_p <= PW'((int'(rr_p) + 1) % NPORT);
      for (int i = 0; i < NPORT; i++) begin
        if (deq[i] != '0) rr_v[i] <= VW'((int'(rr_v[i]) + 1) % NVC);
        for (int v = 0; v < NVC; v++) begin
          st_q[i][v]  <= st_d[i][v];
          prt_q[i][v] <= prt_d[i][v];
          ovc_q[i][v] <= ovc_d[i][v];
        end
      end
    end
  end

  // a head flit must find its input VC idle; a body flit must find it busy
  for (genvar i = 0; i < NPORT; i++) begin : g_chk
    for (genvar v = 0; v < NVC; v++) begin : g_v
      a_head_idle: assert property (@(posedge clk) disable iff (!rst_n)
        st_valid[i][v] |-> (st_head[i][v] == (st_q[i][v] == IDLE)));
    end
  end

endmodule
