// cb_central_buffer: the central buffer (CB) shared by all ports of a router.
//
// DEPTH flit slots are shared by NQ queues, one queue per (output port, output VC).
// Each queue is a linked list through the slots, kept by a head pointer, a tail pointer
// and a count per queue (the "VC-based head and tail pointers" that keep VCs independent
// inside the one buffer).  Free slots are tracked with a bit mask.
//
// Atomic allocation: before the first flit of a packet is written, the allocator
// reserves room for the whole packet (reserve / reserve_len).  'avail' counts slots that
// are neither occupied nor reserved, so a packet that was admitted can always be
// written completely and never waits half inside the CB (the deadlock-freedom rule).
//
// One write port (wr_*) and one read port.  Each cycle the buffer picks, round-robin,
// one queue whose front flit may leave and moves it into the output register cbo.  A
// front flit may leave when the router says the destination output buffer will be free
// next cycle (obuf_ok) and, for a head flit, when no packet from an input port holds that
// output VC (owner_busy).  Because of that rule cbo is always emptied on the next clock
// edge, so a blocked output VC never stalls the single CB output for the others.
// Timing: written at edge t, a flit can be in cbo at edge t+1 at the earliest and in the
// output buffer at t+2.
module cb_central_buffer
  import sn_pkg::*;
#(
  parameter int unsigned DEPTH = 20,
  parameter int unsigned NQ    = 22,
  parameter int unsigned QW    = $clog2(NQ),
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // reservation
  input  logic          reserve,
  input  logic [LEN_W-1:0] reserve_len,
  output logic [CW-1:0] avail,
  // write port
  input  logic          wr_valid,
  input  flit_t         wr_flit,
  input  logic [QW-1:0] wr_q,
  // read-side conditions, one bit per queue
  input  logic [NQ-1:0] obuf_ok,
  input  logic [NQ-1:0] owner_busy,
  // output register
  output logic          cbo_valid,
  output flit_t         cbo_flit,
  output logic [QW-1:0] cbo_q,
  output logic [NQ-1:0] q_nonempty
);
  flit_t         mem  [DEPTH];
  logic [AW-1:0] nxt  [DEPTH];
  logic [DEPTH-1:0] used;
  logic [AW-1:0] hd   [NQ];
  logic [AW-1:0] tl   [NQ];
  logic [CW-1:0] cnt  [NQ];
  logic [QW-1:0] rr;

  // free slot for a write: lowest clear bit of 'used'
  logic [AW-1:0] wslot;
  always_comb begin
    wslot = '0;
    for (int s = DEPTH - 1; s >= 0; s--) if (!used[s]) wslot = AW'(s);
  end

  // read selection
  logic          rd;
  logic [QW-1:0] rq;
  logic [NQ-1:0] elig;
  always_comb begin
    for (int q = 0; q < NQ; q++) begin
      q_nonempty[q] = (cnt[q] != '0);
      elig[q] = q_nonempty[q] && obuf_ok[q] && !(mem[hd[q]].head && owner_busy[q])
                && !(cbo_valid && int'(cbo_q) == q);
    end
    rd = 1'b0;
    rq = '0;
    for (int k = 0; k < NQ; k++) begin
      int q;
      q = (int'(rr) + k) % NQ;
      if (!rd && elig[q]) begin
        rd = 1'b1;
        rq = QW'(q);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used      <= '0;
      avail     <= CW'(DEPTH);
      cbo_valid <= 1'b0;
      cbo_flit  <= '0;
      cbo_q     <= '0;
      rr        <= '0;
      for (int q = 0; q < NQ; q++) begin
        hd[q]  <= '0;
        tl[q]  <= '0;
        cnt[q] <= '0;
      end
      for (int s = 0; s < DEPTH; s++) nxt[s] <= '0;
    end else begin
      logic [CW-1:0] av;
      av = avail;
      if (reserve) av = av - CW'(reserve_len);
      if (rd)      av = av + 1'b1;
      avail <= av;

      cbo_valid <= rd;
      if (rd) begin
        cbo_flit <= mem[hd[rq]];
        cbo_q    <= rq;
        rr       <= QW'((int'(rq) + 1) % NQ);
      end

      for (int q = 0; q < NQ; q++) begin
        logic r_here, w_here;
        logic [CW-1:0] c_after_rd;
        r_here = rd && int'(rq) == q;
        w_here = wr_valid && int'(wr_q) == q;
        c_after_rd = cnt[q] - CW'(r_here);
        cnt[q] <= c_after_rd + CW'(w_here);
        if (r_here) hd[q] <= nxt[hd[q]];
        if (w_here) begin
          if (c_after_rd == '0) hd[q] <= wslot;
          else                  nxt[tl[q]] <= wslot;
          tl[q] <= wslot;
        end
      end

      if (rd) used[hd[rq]] <= 1'b0;
      if (wr_valid) used[wslot] <= 1'b1;
    end
  end

  always_ff @(posedge clk) if (wr_valid) mem[wslot] <= wr_flit;

  a_room:    assert property (@(posedge clk) disable iff (!rst_n) wr_valid |-> !used[wslot]);
  a_reserve: assert property (@(posedge clk) disable iff (!rst_n) reserve |-> CW'(reserve_len) <= avail);

endmodule
