// tb_slim_noc: end-to-end test of the whole network at its default size (SN-S: 50
// routers, 200 nodes, subgroup layout, H = 9, 20-flit central buffers and queues).
//
// Every node runs a packet source and a sink.  Traffic runs in four phases of PHASE
// cycles each, one per synthetic pattern: uniform random (RND), bit shuffle (SHF,
// destination = source id rotated left by one bit in 8 bits), bit reversal (REV,
// source id reversed in 8 bits) and an adversarial pattern (ADV1, every node sends to
// the nodes of its router's first neighbour, loading single links).  Ids that fall
// outside 0..199 are taken mod 200.  Packets are 2 flits (requests) or 6 flits (writes,
// replies), as in the trace-driven runs, at an offered load of about 0.1
// flits/node/cycle.  Sinks are ready 7 cycles in 8.
//
// Checks: every packet reaches the node named in its head flit, intact and in order,
// with no flit lost or duplicated; each packet's latency is recorded.  The test also
// counts how often each mechanism of the design acted and fails if one never did:
// central-buffer bypass, central-buffer path, head waiting for the CB or its output,
// one-hop and two-hop (VC0 then VC1) routes, traffic over multi-cycle links, link
// back-pressure held in ElastiStore stages, and injection-queue back-pressure.
module tb_slim_noc;
  import sn_pkg::*;
  localparam int Q = 5, P = 4, NR = 50, N = 200, K = 7;
  localparam int PHASE = 700;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t inj_flit [N], ej_flit [N];
  int checks = 0, failures = 0;
  int cyc = 0;

  slim_noc dut (.clk, .rst_n, .inj_valid, .inj_flit, .inj_ready, .ej_valid, .ej_flit, .ej_ready);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ------------------------------------------------------------ mechanism counters
  logic [NR-1:0] evb, evc, evw;
  logic [NR*K-1:0] lstall, lmulti;
  for (genvar r = 0; r < NR; r++) begin : g_probe
    assign evb[r] = dut.g_r[r].ev_bypass;
    assign evc[r] = dut.g_r[r].ev_to_cb;
    assign evw[r] = dut.g_r[r].ev_head_wait;
    for (genvar j = 0; j < K; j++) begin : g_l
      assign lstall[r*K+j] = dut.g_r[r].g_link[j].u_link.up_ready != 2'b11;
      assign lmulti[r*K+j] = dut.g_r[r].g_link[j].u_link.STAGES > 1 && dut.g_r[r].g_link[j].u_link.up.valid;
    end
  end
  longint n_bypass = 0, n_cb = 0, n_wait = 0, n_lstall = 0, n_multi = 0, n_injbp = 0;
  always @(posedge clk) if (rst_n) begin
    n_bypass += $countones(evb); n_cb += $countones(evc); n_wait += $countones(evw);
    n_lstall += $countones(lstall); n_multi += $countones(lmulti);
    n_injbp  += $countones(inj_valid & ~inj_ready);
  end

  // ------------------------------------------------------------ sources
  int unsigned s_id [N], s_idx [N], s_len [N], s_dst [N];
  int unsigned next_id = 1;
  int sent_pk = 0, sent_fl = 0, phase = 0;
  int hops0 = 0, hops1 = 0, hops2 = 0;
  int pk_dst [int unsigned], pk_len [int unsigned], pk_t0 [int unsigned];

  function automatic int bits8_rev(int x);
    int y = 0;
    for (int b = 0; b < 8; b++) if (x & (1 << b)) y |= 1 << (7 - b);
    return y;
  endfunction
  function automatic int pick_dst(int s, int ph);
    int d;
    case (ph)
      0: d = $urandom_range(0, N - 1);
      1: d = ((s << 1) | (s >> 7)) & 8'hff;
      2: d = bits8_rev(s);
      default: d = neighbor(Q, s / P, 0) * P + (s % P);
    endcase
    return d % N;
  endfunction

  function automatic flit_t mkflit(int unsigned id, int idx, int len, int dst, int src);
    flit_t f;
    head_t h;
    f = '0;
    f.head = (idx == 0); f.tail = (idx == len - 1);
    if (idx == 0) begin
      h = '0; h.dst = NODE_W'(dst); h.src = NODE_W'(src); h.len = LEN_W'(len);
      f.data = h;
    end
    f.data[63:32] = id; f.data[95:64] = 32'(idx);
    return f;
  endfunction

  // ------------------------------------------------------------ sinks
  int unsigned r_pk [N], r_idx [N];
  int recv_pk = 0, recv_fl = 0;
  longint lat_sum = 0;
  int lat_max = 0;
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) if (ej_valid[n] && ej_ready[n]) begin
      flit_t f;
      int unsigned id, idx;
      f = ej_flit[n];
      id = f.data[63:32]; idx = f.data[95:64];
      if (f.head) begin
        head_t h;
        h = head_t'(f.data);
        check(int'(h.dst) == n, $sformatf("packet for node %0d ejected at node %0d", h.dst, n));
        check(pk_dst.exists(id), "unknown packet id");
        check(r_idx[n] == 0, "head inside a packet");
        r_pk[n] = id; r_idx[n] = 0;
      end else begin
        check(id == r_pk[n] && idx == r_idx[n], $sformatf("node %0d: flit out of order", n));
      end
      r_idx[n]++;
      recv_fl++;
      if (f.tail) begin
        if (pk_len.exists(id)) begin
          check(int'(r_idx[n]) == pk_len[id], "packet length");
          lat_sum += cyc - pk_t0[id];
          if (cyc - pk_t0[id] > lat_max) lat_max = cyc - pk_t0[id];
          pk_dst.delete(id);
        end
        recv_pk++;
        r_idx[n] = 0;
      end
    end
  end

  initial begin
    inj_valid = '0; ej_ready = '1;
    for (int n = 0; n < N; n++) begin inj_flit[n] = '0; s_len[n] = 0; r_idx[n] = 0; end
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int c = 0; c < 4 * PHASE + 1500; c++) begin
      phase = c / PHASE;
      for (int n = 0; n < N; n++) ej_ready[n] = ($urandom % 8) != 0;
      for (int n = 0; n < N; n++) begin
        inj_valid[n] = 0;
        if (s_len[n] == 0 && c < 4 * PHASE && ($urandom % 40) == 0) begin
          int d, sr, dr;
          d = pick_dst(n, phase);
          s_id[n] = next_id++; s_idx[n] = 0; s_len[n] = ($urandom % 2) ? 2 : 6; s_dst[n] = d;
          pk_dst[s_id[n]] = d; pk_len[s_id[n]] = s_len[n]; pk_t0[s_id[n]] = cyc;
          sr = n / P; dr = d / P;
          if (sr == dr) hops0++; else if (connected(Q, sr, dr)) hops1++; else hops2++;
          sent_pk++;
        end
        if (s_len[n] > 0) begin
          inj_valid[n] = 1;
          inj_flit[n] = mkflit(s_id[n], s_idx[n], s_len[n], s_dst[n], n);
        end
      end
      @(posedge clk);
      for (int n = 0; n < N; n++) if (inj_valid[n] && inj_ready[n]) begin
        sent_fl++;
        s_idx[n]++;
        if (s_idx[n] == s_len[n]) s_len[n] = 0;
      end
      @(negedge clk);
      if (c >= 4 * PHASE && recv_pk == sent_pk) break;
    end
    inj_valid = '0;
    repeat (20) @(negedge clk);
    check(recv_pk == sent_pk && recv_fl == sent_fl,
          $sformatf("all packets delivered: %0d/%0d packets, %0d/%0d flits", recv_pk, sent_pk, recv_fl, sent_fl));
    check(pk_dst.size() == 0, "no packet left in flight");
    $display("packets %0d, flits %0d, mean latency %0d cycles, max %0d", recv_pk, recv_fl,
             recv_pk ? int'(lat_sum / recv_pk) : 0, lat_max);
    $display("routes: same router %0d, one hop %0d, two hops %0d", hops0, hops1, hops2);
    $display("CB bypass %0d, CB path %0d, head waits %0d, link back-pressure %0d, multi-cycle link flits %0d, injection back-pressure %0d",
             n_bypass, n_cb, n_wait, n_lstall, n_multi, n_injbp);
    check(n_bypass > 0, "CB bypass never happened");
    check(n_cb > 0, "CB path never used");
    check(n_wait > 0, "no head ever waited");
    check(hops1 > 0 && hops2 > 0, "one-hop and two-hop routes both exercised");
    check(n_multi > 0, "no flit used a multi-cycle link");
    check(n_lstall > 0, "no link back-pressure");
    check(n_injbp > 0, "no injection back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * PHASE + 6000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d packets delivered", recv_pk, sent_pk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
