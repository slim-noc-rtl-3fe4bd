// tb_cb_router: self-checking test of one central-buffer router (router 0 of the q = 5
// network: 7 network ports, 4 node ports).
// 1) bypass latency: a one-flit packet from a node taken into the staging buffer at edge
//    t leaves on the output link at edge t+2;
// 2) buffered latency: two heads for the same output port (different VCs) in the same
//    cycle: one bypasses (t+2), the other goes through the central buffer (t+4);
// 3) random packets (1..6 flits) on every input with random output back-pressure.
//    Each flit must leave on the port the route gives, on VC0 when it came from a node
//    and VC1 when it came from a router (VC0 on ejection), packets intact and never
//    interleaved on one output VC, and all of them delivered.
module tb_cb_router;
  import sn_pkg::*;
  localparam int Q = 5, P = 4, K = 7, NP = 11;
  logic clk = 0, rst_n = 0;
  link_t in [NP], out [NP];
  logic [1:0] in_ready [NP], out_ready [NP];
  logic ev_bypass, ev_to_cb, ev_head_wait;
  int checks = 0, failures = 0;
  int cyc = 0, n_bypass = 0, n_cb = 0, n_wait = 0;

  cb_router #(.Q(Q), .P_CONC(P), .ID(0)) dut (.clk, .rst_n, .in, .in_ready, .out, .out_ready,
                                               .ev_bypass, .ev_to_cb, .ev_head_wait);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin n_bypass += ev_bypass; n_cb += ev_to_cb; n_wait += ev_head_wait; end
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // expected output port for a destination node (router 0)
  function automatic int exp_port(int dst);
    if (dst / P == 0) return K + dst % P;
    return route_port(Q, 0, dst / P);
  endfunction

  // packets: id -> expected port / vc / len ; payload of body flits = {id, idx}
  int pk_port [int], pk_vc [int], pk_len [int];
  int cur_pk [NP][2], cur_idx [NP][2];
  int delivered = 0, injected = 0;
  int out_cyc [int];   // edge at which a packet's head left

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NP; o++) if (out[o].valid) begin
      int v, id, idx;
      v = out[o].vc;
      check(out_ready[o][v], "flit sent to a VC that was not ready");
      id = int'(out[o].flit.data[63:32]); idx = int'(out[o].flit.data[95:64]);
      if (out[o].flit.head) begin
        check(cur_pk[o][v] < 0, $sformatf("port %0d vc %0d: new head inside a packet", o, v));
        check(pk_port.exists(id), "unknown packet");
        if (pk_port.exists(id)) begin
          check(pk_port[id] == o, $sformatf("packet %0d on port %0d, expected %0d", id, o, pk_port[id]));
          check(pk_vc[id] == v, $sformatf("packet %0d on vc %0d, expected %0d", id, v, pk_vc[id]));
        end
        cur_pk[o][v] = id; cur_idx[o][v] = 0;
        out_cyc[id] = cyc;
      end else begin
        check(cur_pk[o][v] == id && idx == cur_idx[o][v], $sformatf("port %0d vc %0d: flit out of order", o, v));
      end
      cur_idx[o][v]++;
      delivered++;
      if (out[o].flit.tail) begin
        if (pk_len.exists(id)) check(cur_idx[o][v] == pk_len[id], "packet length");
        cur_pk[o][v] = -1;
      end
    end
  end

  int in_cyc [int];
  function automatic flit_t mkflit(int id, int idx, int len, int dst, int src);
    flit_t f;
    head_t h;
    f = '0;
    f.head = (idx == 0); f.tail = (idx == len - 1);
    if (idx == 0) begin
      h = '0; h.dst = NODE_W'(dst); h.src = NODE_W'(src); h.len = LEN_W'(len);
      f.data = h;
    end
    f.data[63:32] = 32'(id); f.data[95:64] = 32'(idx);
    return f;
  endfunction

  task automatic expect_pkt(int id, int in_port, int dst, int len);
    pk_port[id] = exp_port(dst);
    pk_vc[id]   = (dst / P == 0) ? 0 : (in_port >= K ? 0 : 1);
    pk_len[id]  = len;
    injected += len;
  endtask

  // per input: packet source state
  int s_id [NP], s_idx [NP], s_len [NP], s_dst [NP], s_vc [NP];
  int next_id = 1000;

  initial begin
    for (int o = 0; o < NP; o++) begin cur_pk[o][0] = -1; cur_pk[o][1] = -1; in[o] = '0; out_ready[o] = 2'b11; end
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);

    // 1) bypass latency: node port 7 -> node 100 (router 25)
    expect_pkt(1, 7, 100, 1);
    in[7].valid = 1; in[7].vc = 0; in[7].flit = mkflit(1, 0, 1, 100, 0);
    @(posedge clk); in_cyc[1] = cyc; @(negedge clk); in[7] = '0;
    repeat (4) @(negedge clk);
    check(out_cyc.exists(1) && out_cyc[1] - in_cyc[1] == 2, "bypass path: 2 router cycles");

    // 2) two heads, same output port, same cycle: one bypasses, one uses the CB
    expect_pkt(2, 8, 100, 1);
    expect_pkt(3, 0, 100, 1);
    in[8].valid = 1; in[8].vc = 0; in[8].flit = mkflit(2, 0, 1, 100, 1);
    in[0].valid = 1; in[0].vc = 0; in[0].flit = mkflit(3, 0, 1, 100, 77);
    @(posedge clk); in_cyc[2] = cyc; in_cyc[3] = cyc; @(negedge clk); in[8] = '0; in[0] = '0;
    repeat (6) @(negedge clk);
    begin
      int l2, l3;
      l2 = out_cyc[2] - in_cyc[2]; l3 = out_cyc[3] - in_cyc[3];
      check((l2 == 2 && l3 == 4) || (l2 == 4 && l3 == 2), $sformatf("bypass/CB latencies %0d/%0d, expected 2 and 4", l2, l3));
      check(n_cb == 1, "one packet went through the central buffer");
    end

    // 3) random traffic
    for (int i = 0; i < NP; i++) s_len[i] = 0;
    for (int c = 0; c < 6000; c++) begin
      for (int o = 0; o < NP; o++) out_ready[o] = (($urandom % 4) == 0) ? 2'($urandom) : 2'b11;
      for (int i = 0; i < NP; i++) begin
        in[i] = '0;
        if (s_len[i] == 0 && c < 5500 && ($urandom % 3) == 0) begin
          s_id[i] = next_id++; s_idx[i] = 0; s_len[i] = $urandom_range(1, 6);
          if (i >= K) begin s_vc[i] = 0; s_dst[i] = $urandom_range(0, 199); end
          else begin
            s_vc[i] = $urandom_range(0, 1);
            s_dst[i] = (s_vc[i] == 1) ? $urandom_range(0, 3) : $urandom_range(0, 199);
          end
          expect_pkt(s_id[i], i, s_dst[i], s_len[i]);
        end
      end
      #1;
      for (int i = 0; i < NP; i++)
        if (s_len[i] > 0 && in_ready[i][s_vc[i]] && ($urandom % 5) != 0) begin
          in[i].valid = 1; in[i].vc = VC_W'(s_vc[i]);
          in[i].flit = mkflit(s_id[i], s_idx[i], s_len[i], s_dst[i], 1);
          s_idx[i]++;
          if (s_idx[i] == s_len[i]) s_len[i] = 0;
        end
      @(negedge clk);
    end
    for (int i = 0; i < NP; i++) in[i] = '0;
    for (int o = 0; o < NP; o++) out_ready[o] = 2'b11;
    repeat (100) @(negedge clk);
    check(delivered == injected, $sformatf("all flits delivered (%0d/%0d)", delivered, injected));
    check(n_bypass > 100 && n_cb > 100, $sformatf("both paths used: bypass %0d, CB %0d", n_bypass, n_cb));
    $display("router: bypass heads %0d, CB heads %0d, head-wait cycles %0d", n_bypass, n_cb, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
