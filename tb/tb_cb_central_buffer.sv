// tb_cb_central_buffer: self-checking test of the central buffer.
// Directed part: reservation lowers 'avail' by the packet length and reads give the
// slots back; a flit written at one edge is in the output register after the next
// edge; a head flit is held while its output VC is owned (owner_busy) or its output
// buffer is not free (obuf_ok); the same queue is never read twice in a row.
// Random part: packets of 1..6 flits are reserved and written to 6 queues whose read
// conditions toggle at random; every flit must come out once, in order per queue, and
// the occupancy never exceeds 20.
module tb_cb_central_buffer;
  import sn_pkg::*;
  localparam int DEPTH = 20, NQ = 6, QW = 3, CW = 5;
  logic clk = 0, rst_n = 0;
  logic reserve, wr_valid, cbo_valid;
  logic [LEN_W-1:0] reserve_len;
  logic [CW-1:0] avail;
  flit_t wr_flit, cbo_flit;
  logic [QW-1:0] wr_q, cbo_q;
  logic [NQ-1:0] obuf_ok, owner_busy, q_nonempty;
  int checks = 0, failures = 0;
  int unsigned exp_q [NQ][$];
  int stored = 0, reserved = 0, sent = 0, recv = 0;
  int last_q = -1;

  cb_central_buffer #(.DEPTH(DEPTH), .NQ(NQ), .QW(QW), .CW(CW)) dut (
    .clk, .rst_n, .reserve, .reserve_len, .avail, .wr_valid, .wr_flit, .wr_q,
    .obuf_ok, .owner_busy, .cbo_valid, .cbo_flit, .cbo_q, .q_nonempty);
  always #5 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // output monitor: cbo is consumed every cycle it is valid
  logic [NQ-1:0] ok_prev, busy_prev;
  always @(posedge clk) if (rst_n) begin
    if (cbo_valid) begin
      int unsigned e;
      check(int'(cbo_q) != last_q, "same queue read in two consecutive cycles");
      if (exp_q[cbo_q].size() == 0) check(0, "unexpected flit");
      else begin
        e = exp_q[cbo_q].pop_front();
        check(cbo_flit.data[31:0] == e, $sformatf("queue %0d order: got %0d exp %0d", cbo_q, cbo_flit.data[31:0], e));
      end
      last_q = cbo_q;
      recv++;
    end else last_q = -1;
  end

  task automatic put(int q, bit head, bit tail, int unsigned val);
    wr_valid = 1; wr_q = QW'(q); wr_flit = '0; wr_flit.head = head; wr_flit.tail = tail; wr_flit.data[31:0] = val;
    exp_q[q].push_back(val); sent++;
  endtask

  initial begin
    reserve = 0; reserve_len = 0; wr_valid = 0; wr_flit = '0; wr_q = 0; obuf_ok = '0; owner_busy = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(avail == 20, "20 free slots after reset");
    // reserve a 3-flit packet for queue 2 and write its head
    reserve = 1; reserve_len = 3; put(2, 1, 0, 1);
    @(negedge clk); reserve = 0; wr_valid = 0;
    check(avail == 17, "avail 17 after reserving 3");
    check(q_nonempty == 6'b000100, "queue 2 holds a flit");
    // output buffer not free: nothing read
    @(negedge clk);
    check(!cbo_valid, "no read while obuf_ok is low");
    owner_busy[2] = 1; obuf_ok = '1;
    @(negedge clk);
    check(!cbo_valid, "head not read while its output VC is owned");
    owner_busy[2] = 0;
    @(negedge clk);
    check(cbo_valid && cbo_q == 2 && cbo_flit.data[31:0] == 1 && cbo_flit.head, "head read once the VC is free");
    check(avail == 18, "slot returned by the read");
    // latency: body flit written at an edge is in cbo after the next edge
    put(2, 0, 0, 2);
    @(negedge clk); wr_valid = 0;
    check(!cbo_valid, "written flit not yet in cbo");
    @(negedge clk);
    check(cbo_valid && cbo_flit.data[31:0] == 2, "written flit in cbo one edge after the write");
    // body flits are read even with owner_busy set
    owner_busy[2] = 1;
    put(2, 0, 1, 3);
    @(negedge clk); wr_valid = 0;
    @(negedge clk);
    check(cbo_valid && cbo_flit.data[31:0] == 3, "body flit read regardless of owner");
    owner_busy = '0;
    @(negedge clk);
    check(avail == 20, "all slots free again");

    // random packets
    begin
      int pend_q [$], pend_len [$];
      int cur_q = -1, cur_left = 0, cur_idx = 0, val = 100;
      for (int c = 0; c < 6000; c++) begin
        int occ;
        obuf_ok = NQ'($urandom); owner_busy = NQ'($urandom) & NQ'($urandom);
        reserve = 0; wr_valid = 0;
        // admit a new packet now and then
        if (($urandom % 3) == 0) begin
          int len;
          len = $urandom_range(1, 6);
          if (int'(avail) >= len) begin
            reserve = 1; reserve_len = LEN_W'(len);
            pend_q.push_back($urandom_range(0, NQ - 1)); pend_len.push_back(len);
          end
        end
        // write one flit of the oldest admitted packet
        if (cur_left == 0 && pend_q.size() > 0) begin
          cur_q = pend_q.pop_front(); cur_left = pend_len.pop_front(); cur_idx = 0;
        end
        if (cur_left > 0 && ($urandom % 4) != 0) begin
          put(cur_q, cur_idx == 0, cur_left == 1, val); val++;
          cur_left--; cur_idx++;
        end
        @(negedge clk);
        occ = sent - recv;
        check(occ <= DEPTH, "occupancy within 20");
      end
      reserve = 0; wr_valid = 0;
      // drain what was admitted
      while (cur_left > 0 || pend_q.size() > 0) begin
        if (cur_left == 0) begin cur_q = pend_q.pop_front(); cur_left = pend_len.pop_front(); cur_idx = 0; end
        put(cur_q, cur_idx == 0, cur_left == 1, val); val++; cur_left--; cur_idx++;
        obuf_ok = '1; owner_busy = '0;
        @(negedge clk);
      end
      wr_valid = 0; obuf_ok = '1; owner_busy = '0;
      repeat (60) @(negedge clk);
      check(recv == sent, $sformatf("all flits read (%0d/%0d)", recv, sent));
      check(avail == 20, "all slots free at the end");
    end
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
