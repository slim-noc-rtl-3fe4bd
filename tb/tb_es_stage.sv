// tb_es_stage: self-checking test of one ElastiStore stage.
// 1) capacity: with VC0 blocked downstream the stage takes exactly two VC0 flits
//    (slave + shared master), then VC1 can still place one flit in its own slave latch;
// 2) throughput: a single VC streams one flit per cycle when nothing blocks;
// 3) random traffic on both VCs with random per-VC back-pressure: every flit arrives
//    once, in order within its VC, and only when its VC's ready is set.
module tb_es_stage;
  import sn_pkg::*;
  logic clk = 0, rst_n = 0;
  link_t up, dn;
  logic [1:0] up_ready, dn_ready;
  int checks = 0, failures = 0;
  int unsigned exp_q [2][$];
  int unsigned sent = 0, recv = 0;

  es_stage dut (.clk, .rst_n, .up, .up_ready, .dn, .dn_ready);

  always #5 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // downstream monitor
  always @(posedge clk) if (rst_n && dn.valid) begin
    int unsigned e;
    check(dn_ready[dn.vc], "flit presented to a VC that is not ready");
    if (exp_q[dn.vc].size() == 0) check(0, "unexpected flit");
    else begin
      e = exp_q[dn.vc].pop_front();
      check(dn.flit.data[31:0] == e, $sformatf("vc%0d order: got %0d exp %0d", dn.vc, dn.flit.data[31:0], e));
    end
    recv++;
  end

  task automatic send(int vc, int unsigned val);
    up.valid = 1; up.vc = VC_W'(vc); up.flit = '0; up.flit.data[31:0] = val;
    exp_q[vc].push_back(val); sent++;
  endtask

  initial begin
    up = '0; dn_ready = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1) capacity
    check(up_ready == 2'b11, "empty stage ready on both VCs");
    send(0, 100); @(negedge clk);
    check(up_ready[0], "VC0 ready after one flit (master free)");
    send(0, 101); @(negedge clk); up.valid = 0;
    check(!up_ready[0], "VC0 not ready with slave and master full");
    check(up_ready[1], "VC1 still ready: its slave latch is free");
    send(1, 200); @(negedge clk); up.valid = 0;
    check(!up_ready[1], "VC1 not ready once its slave is full and master is taken");
    dn_ready = 2'b11;
    repeat (4) @(negedge clk);
    check(recv == 3, "three flits drained");
    // 2) throughput: 20 flits on VC1 in 20 consecutive cycles
    begin
      int c0;
      for (int i = 0; i < 20; i++) begin
        check(up_ready[1], "VC1 ready every cycle while streaming");
        send(1, 300 + i); @(negedge clk);
      end
      up.valid = 0;
      c0 = recv;
      @(negedge clk);
      check(recv - 3 == 20 && exp_q[1].size() == 0, "stream of 20 flits done one cycle after the last send");
    end
    // 3) random
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int vc;
      dn_ready = 2'($urandom);
      up.valid = 0;
      vc = $urandom_range(0, 1);
      if (($urandom % 4) != 0 && up_ready[vc]) send(vc, 1000 + cyc);
      @(negedge clk);
    end
    up.valid = 0; dn_ready = 2'b11;
    repeat (5) @(negedge clk);
    check(recv == sent, $sformatf("all flits delivered (%0d/%0d)", recv, sent));
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
