// tb_es_link: self-checking test of a 3-stage ElastiStore link.
// Checks the latency (a flit taken at one clock edge is offered at the far end STAGES-1
// edges later, so that the receiver takes it STAGES edges after the sender), full
// throughput, and in-order lossless delivery on both VCs under random back-pressure.
module tb_es_link;
  import sn_pkg::*;
  localparam int STAGES = 3;
  logic clk = 0, rst_n = 0;
  link_t up, dn;
  logic [1:0] up_ready, dn_ready;
  int checks = 0, failures = 0;
  int unsigned exp_q [2][$];
  int unsigned sent = 0, recv = 0;
  int cyc = 0;
  int sent_cyc [int unsigned];

  es_link #(.STAGES(STAGES)) dut (.clk, .rst_n, .up, .up_ready, .dn, .dn_ready);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  bit lat_mode = 0;
  always @(posedge clk) if (rst_n && dn.valid) begin
    int unsigned e, d;
    check(dn_ready[dn.vc], "flit offered to a VC that is not ready");
    d = dn.flit.data[31:0];
    if (exp_q[dn.vc].size() == 0) check(0, "unexpected flit");
    else begin
      e = exp_q[dn.vc].pop_front();
      check(d == e, $sformatf("vc%0d order: got %0d exp %0d", dn.vc, d, e));
    end
    if (lat_mode) check(cyc - sent_cyc[d] == STAGES, $sformatf("latency %0d, expected %0d", cyc - sent_cyc[d], STAGES));
    recv++;
  end

  always @(posedge clk) if (rst_n && up.valid) sent_cyc[up.flit.data[31:0]] = cyc;

  task automatic send(int vc, int unsigned val);
    up.valid = 1; up.vc = VC_W'(vc); up.flit = '0; up.flit.data[31:0] = val;
    exp_q[vc].push_back(val); sent++;
  endtask

  initial begin
    up = '0; dn_ready = 2'b11;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    lat_mode = 1;
    for (int i = 0; i < 30; i++) begin
      check(up_ready[i % 2], "link ready while unblocked");
      send(i % 2, 10 + i); @(negedge clk);
    end
    up.valid = 0;
    repeat (STAGES + 2) @(negedge clk);
    check(recv == 30, "30 flits through at one per cycle");
    lat_mode = 0;
    for (int c = 0; c < 4000; c++) begin
      int vc;
      dn_ready = 2'($urandom);
      up.valid = 0;
      vc = $urandom_range(0, 1);
      if (($urandom % 3) != 0 && up_ready[vc]) send(vc, 1000 + c);
      @(negedge clk);
    end
    up.valid = 0; dn_ready = 2'b11;
    repeat (10) @(negedge clk);
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
