// tb_cbr_output_unit: self-checking test of the per-VC output buffers.
// A random source writes flits (from the crossbar or the CB path, never both in one
// cycle) only into VCs that report obuf_free; the link side applies random per-VC
// ready.  Checks: order per VC, nothing lost, a flit is sent only to a ready VC, a
// written flit is on the link in the next cycle when the VC is ready, and with both
// VCs ready and full the two VCs alternate (round-robin).  A buffer that is sending
// reports itself free in the same cycle, so one VC can stream at one flit per cycle.
module tb_cbr_output_unit;
  import sn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic xb_we, cb_we;
  logic [VC_W-1:0] xb_vc, cb_vc;
  flit_t xb_flit, cb_flit;
  logic [1:0] obuf_free, out_ready;
  link_t out;
  int checks = 0, failures = 0;
  int unsigned exp_q [2][$];
  int unsigned sent = 0, recv = 0;
  int last_vc = -1, alternations = 0;

  cbr_output_unit dut (.clk, .rst_n, .xb_we, .xb_vc, .xb_flit, .cb_we, .cb_vc, .cb_flit,
                       .obuf_free, .out, .out_ready);
  always #5 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n && out.valid) begin
    int unsigned e;
    check(out_ready[out.vc], "sent to a VC that is not ready");
    if (exp_q[out.vc].size() == 0) check(0, "unexpected flit");
    else begin
      e = exp_q[out.vc].pop_front();
      check(out.flit.data[31:0] == e, $sformatf("vc%0d order", out.vc));
    end
    recv++;
  end

  initial begin
    xb_we = 0; cb_we = 0; xb_vc = 0; cb_vc = 0; xb_flit = '0; cb_flit = '0; out_ready = 2'b11;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    // next-cycle departure
    xb_we = 1; xb_vc = 1; xb_flit = '0; xb_flit.data[31:0] = 7; exp_q[1].push_back(7); sent++;
    @(negedge clk); xb_we = 0;
    check(out.valid && out.vc == 1 && out.flit.data[31:0] == 7, "flit on the link the cycle after it was written");
    check(obuf_free[1], "a VC buffer that sends this cycle is free for a new flit (full rate)");
    @(negedge clk);
    // fill both VCs while blocked, then release: VCs alternate
    out_ready = 2'b00;
    xb_we = 1; xb_vc = 0; xb_flit.data[31:0] = 8; exp_q[0].push_back(8); sent++;
    @(negedge clk); xb_we = 0;
    cb_we = 1; cb_vc = 1; cb_flit = '0; cb_flit.data[31:0] = 9; exp_q[1].push_back(9); sent++;
    @(negedge clk); cb_we = 0;
    check(obuf_free == 2'b00, "both VC buffers full and blocked");
    out_ready = 2'b11;
    begin
      int v0;
      #1 v0 = out.vc;
      @(negedge clk);
      check(out.valid && out.vc != VC_W'(v0), "second VC served next (round-robin)");
      @(negedge clk);
    end
    for (int c = 0; c < 5000; c++) begin
      int v;
      out_ready = 2'($urandom);
      xb_we = 0; cb_we = 0;
      v = $urandom_range(0, 1);
      #1;
      if (obuf_free[v] && ($urandom % 3) != 0) begin
        if ($urandom % 2) begin xb_we = 1; xb_vc = VC_W'(v); xb_flit = '0; xb_flit.data[31:0] = 100 + c; end
        else              begin cb_we = 1; cb_vc = VC_W'(v); cb_flit = '0; cb_flit.data[31:0] = 100 + c; end
        exp_q[v].push_back(100 + c); sent++;
      end
      @(negedge clk);
    end
    xb_we = 0; cb_we = 0; out_ready = 2'b11;
    repeat (4) @(negedge clk);
    check(recv == sent, $sformatf("all flits sent (%0d/%0d)", recv, sent));
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
