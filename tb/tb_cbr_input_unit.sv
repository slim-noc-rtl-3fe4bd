// tb_cbr_input_unit: self-checking test of the per-VC input staging buffers.
// Router 0 of the q = 5 network, one node port (7) and one network port (0).
// Checks: a flit accepted at an edge is in its VC's register in the next cycle; a full
// register blocks only its own VC; a register read every cycle accepts a flit every
// cycle; the head flit's route (router 0 reaches router 25 on port 2, router 4 on port 1,
// its own node 2 on port 9) and output VC (0 from a node, 1 from a router) and length.
module tb_cbr_input_unit;
  import sn_pkg::*;
  logic clk = 0, rst_n = 0;
  link_t in_n, in_r;
  logic [1:0] rdy_n, rdy_r, stv_n, stv_r, deq_n, deq_r;
  flit_t stf_n [2], stf_r [2];
  logic [3:0] rcp_n [2], rcp_r [2];
  logic [VC_W-1:0] rcv_n [2], rcv_r [2];
  logic [LEN_W-1:0] rcl_n [2], rcl_r [2];
  int checks = 0, failures = 0;

  cbr_input_unit #(.Q(5), .P_CONC(4), .ID(0), .PORT(7)) u_node (
    .clk, .rst_n, .in(in_n), .in_ready(rdy_n), .st_valid(stv_n), .st_flit(stf_n),
    .rc_port(rcp_n), .rc_vc(rcv_n), .rc_len(rcl_n), .deq(deq_n));
  cbr_input_unit #(.Q(5), .P_CONC(4), .ID(0), .PORT(0)) u_net (
    .clk, .rst_n, .in(in_r), .in_ready(rdy_r), .st_valid(stv_r), .st_flit(stf_r),
    .rc_port(rcp_r), .rc_vc(rcv_r), .rc_len(rcl_r), .deq(deq_r));
  always #5 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic flit_t mkhead(int dst, int len);
    head_t h;
    flit_t f;
    h = '0; h.dst = NODE_W'(dst); h.src = 16'd99; h.len = LEN_W'(len);
    f.head = 1; f.tail = (len == 1); f.data = h;
    return f;
  endfunction

  initial begin
    in_n = '0; in_r = '0; deq_n = 0; deq_r = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(rdy_n == 2'b11 && stv_n == 2'b00, "empty after reset");
    in_n.valid = 1; in_n.vc = 0; in_n.flit = mkhead(100, 6);
    in_r.valid = 1; in_r.vc = 1; in_r.flit = mkhead(16, 2);
    @(negedge clk);
    in_n.valid = 0; in_r.valid = 0;
    check(stv_n == 2'b01 && stf_n[0] == mkhead(100, 6), "node head staged in VC0 the next cycle");
    check(rcp_n[0] == 4'd2 && rcv_n[0] == 0 && rcl_n[0] == 6, "route 0 -> router 25: port 2, VC0, len 6");
    check(stv_r == 2'b10 && rcp_r[1] == 4'd1 && rcv_r[1] == 1 && rcl_r[1] == 2, "route 0 -> router 4: port 1, VC1, len 2");
    check(rdy_n == 2'b10, "full VC0 not ready, VC1 ready");
    // local ejection
    in_r.valid = 1; in_r.vc = 0; in_r.flit = mkhead(2, 1);
    @(negedge clk); in_r.valid = 0;
    check(rcp_r[0] == 4'd9 && rcv_r[0] == 0, "own node 2 -> port 9, VC0");
    // streaming with dequeue every cycle
    deq_n = 2'b01;
    for (int i = 0; i < 10; i++) begin
      #1 check(rdy_n[0], "VC0 ready while being read every cycle");
      in_n.valid = 1; in_n.vc = 0; in_n.flit = '0; in_n.flit.data[31:0] = 500 + i;
      @(negedge clk);
      check(stv_n[0] && stf_n[0].data[31:0] == 500 + i, "streamed flit staged");
    end
    in_n.valid = 0;
    @(negedge clk);
    check(!stv_n[0], "register empties after last read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
