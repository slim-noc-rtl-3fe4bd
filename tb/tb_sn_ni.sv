// tb_sn_ni: self-checking test of the network interface queues.
// Injection: the node writes 25 flits while the router side is blocked; exactly 20 are
// taken (queue depth), then all come out in order on VC0 once the router is ready.
// Ejection: flits from the router (either VC) come out to the node in order; the NI
// stops accepting when 20 are held, and drains under random node back-pressure.
module tb_sn_ni;
  import sn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t inj_flit, ej_flit;
  link_t to_rtr, from_rtr;
  logic [1:0] to_rtr_ready, from_rtr_ready;
  int checks = 0, failures = 0;

  sn_ni dut (.clk, .rst_n, .inj_valid, .inj_flit, .inj_ready, .ej_valid, .ej_flit, .ej_ready,
             .to_rtr, .to_rtr_ready, .from_rtr, .from_rtr_ready);
  always #5 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int accepted, got, e;
    inj_valid = 0; inj_flit = '0; ej_ready = 0; from_rtr = '0; to_rtr_ready = 2'b00;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    accepted = 0;
    for (int i = 0; i < 25; i++) begin
      inj_valid = 1; inj_flit = '0; inj_flit.data[31:0] = i;
      #1 if (inj_ready) accepted++;
      @(negedge clk);
    end
    inj_valid = 0;
    check(accepted == 20, $sformatf("injection queue holds 20 flits (took %0d)", accepted));
    check(!to_rtr.valid, "nothing sent while router not ready");
    to_rtr_ready = 2'b01;
    got = 0;
    for (int c = 0; c < 30; c++) begin
      #1 if (to_rtr.valid) begin
        check(to_rtr.vc == 0 && to_rtr.flit.data[31:0] == got, "injected flit order on VC0");
        got++;
      end
      @(negedge clk);
    end
    check(got == 20, "all 20 injected flits reached the router");
    // ejection
    accepted = 0;
    for (int i = 0; i < 24; i++) begin
      #1 if (from_rtr_ready == 2'b11) begin
        from_rtr.valid = 1; from_rtr.vc = VC_W'(i % 2); from_rtr.flit = '0; from_rtr.flit.data[31:0] = 1000 + i;
        accepted++;
      end else from_rtr.valid = 0;
      @(negedge clk);
    end
    from_rtr.valid = 0;
    check(accepted == 20, $sformatf("ejection queue holds 20 flits (took %0d)", accepted));
    e = 0;
    for (int c = 0; c < 200 && e < 20; c++) begin
      ej_ready = 1'($urandom);
      #1 if (ej_valid && ej_ready) begin
        check(ej_flit.data[31:0] == 1000 + e, "ejected flit order");
        e++;
      end
      @(negedge clk);
    end
    check(e == 20, "all ejected flits delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
