// tb_cbr_crossbar: self-checking test of the router switch.
// Random one-hot (or empty) selects per output; every output must carry exactly the
// selected input's flit, and nothing (valid low, zero data) when unselected.
module tb_cbr_crossbar;
  import sn_pkg::*;
  localparam int NI = 11, NO = 12;
  flit_t in_flit [NI];
  logic [NI-1:0] sel [NO];
  flit_t out_flit [NO];
  logic [NO-1:0] out_valid;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  cbr_crossbar #(.N_IN(NI), .N_OUT(NO)) dut (.in_flit, .sel, .out_flit, .out_valid);

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int pick [NO];
      for (int i = 0; i < NI; i++) begin
        in_flit[i].head = 1'($urandom); in_flit[i].tail = 1'($urandom);
        in_flit[i].data = {$urandom, $urandom, $urandom, $urandom};
      end
      for (int o = 0; o < NO; o++) begin
        pick[o] = $urandom_range(0, NI);          // NI means "no input"
        sel[o] = (pick[o] == NI) ? '0 : (NI'(1) << pick[o]);
      end
      @(posedge clk);
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (pick[o] == NI) begin
          if (out_valid[o] || out_flit[o] != '0) begin failures++; $display("FAIL: idle output %0d", o); end
        end else if (!out_valid[o] || out_flit[o] != in_flit[pick[o]]) begin
          failures++; $display("FAIL: output %0d does not carry input %0d", o, pick[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
