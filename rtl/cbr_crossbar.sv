// cbr_crossbar: the router's switch.
//
// N_IN input ports (each sends the one flit its staging VC won this cycle) are switched
// onto N_OUT outputs: the NPORT output ports plus, as the last output, the write port of
// the central buffer.  Each output has a one-hot select from the allocator; an output
// whose select is all zero carries no flit.  Output VCs are carried beside the flit.
// Purely combinational (switch traversal happens in the cycle of allocation).
module cbr_crossbar
  import sn_pkg::*;
#(
  parameter int unsigned N_IN  = 11,
  parameter int unsigned N_OUT = 12
) (
  input  flit_t            in_flit [N_IN],
  input  logic [N_IN-1:0]  sel     [N_OUT],   // one-hot input select per output
  output flit_t            out_flit[N_OUT],
  output logic [N_OUT-1:0] out_valid
);
  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      out_flit[o]  = '0;
      out_valid[o] = |sel[o];
      for (int i = 0; i < N_IN; i++)
        if (sel[o][i]) out_flit[o] = out_flit[o] | in_flit[i];
    end
  end
endmodule
