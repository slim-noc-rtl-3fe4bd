// cbr_input_unit: input side of one central-buffer router port.
//
// Each VC has a single-flit staging register (the paper's per-VC I/O staging buffer that
// replaces a multi-flit edge buffer).  The link delivers one flit per cycle tagged with
// its VC; in_ready[v] is high when VC v's register is empty or is being read this cycle,
// so a VC can accept a new flit every cycle.  The register feeds the allocator, which
// reads it with deq[v].
//
// For a head flit in the register the unit runs route computation (sn_route_compute) and
// presents the output port, output VC and packet length; body flits follow the route the
// allocator latched for the head.
// Timing: a flit accepted on the clock edge is in the register for the following cycle,
// which is the first router cycle (allocation and switch traversal to the output buffer).
module cbr_input_unit
  import sn_pkg::*;
#(
  parameter int unsigned Q        = 5,
  parameter int unsigned P_CONC   = 4,
  parameter int unsigned ID       = 0,
  parameter int unsigned PORT     = 0,
  parameter int unsigned K_NET    = net_radix(Q),
  parameter int unsigned NPORT    = K_NET + P_CONC,
  parameter int unsigned PW       = $clog2(NPORT),
  parameter int unsigned NVC      = NUM_VC
) (
  input  logic            clk,
  input  logic            rst_n,
  input  link_t           in,
  output logic [NVC-1:0]  in_ready,
  output logic [NVC-1:0]  st_valid,
  output flit_t           st_flit  [NVC],
  output logic [PW-1:0]   rc_port  [NVC],   // route of the head flit in the register
  output logic [VC_W-1:0] rc_vc    [NVC],
  output logic [LEN_W-1:0] rc_len  [NVC],
  input  logic [NVC-1:0]  deq
);
  for (genvar v = 0; v < NVC; v++) begin : g_vc
    head_t hd;
    assign hd = head_t'(st_flit[v].data);
    assign in_ready[v] = !st_valid[v] || deq[v];
    assign rc_len[v]   = (hd.len == '0) ? LEN_W'(1) : hd.len;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st_valid[v] <= 1'b0;
        st_flit[v]  <= '0;
      end else begin
        if (deq[v]) st_valid[v] <= 1'b0;
        if (in.valid && int'(in.vc) == v) begin
          st_valid[v] <= 1'b1;
          st_flit[v]  <= in.flit;
        end
      end
    end

    sn_route_compute #(.Q(Q), .P_CONC(P_CONC), .ID(ID), .K_NET(K_NET), .NPORT(NPORT), .PW(PW)) u_rc (
      .dst_node (hd.dst),
      .from_node(PORT >= K_NET),
      .out_port (rc_port[v]),
      .out_vc   (rc_vc[v])
    );
  end

  a_in_ready: assert property (@(posedge clk) disable iff (!rst_n) in.valid |-> in_ready[in.vc]);
  a_deq_valid: assert property (@(posedge clk) disable iff (!rst_n) (deq & ~st_valid) == '0);

endmodule
