// sync_fifo: synchronous first-in first-out queue of DEPTH entries of type T.
// Write when wr && !full, read when rd && !empty; both may happen in one cycle.  The
// head entry is visible on rdata while !empty (show-ahead).  A write into an empty
// queue is visible one cycle later.  Used for the network interface queues.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 20,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr,
  input  T      wdata,
  output logic  full,
  input  logic  rd,
  output T      rdata,
  output logic  empty,
  output logic [CW-1:0] count
);
  T              mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full  = (count == CW'(DEPTH));
  assign empty = (count == '0);
  assign rdata = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      logic do_w, do_r;
      do_w = wr && !full;
      do_r = rd && !empty;
      if (do_w) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_r) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CW'(do_w) - CW'(do_r);
    end
  end

  always_ff @(posedge clk) if (wr && !full) mem[wp] <= wdata;

endmodule
