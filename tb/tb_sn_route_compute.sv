// tb_sn_route_compute: self-checking test of route computation.
// Reference values are worked out here without the package's graph functions:
//  - router [0|1,1] (id 0) of the q = 5 network is wired to [0|1,2], [0|1,5] and to
//    [1|m,1] for m = 1..5 (ids 1, 4, 25, 30, 35, 40, 45), its ports 0..6 in that order;
//  - for every router pair of the q = 5 network (all 50 routers instantiated) the route
//    reaches the destination in at most two hops of a graph built here from integer
//    arithmetic mod 5 with X = {1,4}, X' = {2,3};
//  - for four routers of the q = 9 network the same two-hop property holds with
//    X = {1,x,2,u} and X' = {v,y,z,w} as listed for F9;
//  - local destinations go to port K_NET + (node mod p); output VC is 0 from a node and
//    1 from another router; ejection uses VC0;
//  - the generator sets X, X' tested as squares / non-squares match the even / odd
//    powers of the primitive element, for q = 5 and q = 9.
module tb_sn_route_compute;
  import sn_pkg::*;
  localparam int Q5 = 5, NR5 = 50, K5 = 7, P5 = 4;
  localparam int Q9 = 9, NR9 = 162, K9 = 13, P9 = 8;
  localparam int IDS9 [4] = '{0, 40, 81, 161};
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] dst5;
  logic              fn5;
  logic [3:0]        port5 [NR5];
  logic [VC_W-1:0]   vc5   [NR5];
  for (genvar r = 0; r < NR5; r++) begin : g5
    sn_route_compute #(.Q(Q5), .P_CONC(P5), .ID(r)) u (.dst_node(dst5), .from_node(fn5), .out_port(port5[r]), .out_vc(vc5[r]));
  end
  logic [NODE_W-1:0] dst9;
  logic [4:0]        port9 [4];
  logic [VC_W-1:0]   vc9   [4];
  for (genvar k = 0; k < 4; k++) begin : g9
    sn_route_compute #(.Q(Q9), .P_CONC(P9), .ID(IDS9[k])) u (.dst_node(dst9), .from_node(1'b0), .out_port(port9[k]), .out_vc(vc9[k]));
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // independent graph model
  int add9 [9][9], mul9 [9][9];
  function automatic int fadd(int q, int a, int b); return q == 9 ? add9[a][b] : (a + b) % q; endfunction
  function automatic int fmul(int q, int a, int b); return q == 9 ? mul9[a][b] : (a * b) % q; endfunction
  function automatic int fsub(int q, int a, int b);
    for (int c = 0; c < q; c++) if (fadd(q, b, c) == a) return c;
    return -1;
  endfunction
  function automatic bit inx(int q, int e, bit prime);
    if (q == 5) return prime ? (e == 2 || e == 3) : (e == 1 || e == 4);
    // F9 order 0 1 2 u v w x y z: X = {1,x,2,u} = {1,6,2,3}, X' = {v,y,z,w} = {4,7,8,5}
    return prime ? (e == 4 || e == 7 || e == 8 || e == 5) : (e == 1 || e == 6 || e == 2 || e == 3);
  endfunction
  function automatic bit adj(int q, int r1, int r2);
    int g1 = r1 / (q*q), a1 = (r1 / q) % q, b1 = r1 % q;
    int g2 = r2 / (q*q), a2 = (r2 / q) % q, b2 = r2 % q;
    if (r1 == r2) return 0;
    if (g1 == g2) return a1 == a2 && inx(q, fsub(q, b1, b2), g1 == 1);
    if (g1 == 0) return b1 == fadd(q, fmul(q, a2, a1), b2);
    return b2 == fadd(q, fmul(q, a1, a2), b1);
  endfunction
  function automatic int nbr(int q, int r, int j);
    int n = 0;
    for (int s = 0; s < 2*q*q; s++) if (adj(q, r, s)) begin if (n == j) return s; n++; end
    return -1;
  endfunction

  initial begin
    int expected0 [7] = '{1, 4, 25, 30, 35, 40, 45};
    string s9 [9] = '{"0 1 2 u v w x y z", "1 2 0 v w u y z x", "2 0 1 w u v z x y", "u v w x y z 0 1 2",
                      "v w u y z x 1 2 0", "w u v z x y 2 0 1", "x y z 0 1 2 u v w", "y z x 1 2 0 v w u",
                      "z x y 2 0 1 w u v"};
    string m9 [9] = '{"0 0 0 0 0 0 0 0 0", "0 1 2 u v w x y z", "0 2 1 x z y u w v", "0 u x 2 w z 1 v y",
                      "0 v z w x 1 y 2 u", "0 w y z 1 u v x 2", "0 x u 1 y v 2 z w", "0 y w v 2 x z u 1",
                      "0 z v y u 2 w 1 x"};
    string el = "012uvwxyz";
    for (int a = 0; a < 9; a++)
      for (int b = 0; b < 9; b++)
        for (int e = 0; e < 9; e++) begin
          if (s9[a][2*b] == el[e]) add9[a][b] = e;
          if (m9[a][2*b] == el[e]) mul9[a][b] = e;
        end

    // 1) wiring of router [0|1,1] as printed in the SN-S layout figure
    fn5 = 1'b1;
    for (int j = 0; j < 7; j++) begin
      dst5 = NODE_W'(expected0[j] * P5); #1;
      check(port5[0] == 4'(j), $sformatf("router 0 -> router %0d: port %0d, expected %0d", expected0[j], port5[0], j));
      check(vc5[0] == 0, "first hop from a node uses VC0");
    end
    // 2) every pair of the q = 5 network within two hops
    for (int d = 0; d < NR5; d++) begin
      for (int l = 0; l < P5; l++) begin
        dst5 = NODE_W'(d * P5 + l); fn5 = 1'b0; #1;
        for (int r = 0; r < NR5; r++) begin
          if (r == d) begin
            check(port5[r] == 4'(K5 + l) && vc5[r] == 0, "local destination ejects on its node port, VC0");
          end else if (l == 0) begin
            int n;
            check(port5[r] < K5, "network destination uses a network port");
            check(vc5[r] == 1, "packet from another router continues on VC1");
            n = nbr(Q5, r, port5[r]);
            check(n == d || adj(Q5, n, d), $sformatf("route %0d->%0d via %0d not minimal", r, d, n));
          end
        end
      end
    end
    // 3) q = 9 (non-prime field) for four routers
    for (int d = 0; d < NR9; d++) begin
      dst9 = NODE_W'(d * P9 + 3); #1;
      for (int k = 0; k < 4; k++) begin
        if (IDS9[k] == d) check(port9[k] == 5'(K9 + 3), "q=9 local ejection port");
        else begin
          int n;
          n = nbr(Q9, IDS9[k], port9[k]);
          check(port9[k] < K9 && n >= 0, "q=9 network port");
          check(n == d || adj(Q9, n, d), $sformatf("q=9 route %0d->%0d via %0d not minimal", IDS9[k], d, n));
        end
      end
    end
    // degree of the reference graphs
    begin
      int deg = 0;
      for (int s = 0; s < NR9; s++) deg += adj(Q9, 81, s);
      check(deg == K9, $sformatf("q=9 reference graph degree %0d", deg));
    end
    // X / X' as squares / non-squares equals X / X' as even / odd powers of xi
    for (int q = 5; q <= 9; q += 4)
      for (int e = 0; e < q; e++)
        for (int o = 0; o < 2; o++)
          check(in_gen_set(q, e, o[0]) == in_gen_set_pow(q, e, o[0]),
                $sformatf("q=%0d element %0d: square test and power list disagree", q, e));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
