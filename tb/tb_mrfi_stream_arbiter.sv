// tb_mrfi_stream_arbiter -- self-checking test of the stream-arbitration
// algorithm.
//
// Directed cases: the six-band allocation with three admitted pairs (the pair
// with one pair ahead of it gets bands 2 and 5), and both arbitration cycles
// of the four-node example (cycle 0: n1 -> n2 gets all four bands, n3 loses;
// cycle 1: n3 -> n2 gets bands 1 and 3, n4 -> n1 gets bands 2 and 4).
// Random cases compare every node of an 8-node, 5-band arbiter against a
// reference written from the algorithm in node-indexed form, with random
// priority permutations and flow-control bits, so more pairs than bands are
// often requested.
module tb_mrfi_stream_arbiter;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- 4 nodes, 6 bands ----------------
  logic [3:0] s6 [4];
  logic [1:0] pm4 [4];
  logic [1:0] id6, pr6;
  logic [5:0] tx6, rx6;
  logic       tg6, rg6;
  logic [1:0] src6;
  logic [2:0] q6, pt6, pr6o;
  mrfi_stream_arbiter #(.K(4), .M(6)) u6 (
    .stream(s6), .prio_map(pm4), .node_id(id6), .my_prio(pr6),
    .tx_ch(tx6), .rx_ch(rx6), .tx_grant(tg6), .rx_grant(rg6), .rx_src(src6),
    .q(q6), .p_t(pt6), .p_r(pr6o));

  // ---------------- 4 nodes, 4 bands (worked example) ----------------
  logic [3:0] s4 [4];
  logic [1:0] id4, pr4;
  logic [3:0] tx4, rx4;
  logic       tg4, rg4;
  logic [1:0] src4;
  logic [2:0] q4, pt4, pr4o;
  mrfi_stream_arbiter #(.K(4), .M(4)) u4 (
    .stream(s4), .prio_map(pm4), .node_id(id4), .my_prio(pr4),
    .tx_ch(tx4), .rx_ch(rx4), .tx_grant(tg4), .rx_grant(rg4), .rx_src(src4),
    .q(q4), .p_t(pt4), .p_r(pr4o));

  // ---------------- 8 nodes, 5 bands, random ----------------
  localparam int RK = 8, RM = 5;
  logic [4:0] sr [RK];
  logic [2:0] pmr [RK];
  logic [2:0] idr, prr;
  logic [4:0] txr, rxr;
  logic       tgr, rgr;
  logic [2:0] srcr;
  logic [2:0] qr, ptr, prro;
  mrfi_stream_arbiter #(.K(RK), .M(RM)) ur (
    .stream(sr), .prio_map(pmr), .node_id(idr), .my_prio(prr),
    .tx_ch(txr), .rx_ch(rxr), .tx_grant(tgr), .rx_grant(rgr), .rx_src(srcr),
    .q(qr), .p_t(ptr), .p_r(prro));

  // Reference: the algorithm with node-indexed arrays, allocation by modulo.
  function automatic void ref_arb(input int fc_n[RK], input int int_n[RK], input int dst_n[RK],
                                  input int pmap[RK], input int me,
                                  output int tx, output int rx, output int src, output int qq);
    int fcw[RK];
    int pt, prx, i, c, ptv, prv;
    fcw = fc_n; qq = 0; ptv = 0; prv = 0; pt = 0; prx = 0; src = 0;
    for (i = 0; i < RK; i++) begin
      int n;
      n = pmap[i];
      if (int_n[n] == 1 && fcw[dst_n[n]] == 0 && qq < RM) begin
        fcw[dst_n[n]] = 1;
        if (n == me) begin pt = qq; ptv = 1; end
        if (dst_n[n] == me) begin prx = qq; prv = 1; src = n; end
        qq++;
      end
    end
    tx = 0; rx = 0;
    for (c = 1; c <= RM; c++) begin
      if (ptv != 0 && c >= pt + 1 && (c - pt - 1) % qq == 0) tx |= 1 << (c - 1);
      if (prv != 0 && c >= prx + 1 && (c - prx - 1) % qq == 0) rx |= 1 << (c - 1);
    end
  endfunction

  int wd_cycles = 0;
  initial begin : watchdog
    repeat (200000) #1 wd_cycles++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) pm4[i] = 2'(i);

    // Six bands, three pairs: 0->3, 1->0, 2->1, node 3 idle. Node 1 has p=1.
    s6[0] = 4'b0111; s6[1] = 4'b0100; s6[2] = 4'b0101; s6[3] = 4'b0000;
    id6 = 2'd1; pr6 = 2'd1; #1;
    check(q6 == 3 && pt6 == 1 && tg6, "6-band: q=3, p=1");
    check(tx6 == 6'b010010, $sformatf("6-band: node with p=1 gets bands 2 and 5 (got %b)", tx6));
    check(rg6 && rx6 == 6'b100100 && src6 == 2'd2, "6-band: node 1 receives from node 2 (p_r=2) on bands 3,6");
    id6 = 2'd0; pr6 = 2'd0; #1;
    check(tx6 == 6'b001001 && rx6 == 6'b010010 && src6 == 2'd1, "6-band: node 0 TX 1,4 RX 2,5");
    id6 = 2'd2; pr6 = 2'd2; #1;
    check(tx6 == 6'b100100 && !rg6 && rx6 == 0, "6-band: node 2 TX 3,6, no RX");

    // Example, cycle 0: n1 0101, n2 0000, n3 0101, n4 0000.
    s4[0] = 4'b0101; s4[1] = 4'b0000; s4[2] = 4'b0101; s4[3] = 4'b0000;
    id4 = 0; pr4 = 0; #1;
    check(q4 == 1 && tg4 && tx4 == 4'b1111 && rx4 == 0, "cycle 0: n1 sends on all four bands");
    id4 = 1; pr4 = 1; #1;
    check(rg4 && rx4 == 4'b1111 && src4 == 0 && tx4 == 0, "cycle 0: n2 listens on all four bands to n1");
    id4 = 2; pr4 = 2; #1;
    check(!tg4 && tx4 == 0 && rx4 == 0, "cycle 0: n3 loses");
    id4 = 3; pr4 = 3; #1;
    check(tx4 == 0 && rx4 == 0, "cycle 0: n4 idle");
    // Cycle 1: n1 0000, n2 0000, n3 0101, n4 0100.
    s4[0] = 4'b0000; s4[1] = 4'b0000; s4[2] = 4'b0101; s4[3] = 4'b0100;
    id4 = 2; pr4 = 2; #1;
    check(q4 == 2 && pt4 == 0 && tx4 == 4'b0101, "cycle 1: n3 q=2 p=0 bands 1,3");
    id4 = 3; pr4 = 3; #1;
    check(pt4 == 1 && tx4 == 4'b1010, "cycle 1: n4 p=1 bands 2,4");
    id4 = 1; pr4 = 1; #1;
    check(rx4 == 4'b0101 && src4 == 2, "cycle 1: n2 listens on bands 1,3 to n3");
    id4 = 0; pr4 = 0; #1;
    check(rx4 == 4'b1010 && src4 == 3 && tx4 == 0, "cycle 1: n1 listens on bands 2,4 to n4");
    // A busy destination (fc=1) admits nobody.
    s4[1] = 4'b1000; id4 = 2; pr4 = 2; #1;
    check(!tg4 && tx4 == 0 && q4 == 1, "busy destination refuses n3");

    // Random.
    for (int t = 0; t < 4000; t++) begin
      int fc_n[RK], int_n[RK], dst_n[RK], pmap[RK], ex_tx, ex_rx, ex_src, ex_q, me, tmp, j;
      for (int i = 0; i < RK; i++) pmap[i] = i;
      for (int i = RK - 1; i > 0; i--) begin
        j = $urandom_range(i, 0); tmp = pmap[i]; pmap[i] = pmap[j]; pmap[j] = tmp;
      end
      for (int n = 0; n < RK; n++) begin
        fc_n[n]  = int'($urandom_range(3, 0) == 0);
        int_n[n] = int'($urandom_range(2, 0) != 0);
        dst_n[n] = $urandom_range(RK - 1, 0);
      end
      for (int i = 0; i < RK; i++) begin
        int n;
        n = pmap[i];
        pmr[i] = 3'(n);
        sr[i]  = {1'(fc_n[n]), 1'(int_n[n]), 3'(dst_n[n])};
      end
      me = $urandom_range(RK - 1, 0);
      idr = 3'(me);
      for (int i = 0; i < RK; i++) if (pmap[i] == me) prr = 3'(i);
      #1;
      ref_arb(fc_n, int_n, dst_n, pmap, me, ex_tx, ex_rx, ex_src, ex_q);
      check(int'(txr) == ex_tx && int'(rxr) == ex_rx && int'(qr) == ex_q &&
            (!rgr || int'(srcr) == ex_src),
            $sformatf("random %0d: tx %b/%b rx %b/%b q %0d/%0d", t, txr, 5'(ex_tx), rxr, 5'(ex_rx), qr, ex_q));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
