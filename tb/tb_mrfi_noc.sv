// tb_mrfi_noc -- end-to-end test of the MRFI NoC.
//
// Part 1 replays the four-node, four-band worked example cycle by cycle
// (node IDs 0..3 stand for n1..n4, static priority, n1 highest):
//   cycle 0: n1 has 4 flits for n2, n3 has 2 flits for n2;
//            vectors 0101 0000 0101 0000, n3 loses;
//   cycle 1: n1 sends 4 flits on all four bands; n4 now has 2 flits for n1;
//            vectors 0000 0000 0101 0100;
//   cycle 2: n3 -> n2 on bands 1 and 3, n4 -> n1 on bands 2 and 4.
// It checks the vectors, the bands, the flits delivered, two transfer cycles
// for eight flits (100 % of the band-cycles used) and a longest wait of one
// cycle.
// Part 2 runs random traffic on 8 nodes sharing 4 data bands with small
// buffers and rotary priority switched on midway (see mrfi_traffic), so lost
// arbitrations, shared and multi-band grants, flow control and more requests
// than bands all occur.
module tb_mrfi_noc;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- part 1: worked example ----------------
  localparam int EK = 4, EM = 4;
  mrfi_pkg::prio_mode_e e_mode;
  logic       e_load_en;
  logic [1:0] e_load_map [EK];
  logic [2:0] e_in_cnt [EK], e_out_cnt [EK], e_out_pop [EK];
  logic [1:0] e_in_dest [EK][EM], e_out_src [EK][EM];
  logic [31:0] e_in_data [EK][EM], e_out_data [EK][EM];
  logic [EK-1:0] e_in_ready, e_lost;
  logic [3:0] e_sub [EK], e_stream [EK];
  logic [EM-1:0] e_tx [EK], e_rx [EK], e_busy;
  logic e_coll;

  mrfi_noc #(.K(EK), .M(EM), .FW(32)) u_ex (
    .clk, .rst_n, .prio_mode(e_mode), .prio_load_en(e_load_en), .prio_load_map(e_load_map),
    .in_cnt(e_in_cnt), .in_dest(e_in_dest), .in_data(e_in_data), .in_ready(e_in_ready),
    .out_cnt(e_out_cnt), .out_src(e_out_src), .out_data(e_out_data), .out_pop(e_out_pop),
    .sub_vec(e_sub), .full_stream(e_stream), .tx_ch(e_tx), .rx_ch(e_rx), .lost(e_lost),
    .data_busy(e_busy), .collision(e_coll));

  // ---------------- part 2: random traffic ----------------
  localparam int RK = 8, RM = 4;
  mrfi_pkg::prio_mode_e r_mode;
  logic       r_load_en;
  logic [2:0] r_load_map [RK];
  logic [2:0] r_in_cnt [RK], r_out_cnt [RK], r_out_pop [RK];
  logic [2:0] r_in_dest [RK][RM], r_out_src [RK][RM];
  logic [31:0] r_in_data [RK][RM], r_out_data [RK][RM];
  logic [RK-1:0] r_in_ready, r_lost;
  logic [4:0] r_sub [RK], r_stream [RK];
  logic [RM-1:0] r_tx [RK], r_rx [RK], r_busy;
  logic r_coll, r_done;
  int r_checks, r_failures, r_cycles;

  mrfi_noc #(.K(RK), .M(RM), .FW(32), .TXQ_DEPTH(8), .RXQ_DEPTH(8)) u_rnd (
    .clk, .rst_n, .prio_mode(r_mode), .prio_load_en(r_load_en), .prio_load_map(r_load_map),
    .in_cnt(r_in_cnt), .in_dest(r_in_dest), .in_data(r_in_data), .in_ready(r_in_ready),
    .out_cnt(r_out_cnt), .out_src(r_out_src), .out_data(r_out_data), .out_pop(r_out_pop),
    .sub_vec(r_sub), .full_stream(r_stream), .tx_ch(r_tx), .rx_ch(r_rx), .lost(r_lost),
    .data_busy(r_busy), .collision(r_coll));

  mrfi_traffic #(.K(RK), .M(RM), .FW(32), .N_FLITS(60), .DRAIN_PCT(50), .ROTATE_AT(80)) u_gen (
    .clk, .rst_n, .prio_mode(r_mode), .prio_load_en(r_load_en), .prio_load_map(r_load_map),
    .in_cnt(r_in_cnt), .in_dest(r_in_dest), .in_data(r_in_data), .in_ready(r_in_ready),
    .out_cnt(r_out_cnt), .out_src(r_out_src), .out_data(r_out_data), .out_pop(r_out_pop),
    .sub_vec(r_sub), .tx_ch(r_tx), .lost(r_lost), .collision(r_coll),
    .done(r_done), .checks(r_checks), .failures(r_failures), .cycles(r_cycles));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + r_checks, failures + r_failures);
    $finish;
  end

  task automatic step();
    @(posedge clk);
    @(negedge clk);
    #1;
  endtask

  task automatic queue(input int n, input int cnt, input int dest, input int base);
    e_in_cnt[n] = 3'(cnt);
    for (int k = 0; k < cnt; k++) begin
      e_in_dest[n][k] = 2'(dest);
      e_in_data[n][k] = 32'(base + k);
    end
  endtask

  int xfer_cycles = 0, flits_moved = 0;
  always @(posedge clk) if (rst_n && e_busy != '0) begin
    xfer_cycles++;
    flits_moved += $countones(e_busy);
  end

  initial begin
    e_mode = mrfi_pkg::PRIO_STATIC; e_load_en = 0;
    for (int n = 0; n < EK; n++) begin
      e_load_map[n] = 2'(n); e_in_cnt[n] = '0; e_out_pop[n] = '0;
      for (int k = 0; k < EM; k++) begin e_in_dest[n][k] = '0; e_in_data[n][k] = '0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); #1;
    queue(0, 4, 1, 32'h100);   // n1: four flits for n2
    queue(2, 2, 1, 32'h300);   // n3: two flits for n2
    step();                    // ---- cycle 0 ----
    e_in_cnt[0] = 0; e_in_cnt[2] = 0;
    check(e_sub[0] == 4'b0101 && e_sub[1] == 4'b0000 && e_sub[2] == 4'b0101 && e_sub[3] == 4'b0000,
          $sformatf("cycle 0 vectors %b %b %b %b", e_sub[0], e_sub[1], e_sub[2], e_sub[3]));
    check(e_lost == 4'b0100, "cycle 0: n3 loses to n1");
    check(e_busy == '0, "cycle 0: no data yet");
    queue(3, 2, 0, 32'h400);   // n4 requests from cycle 1: two flits for n1
    step();                    // ---- cycle 1 ----
    e_in_cnt[3] = 0;
    check(e_sub[0] == 4'b0000 && e_sub[1] == 4'b0000 && e_sub[2] == 4'b0101 && e_sub[3] == 4'b0100,
          $sformatf("cycle 1 vectors %b %b %b %b", e_sub[0], e_sub[1], e_sub[2], e_sub[3]));
    check(e_tx[0] == 4'b1111 && e_rx[1] == 4'b1111 && e_busy == 4'b1111, "cycle 1: n1 -> n2 on all bands");
    check(e_lost == '0, "cycle 1: nobody loses");
    step();                    // ---- cycle 2 ----
    check(e_tx[2] == 4'b0101 && e_rx[1] == 4'b0101, "cycle 2: n3 -> n2 on bands 1,3");
    check(e_tx[3] == 4'b1010 && e_rx[0] == 4'b1010, "cycle 2: n4 -> n1 on bands 2,4");
    check(e_busy == 4'b1111, "cycle 2: all bands busy");
    check(e_sub[0] == 0 && e_sub[1] == 0 && e_sub[2] == 0 && e_sub[3] == 0, "cycle 2: all vectors 0000");
    step();                    // ---- cycle 3 ----
    check(e_busy == '0, "cycle 3: transfer finished");
    check(xfer_cycles == 2 && flits_moved == 8, $sformatf("8 flits in 2 cycles (got %0d in %0d)", flits_moved, xfer_cycles));
    check(flits_moved * 100 / (xfer_cycles * EM) == 100, "bandwidth utilization 100%");
    check(e_out_cnt[1] == 4 && e_out_cnt[0] == 2, "flits waiting at n2 and n1");
    check(e_out_data[1][0] == 32'h100 && e_out_data[1][3] == 32'h103 && e_out_src[1][0] == 2'd0, "n2 got n1's flits in order");
    check(e_out_data[0][0] == 32'h400 && e_out_data[0][1] == 32'h401 && e_out_src[0][1] == 2'd3, "n1 got n4's flits");
    e_out_pop[1] = 4;
    step();
    e_out_pop[1] = 0;
    check(e_out_cnt[1] == 2 && e_out_data[1][0] == 32'h300 && e_out_data[1][1] == 32'h301 &&
          e_out_src[1][0] == 2'd2, "n2 then has n3's flits");

    wait (r_done);
    $display("example: %0d flits in %0d transfer cycles", flits_moved, xfer_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks + r_checks, failures + r_failures);
    $finish;
  end
endmodule
