// tb_mrfi_node -- self-checking test of one node, the testbench playing the
// rest of the network (4 nodes, 4 data bands, the node under test is node 2,
// static priority, so it announces in arbitration band 2).
//
// Sequence, one check group per cycle:
//   * two flits queued for node 1 -> sub-stream vector 0101 next cycle;
//   * node 0 (higher priority) also asks for node 1 -> the node loses and
//     sends nothing in the following cycle;
//   * alone in the stream -> the next cycle it holds all four bands, drives
//     its two flits on bands 1 and 2 in order, and already announces 0000;
//   * node 3 asks for node 2 behind another pair (q=2, p=1) -> the next cycle
//     the node listens to bands 2 and 4 only, stores those flits tagged with
//     source 3, in band order;
//   * two full cycles of incoming flits fill the 8-entry RX buffer -> the
//     flow-control bit goes to 1, and back to 0 once the host drains it.
module tb_mrfi_node;
  localparam int K = 4, M = 4, FW = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  mrfi_pkg::prio_mode_e prio_mode;
  logic prio_load_en;
  logic [1:0] prio_load_map [K];
  logic [2:0] in_cnt, out_cnt, out_pop;
  logic [1:0] in_dest [M];
  logic [FW-1:0] in_data [M];
  logic in_ready;
  logic [1:0] out_src [M];
  logic [FW-1:0] out_data [M];
  logic [3:0] sub_vec, others [K], full_stream [K];
  logic [1:0] arb_band;
  logic [M-1:0] dtx_en, drx_valid, tx_ch_q, rx_ch_q;
  logic [FW-1:0] dtx_data [M], drx_data [M];
  logic lost;

  mrfi_node #(.K(K), .M(M), .FW(FW), .TXQ_DEPTH(8), .RXQ_DEPTH(8), .NODE_ID(2)) dut (.*);

  always_comb for (int b = 0; b < K; b++) full_stream[b] = (b == int'(arb_band)) ? sub_vec : others[b];

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic step();
    @(posedge clk);
    @(negedge clk);
    #1;
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prio_mode = mrfi_pkg::PRIO_STATIC; prio_load_en = 0;
    for (int i = 0; i < K; i++) begin prio_load_map[i] = 2'(i); others[i] = '0; end
    in_cnt = 0; out_pop = 0; drx_valid = '0;
    for (int k = 0; k < M; k++) begin in_dest[k] = '0; in_data[k] = '0; drx_data[k] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); #1;
    check(sub_vec == 4'b0000 && arb_band == 2'd2, "idle vector in band 2");

    // queue two flits for node 1
    in_cnt = 2; in_dest[0] = 1; in_dest[1] = 1; in_data[0] = 8'hA0; in_data[1] = 8'hA1;
    check(in_ready, "TX queue ready");
    step();
    in_cnt = 0;
    check(sub_vec == 4'b0101, $sformatf("announces 0101 (got %b)", sub_vec));
    others[0] = 4'b0101;  // node 0 wants node 1 too, with higher priority
    #1 check(lost, "loses to node 0");
    step();
    check(tx_ch_q == '0 && dtx_en == '0, "sends nothing after losing");
    others[0] = 4'b0000;
    #1 check(!lost, "alone in the stream: admitted");
    step();
    check(tx_ch_q == 4'b1111, "holds all four bands");
    check(dtx_en == 4'b0011 && dtx_data[0] == 8'hA0 && dtx_data[1] == 8'hA1,
          $sformatf("two flits on bands 1,2 in order (en %b)", dtx_en));
    check(sub_vec == 4'b0000, "no longer interested while sending its last flits");
    step();
    check(dtx_en == '0 && sub_vec == 4'b0000, "queue empty");

    // node 0 -> node 0 ahead of node 3 -> node 2: q=2, p_r=1
    others[0] = 4'b0100; others[3] = 4'b0110;
    step();
    others[0] = 4'b0000; others[3] = 4'b0000;
    check(rx_ch_q == 4'b1010, $sformatf("listens on bands 2,4 (got %b)", rx_ch_q));
    drx_valid = 4'b1111;
    for (int c = 0; c < M; c++) drx_data[c] = 8'hB0 + 8'(c);
    step();
    drx_valid = '0;
    check(out_cnt == 2 && out_src[0] == 2'd3 && out_src[1] == 2'd3 &&
          out_data[0] == 8'hB1 && out_data[1] == 8'hB3, "stored bands 2,4 from node 3");
    out_pop = 2;
    step();
    out_pop = 0;
    check(out_cnt == 0 && sub_vec[3] == 1'b0, "drained, fc=0");

    // two cycles of four flits from node 1 fill the 8-entry buffer
    others[1] = 4'b0110;
    step();
    check(rx_ch_q == 4'b1111, "listens on all bands");
    drx_valid = 4'b1111;
    for (int c = 0; c < M; c++) drx_data[c] = 8'hC0 + 8'(c);
    #1 check(sub_vec[3] == 1'b0, "room for one more cycle: fc=0");
    step();
    for (int c = 0; c < M; c++) drx_data[c] = 8'hD0 + 8'(c);
    #1 check(sub_vec[3] == 1'b1, "buffer full after this cycle: fc=1");
    others[1] = 4'b0000;
    step();
    drx_valid = '0;
    check(out_cnt == 4 && out_data[0] == 8'hC0 && out_data[3] == 8'hC3, "first four flits in order");
    check(sub_vec[3] == 1'b1, "still full: fc=1");
    out_pop = 4;
    step();
    check(out_data[0] == 8'hD0 && out_src[0] == 2'd1, "second cycle's flits");
    check(sub_vec[3] == 1'b0, "room again: fc=0");
    out_pop = 4;
    step();
    out_pop = 0;
    check(out_cnt == 0, "empty");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
