// tb_mrfi_noc_full -- mrfi_noc at its default size (16 nodes, 16 data
// bands, 32-bit flits, 32-entry buffers) under random traffic from
// mrfi_traffic: every node sends 80 flits in bursts to random destinations,
// receivers drain slowly so flow control acts, and rotary priority is
// switched on after 100 cycles. The scoreboard checks delivery, order,
// source tags, that granted bands are always all or none, and that lost
// arbitrations, multi-band grants, shared bands and flow control all occur.
module tb_mrfi_noc_full;
  localparam int K = mrfi_pkg::K_NODES, M = mrfi_pkg::M_CHANNELS, FW = mrfi_pkg::FLIT_W;
  localparam int IDW = $clog2(K), CNTW = $clog2(M + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mrfi_pkg::prio_mode_e prio_mode;
  logic prio_load_en;
  logic [IDW-1:0] prio_load_map [K];
  logic [CNTW-1:0] in_cnt [K], out_cnt [K], out_pop [K];
  logic [IDW-1:0] in_dest [K][M], out_src [K][M];
  logic [FW-1:0] in_data [K][M], out_data [K][M];
  logic [K-1:0] in_ready, lost;
  logic [IDW+1:0] sub_vec [K], full_stream [K];
  logic [M-1:0] tx_ch [K], rx_ch [K], data_busy;
  logic collision, done;
  int checks, failures, cycles;

  mrfi_noc dut (.*);

  mrfi_traffic #(.K(K), .M(M), .FW(FW), .N_FLITS(80), .DRAIN_PCT(30), .ROTATE_AT(100)) u_gen (
    .clk, .rst_n, .prio_mode, .prio_load_en, .prio_load_map,
    .in_cnt, .in_dest, .in_data, .in_ready, .out_cnt, .out_src, .out_data, .out_pop,
    .sub_vec, .tx_ch, .lost, .collision, .done, .checks, .failures, .cycles);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
