// tb_mrfi_channel -- self-checking test of the multiband link model.
//
// Three transmitters share four bands. Each cycle a random owner (or none) is
// picked per band; every band must then show exactly its owner's symbol and a
// valid flag, and idle bands must read as not valid. A collision on one band
// is set up between clock edges (so the model's assertion, sampled at the
// edge, stays quiet) to check the collision flag.
module tb_mrfi_channel;
  localparam int N = 3, B = 4, W = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [B-1:0] tx_en [N];
  logic [W-1:0] tx_data [N][B];
  logic [B-1:0] rx_valid, collision;
  logic [W-1:0] rx_data [B];
  int owner [B];

  mrfi_channel #(.N_TX(N), .BANDS(B), .W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < N; n++) tx_en[n] = '0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int n = 0; n < N; n++) begin
        tx_en[n] = '0;
        for (int b = 0; b < B; b++) tx_data[n][b] = W'($urandom);
      end
      for (int b = 0; b < B; b++) begin
        owner[b] = $urandom_range(N, 0) - 1;  // -1: idle band
        if (owner[b] >= 0) tx_en[owner[b]][b] = 1'b1;
      end
      #1;
      for (int b = 0; b < B; b++) begin
        if (owner[b] < 0) check(!rx_valid[b] && rx_data[b] == '0, $sformatf("t%0d band %0d idle", t, b));
        else check(rx_valid[b] && rx_data[b] == tx_data[owner[b]][b] && !collision[b],
                   $sformatf("t%0d band %0d from tx %0d", t, b, owner[b]));
      end
    end
    // transient collision on band 2
    @(negedge clk);
    for (int n = 0; n < N; n++) tx_en[n] = '0;
    tx_en[0][2] = 1'b1; tx_en[1][2] = 1'b1;
    #1 check(collision == 4'b0100 && rx_valid == 4'b0100, "collision flagged on band 2");
    tx_en[1][2] = 1'b0;
    #1 check(collision == '0, "collision cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
