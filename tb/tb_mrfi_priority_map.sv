// tb_mrfi_priority_map -- self-checking test of the priority table.
//
// Checks the reset order, that static mode holds it, that rotary mode moves
// the highest-priority node to the lowest priority on every step and nowhere
// else, that a loaded permutation wins over rotation, and that node_prio is
// always the inverse of prio_map, against a model kept in the testbench.
module tb_mrfi_priority_map;
  localparam int K = 5;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  mrfi_pkg::prio_mode_e mode;
  logic step, load_en;
  logic [2:0] load_map [K];
  logic [2:0] prio_map [K];
  logic [2:0] node_prio [K];
  int model [K];

  mrfi_priority_map #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare(input string what);
    bit ok;
    ok = 1;
    for (int i = 0; i < K; i++) begin
      if (int'(prio_map[i]) != model[i]) ok = 0;
      if (int'(node_prio[model[i]]) != i) ok = 0;
    end
    check(ok, what);
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = mrfi_pkg::PRIO_STATIC; step = 0; load_en = 0;
    for (int i = 0; i < K; i++) load_map[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < K; i++) model[i] = i;
    #1 compare("reset order");
    step = 1;
    repeat (3) @(posedge clk);
    #1 compare("static mode keeps order");
    mode = mrfi_pkg::PRIO_ROTARY;
    @(posedge clk); #1;
    check(prio_map[0] == 1 && prio_map[K-1] == 0 && node_prio[0] == 3'(K-1), "one rotation: node 0 last");
    model = '{1, 2, 3, 4, 0};
    compare("one rotation");
    for (int t = 0; t < 300; t++) begin
      int tmp, j;
      step    = ($urandom_range(1, 0) == 1);
      mode    = ($urandom_range(1, 0) == 1) ? mrfi_pkg::PRIO_ROTARY : mrfi_pkg::PRIO_STATIC;
      load_en = ($urandom_range(9, 0) == 0);
      for (int i = 0; i < K; i++) load_map[i] = 3'(i);
      for (int i = K - 1; i > 0; i--) begin
        j = $urandom_range(i, 0);
        tmp = int'(load_map[i]); load_map[i] = load_map[j]; load_map[j] = 3'(tmp);
      end
      @(posedge clk);
      if (load_en) for (int i = 0; i < K; i++) model[i] = int'(load_map[i]);
      else if (step && mode == mrfi_pkg::PRIO_ROTARY) begin
        tmp = model[0];
        for (int i = 0; i < K - 1; i++) model[i] = model[i + 1];
        model[K - 1] = tmp;
      end
      #1 compare($sformatf("random step %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
