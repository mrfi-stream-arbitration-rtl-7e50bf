// tb_mrfi_flit_fifo -- self-checking test of the multi-flit buffer.
//
// A small instance (8 entries, up to 3 pushes and 4 pops per cycle) is driven
// with random legal push and pop counts, and head[], count and free are
// compared every cycle with a queue model. Filling to the top and draining to
// empty are both forced and counted.
module tb_mrfi_flit_fifo;
  localparam int DEPTH = 8, W = 8, NW = 3, NR = 4;
  int checks = 0, failures = 0, fulls = 0, empties = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] push_cnt;
  logic [W-1:0] push_data [NW];
  logic [2:0] pop_cnt;
  logic [W-1:0] head [NR];
  logic [3:0] count, free;
  logic [W-1:0] q [$];

  mrfi_flit_fifo #(.DEPTH(DEPTH), .W(W), .NW(NW), .NR(NR)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int np, nq, bias;
    logic [W-1:0] next;
    push_cnt = 0; pop_cnt = 0; next = 0;
    for (int k = 0; k < NW; k++) push_data[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      #1;
      // compare state at start of cycle
      begin
        bit ok;
        ok = (int'(count) == q.size()) && (int'(free) == DEPTH - q.size());
        for (int k = 0; k < NR; k++) if (k < q.size() && head[k] != q[k]) ok = 0;
        check(ok, $sformatf("cycle %0d: count %0d model %0d", t, count, q.size()));
      end
      if (q.size() == DEPTH) fulls++;
      if (q.size() == 0) empties++;
      bias = (t / 200) % 2;  // alternate filling and draining phases
      np = $urandom_range(NW, 0);
      nq = $urandom_range(NR, 0);
      if (bias == 0 && nq > 1) nq = nq - 2;
      if (bias == 1 && np > 0) np = np - 1;
      if (np > DEPTH - q.size()) np = DEPTH - q.size();
      if (nq > q.size()) nq = q.size();
      push_cnt = 2'(np);
      pop_cnt  = 3'(nq);
      for (int k = 0; k < NW; k++) begin
        push_data[k] = next + W'(k);
      end
      @(posedge clk);
      for (int k = 0; k < nq; k++) void'(q.pop_front());
      for (int k = 0; k < np; k++) q.push_back(next + W'(k));
      next = next + W'(np);
    end
    check(fulls > 0, "buffer was full at least once");
    check(empties > 0, "buffer was empty at least once");
    $display("full %0d times, empty %0d times", fulls, empties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
