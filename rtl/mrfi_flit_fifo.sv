// mrfi_flit_fifo -- circular flit buffer that takes and gives several flits
// per cycle.
//
// A node of the MRFI NoC may receive up to M flits in one cycle (one per data
// band it is tuned to) and may send up to M flits in one cycle, so both its
// TX queue and its RX buffer use this buffer. Up to NW flits are appended per
// cycle (push_cnt, taken from push_data[0..push_cnt-1] in order) and up to NR
// flits are removed from the head (pop_cnt). The first NR entries are always
// visible on head[], with count telling how many of them are valid.
//
// The scheme only names the RX buffer and its availability (the flow-control
// bit); the buffer organisation, depth and multi-port behaviour are this
// design's choices. DEPTH must be a power of two. Pushing more than free or
// popping more than count is a caller error and is caught by assertions.
//
// Timing: push and pop take effect at the clock edge; head[], count and free
// show the state at the start of the cycle (no bypass from push to head).
module mrfi_flit_fifo #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned W     = mrfi_pkg::FLIT_W,
  parameter int unsigned NW    = mrfi_pkg::M_CHANNELS,
  parameter int unsigned NR    = mrfi_pkg::M_CHANNELS + 1,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1),
  localparam int unsigned PWW  = $clog2(NW + 1),
  localparam int unsigned PRW  = $clog2(NR + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [PWW-1:0] push_cnt,
  input  logic [W-1:0]   push_data [NW],
  input  logic [PRW-1:0] pop_cnt,
  output logic [W-1:0]   head      [NR],
  output logic [CW-1:0]  count,
  output logic [CW-1:0]  free
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      rd_ptr <= rd_ptr + AW'(pop_cnt);
      wr_ptr <= wr_ptr + AW'(push_cnt);
      count  <= count + CW'(push_cnt) - CW'(pop_cnt);
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < NW; k++)
      if (k < int'(push_cnt)) mem[wr_ptr + AW'(k)] <= push_data[k];
  end

  always_comb begin
    for (int k = 0; k < NR; k++) head[k] = mem[rd_ptr + AW'(k)];
  end

  assign free = CW'(DEPTH) - count;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (int'(push_cnt) <= int'(free)) else $error("mrfi_flit_fifo: overflow");
      assert (int'(pop_cnt) <= int'(count)) else $error("mrfi_flit_fifo: underflow");
    end
  end

  initial assert ((1 << AW) == DEPTH) else $error("mrfi_flit_fifo: DEPTH must be a power of two");

endmodule
