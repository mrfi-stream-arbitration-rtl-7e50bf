// mrfi_stream_arbiter -- the per-node MRFI stream-arbitration algorithm.
//
// Every node holds one of these. It receives the full stream, i.e. the K
// sub-stream vectors read from the K arbitration bands (band i carries the
// vector of the node with priority i, band 0 being the highest priority), and
// decides which data bands this node transmits on (tx_ch) and listens on
// (rx_ch) in the next data-transfer cycle.
//
// Algorithm (one pass over the stream in priority order):
//   * the flow-control bits are first re-indexed by node ID through prio_map;
//     a '0' means that node's receive buffer can take data;
//   * a pair (source at priority i, its destination d) is admitted when the
//     source is interested and flow control of d is '0'; d's flow-control bit
//     is then set to '1', so lower-priority sources aiming at d lose
//     (a destination talks to one source at a time);
//   * q counts admitted pairs; p_t is q at the moment this node's own pair is
//     admitted, p_r is q when a pair aimed at this node is admitted;
//   * admission stops once q reaches M;
//   * channels p+1+j*q (1-based, j = 0,1,...) up to M are set in TX_CH with
//     p = p_t and in RX_CH with p = p_r.
// So the admitted pairs interleave over the data bands and every band is used
// whenever at least one pair is admitted.
//
// Following the text and the worked example, channel numbering starts at
// p+1 (j = 0 included). The printed pseudocode loop instead sets
// p_t + i*q for i >= 1, which contradicts the example (node n4 with p=1, q=2
// uses channels 2 and 4); the text is followed. The pseudocode also leaves
// TX_CH/RX_CH cleared when the node's pair is not admitted; that is made
// explicit here with tx_grant/rx_grant. A destination ID >= K (possible only
// when K is not a power of two) is never admitted.
//
// Interface: bit c of tx_ch/rx_ch is data channel c+1 (f_d[c+1]). Vector
// layout, MSB first as drawn in the sub-stream vector figure:
// {flow_control, interested, destination[DEST_W-1:0]}.
// Timing: purely combinational; the node registers the result so the
// arbitration takes one cycle, as assumed in the worked example.
module mrfi_stream_arbiter #(
  parameter int unsigned K = mrfi_pkg::K_NODES,     // nodes / arbitration bands
  parameter int unsigned M = mrfi_pkg::M_CHANNELS,  // data bands
  localparam int unsigned DEST_W = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned SV_W   = 2 + DEST_W,
  localparam int unsigned QW     = $clog2(M + 1)
) (
  input  logic [SV_W-1:0]   stream   [K],  // full stream, index = priority
  input  logic [DEST_W-1:0] prio_map [K],  // priority -> node ID
  input  logic [DEST_W-1:0] node_id,       // this node
  input  logic [DEST_W-1:0] my_prio,       // this node's priority (its band)
  output logic [M-1:0]      tx_ch,         // TX_CH[1..M]
  output logic [M-1:0]      rx_ch,         // RX_CH[1..M]
  output logic              tx_grant,      // this node's pair was admitted
  output logic              rx_grant,      // a pair aimed at this node was admitted
  output logic [DEST_W-1:0] rx_src,        // source of that pair
  output logic [QW-1:0]     q,             // admitted pairs
  output logic [QW-1:0]     p_t,           // pairs ahead of this node's TX
  output logic [QW-1:0]     p_r            // pairs ahead of the pair into this node
);

  logic [K-1:0] busy;  // working copy of flowControl[], indexed by node ID

  always_comb begin
    logic              interested;
    logic [DEST_W-1:0] dest;
    busy     = '0;
    for (int i = 0; i < K; i++) busy[prio_map[i]] = stream[i][SV_W-1];
    q        = '0;
    p_t      = '0;
    p_r      = '0;
    tx_grant = 1'b0;
    rx_grant = 1'b0;
    rx_src   = '0;
    for (int i = 0; i < K; i++) begin
      interested = stream[i][SV_W-2];
      dest       = stream[i][DEST_W-1:0];
      if (interested && (int'(dest) < K) && !busy[dest] && (int'(q) < M)) begin
        busy[dest] = 1'b1;
        if (i == int'(my_prio)) begin
          p_t      = q;
          tx_grant = 1'b1;
        end
        if (dest == node_id) begin
          p_r      = q;
          rx_grant = 1'b1;
          rx_src   = prio_map[i];
        end
        q = q + 1'b1;
      end
    end
  end

  // Interleaved channel allocation: p+1+j*q for j = 0,1,... while <= M.
  always_comb begin
    int unsigned idx_t, idx_r;
    tx_ch = '0;
    rx_ch = '0;
    idx_t = int'(p_t);
    idx_r = int'(p_r);
    for (int j = 0; j < M; j++) begin
      if (tx_grant && idx_t < M) tx_ch[idx_t] = 1'b1;
      if (rx_grant && idx_r < M) rx_ch[idx_r] = 1'b1;
      idx_t = idx_t + int'(q);
      idx_r = idx_r + int'(q);
    end
  end

endmodule
