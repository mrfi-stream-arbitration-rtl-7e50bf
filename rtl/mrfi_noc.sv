// mrfi_noc -- network-on-chip of K nodes joined by one multiband RF
// interconnect (MRFI), arbitrated with MRFI stream arbitration.
//
// The RF line is split into K arbitration bands and M data bands. Each node
// sends its sub-stream vector in the arbitration band given by its priority,
// and every node receives all K bands at once: the sub-streams are appended
// in frequency, not in time, so the full stream is available to every node in
// the same cycle. Each node then runs the same arbitration on the same stream
// and, without further messages, all nodes agree on which source uses which
// data bands in the next cycle and which destination listens to them. Bands
// are dealt out round-robin among the admitted source/destination pairs
// (pair p gets bands p+1, p+1+q, p+1+2q, ...), so one pair alone gets all M
// bands and all bands are busy whenever any pair is admitted.
//
// Structure: K mrfi_node instances, one mrfi_channel model for the
// arbitration bands and one for the data bands. The channel models stand for
// the analog RF front ends and the line.
//
// Interface: per node a host TX port (up to M flits per cycle, each with its
// destination) and a host RX port (up to M received flits per cycle, each
// with its source), plus observation outputs: the sub-stream vectors, the
// bands each node sends on and listens to in the current cycle, and lost
// arbitrations. Timing: a flit queued in cycle t is announced from cycle t+1
// and, when admitted in cycle a, crosses the line in cycle a+1 and is
// readable at the destination from cycle a+2.
module mrfi_noc #(
  parameter int unsigned K         = mrfi_pkg::K_NODES,
  parameter int unsigned M         = mrfi_pkg::M_CHANNELS,
  parameter int unsigned FW        = mrfi_pkg::FLIT_W,
  parameter int unsigned TXQ_DEPTH = 32,
  parameter int unsigned RXQ_DEPTH = 32,
  localparam int unsigned IDW  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned SV_W = 2 + IDW,
  localparam int unsigned CNTW = $clog2(M + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  mrfi_pkg::prio_mode_e prio_mode,
  input  logic                 prio_load_en,
  input  logic [IDW-1:0]       prio_load_map [K],
  // host TX ports
  input  logic [CNTW-1:0]      in_cnt   [K],
  input  logic [IDW-1:0]       in_dest  [K][M],
  input  logic [FW-1:0]        in_data  [K][M],
  output logic [K-1:0]         in_ready,
  // host RX ports
  output logic [CNTW-1:0]      out_cnt  [K],
  output logic [IDW-1:0]       out_src  [K][M],
  output logic [FW-1:0]        out_data [K][M],
  input  logic [CNTW-1:0]      out_pop  [K],
  // observation
  output logic [SV_W-1:0]      sub_vec  [K],   // by node ID
  output logic [SV_W-1:0]      full_stream [K],// by arbitration band
  output logic [M-1:0]         tx_ch    [K],   // bands node n sends on now
  output logic [M-1:0]         rx_ch    [K],   // bands node n listens to now
  output logic [K-1:0]         lost,
  output logic [M-1:0]         data_busy,      // data bands carrying a flit
  output logic                 collision       // any band driven twice
);

  logic [IDW-1:0]  arb_band [K];
  logic [K-1:0]    arb_en   [K];
  logic [SV_W-1:0] arb_tx   [K][K];
  logic [K-1:0]    arb_valid, arb_coll;

  logic [M-1:0]    dtx_en   [K];
  logic [FW-1:0]   dtx_data [K][M];
  logic [FW-1:0]   drx_data [M];
  logic [M-1:0]    data_coll;

  for (genvar n = 0; n < K; n++) begin : g_node
    mrfi_node #(
      .K(K), .M(M), .FW(FW), .TXQ_DEPTH(TXQ_DEPTH), .RXQ_DEPTH(RXQ_DEPTH), .NODE_ID(n)
    ) u_node (
      .clk, .rst_n,
      .prio_mode, .prio_load_en, .prio_load_map,
      .in_cnt(in_cnt[n]), .in_dest(in_dest[n]), .in_data(in_data[n]), .in_ready(in_ready[n]),
      .out_cnt(out_cnt[n]), .out_src(out_src[n]), .out_data(out_data[n]), .out_pop(out_pop[n]),
      .sub_vec(sub_vec[n]), .arb_band(arb_band[n]), .full_stream,
      .dtx_en(dtx_en[n]), .dtx_data(dtx_data[n]), .drx_valid(data_busy), .drx_data,
      .tx_ch_q(tx_ch[n]), .rx_ch_q(rx_ch[n]), .lost(lost[n])
    );

    // A node's sub-stream modulator is on in its own arbitration band only.
    always_comb begin
      arb_en[n] = '0;
      arb_en[n][arb_band[n]] = 1'b1;
      for (int b = 0; b < K; b++) arb_tx[n][b] = sub_vec[n];
    end
  end

  mrfi_channel #(.N_TX(K), .BANDS(K), .W(SV_W)) u_arb_bands (
    .clk, .rst_n, .tx_en(arb_en), .tx_data(arb_tx),
    .rx_valid(arb_valid), .rx_data(full_stream), .collision(arb_coll)
  );

  mrfi_channel #(.N_TX(K), .BANDS(M), .W(FW)) u_data_bands (
    .clk, .rst_n, .tx_en(dtx_en), .tx_data(dtx_data),
    .rx_valid(data_busy), .rx_data(drx_data), .collision(data_coll)
  );

  assign collision = (|arb_coll) | (|data_coll);

  // Priorities are a permutation, so every arbitration band is driven.
  always_ff @(posedge clk) begin
    if (rst_n) assert (&arb_valid) else $error("mrfi_noc: idle arbitration band");
  end

endmodule
