// mrfi_node -- one node of the MRFI stream-arbitration NoC.
//
// Every cycle the node
//   1. announces itself in its own arbitration band (the band index is its
//      priority) with the sub-stream vector {fc, interested, destination}:
//      fc = 0 when its RX buffer can take a full cycle of M flits,
//      interested = 1 when flits remain queued after this cycle's sends,
//      destination = the node the oldest remaining flit is for;
//   2. reads all K arbitration bands (the full stream) and runs the stream
//      arbitration, registering TX_CH / RX_CH for the next cycle;
//   3. sends queued flits on the data bands granted in the previous cycle
//      (one flit per band, in band order, only flits for the granted
//      destination), and takes the flits arriving on the bands it was told to
//      listen to into its RX buffer, tagged with their source.
// So a request made in cycle t moves data in cycle t+1, while the next
// arbitration runs in the same cycle t+1 (one trip, one cycle, as in the
// worked example: flits requested in cycle 0 are delivered in cycle 1).
//
// Host side: up to M flits per cycle may be queued (in_cnt flits from in_dest/
// in_data[0..in_cnt-1]) while in_ready is high; out_src/out_data[0..out_cnt-1]
// show the oldest received flits and out_pop removes that many.
//
// The sub-stream format, the arbitration and the data-band usage follow the
// scheme. The TX queue and RX buffer organisation, their depths, the rule for
// fc (free space after this cycle's arrivals below M) and the source tag on
// received flits are this design's choices. If more bands are granted than
// flits for that destination are queued, the extra bands stay idle that cycle.
module mrfi_node #(
  parameter int unsigned K         = mrfi_pkg::K_NODES,
  parameter int unsigned M         = mrfi_pkg::M_CHANNELS,
  parameter int unsigned FW        = mrfi_pkg::FLIT_W,
  parameter int unsigned TXQ_DEPTH = 32,
  parameter int unsigned RXQ_DEPTH = 32,
  parameter int unsigned NODE_ID   = 0,
  localparam int unsigned IDW  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned SV_W = 2 + IDW,
  localparam int unsigned CNTW = $clog2(M + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // priority adjustment (identical in every node)
  input  mrfi_pkg::prio_mode_e prio_mode,
  input  logic                 prio_load_en,
  input  logic [IDW-1:0]       prio_load_map [K],
  // host TX side
  input  logic [CNTW-1:0]      in_cnt,
  input  logic [IDW-1:0]       in_dest [M],
  input  logic [FW-1:0]        in_data [M],
  output logic                 in_ready,
  // host RX side
  output logic [CNTW-1:0]      out_cnt,
  output logic [IDW-1:0]       out_src [M],
  output logic [FW-1:0]        out_data [M],
  input  logic [CNTW-1:0]      out_pop,
  // arbitration bands
  output logic [SV_W-1:0]      sub_vec,        // this node's sub-stream vector
  output logic [IDW-1:0]       arb_band,       // band it is sent in (= priority)
  input  logic [SV_W-1:0]      full_stream [K],// band i = priority i
  // data bands
  output logic [M-1:0]         dtx_en,
  output logic [FW-1:0]        dtx_data [M],
  input  logic [M-1:0]         drx_valid,
  input  logic [FW-1:0]        drx_data [M],
  // observation
  output logic [M-1:0]         tx_ch_q,        // bands granted for this cycle
  output logic [M-1:0]         rx_ch_q,        // bands listened to this cycle
  output logic                 lost            // interested but not admitted
);

  localparam int unsigned TXW   = IDW + FW;
  localparam int unsigned RXW   = IDW + FW;
  localparam int unsigned TXCW  = $clog2(TXQ_DEPTH + 1);
  localparam int unsigned RXCW  = $clog2(RXQ_DEPTH + 1);
  localparam int unsigned TXPRW = $clog2(M + 2);

  // ---------------- priority table ----------------
  logic [IDW-1:0] prio_map  [K];
  logic [IDW-1:0] node_prio [K];
  logic [IDW-1:0] my_prio;

  mrfi_priority_map #(.K(K)) u_prio (
    .clk, .rst_n, .mode(prio_mode), .step(1'b1),
    .load_en(prio_load_en), .load_map(prio_load_map),
    .prio_map, .node_prio
  );
  assign my_prio  = node_prio[NODE_ID];
  assign arb_band = my_prio;

  // ---------------- TX queue ----------------
  logic [TXW-1:0]   txq_push [M];
  logic [TXW-1:0]   txq_head [M+1];
  logic [TXCW-1:0]  txq_count, txq_free;
  logic [TXPRW-1:0] txq_pop;

  always_comb for (int k = 0; k < M; k++) txq_push[k] = {in_dest[k], in_data[k]};

  mrfi_flit_fifo #(.DEPTH(TXQ_DEPTH), .W(TXW), .NW(M), .NR(M + 1)) u_txq (
    .clk, .rst_n,
    .push_cnt(in_ready ? in_cnt : '0), .push_data(txq_push),
    .pop_cnt(txq_pop), .head(txq_head), .count(txq_count), .free(txq_free)
  );
  assign in_ready = int'(txq_free) >= M;

  // ---------------- data-band transmit ----------------
  int unsigned    n_send;
  logic           interested;
  logic [IDW-1:0] req_dest;

  always_comb begin
    int unsigned n_alloc, run, s;
    logic        same;
    n_alloc = 0;
    for (int c = 0; c < M; c++) n_alloc += int'(tx_ch_q[c]);
    // flits at the head of the queue for the destination that was granted
    run  = 0;
    same = 1'b1;
    for (int k = 0; k < M; k++) begin
      same = same && (k < int'(txq_count)) &&
             (txq_head[k][TXW-1 -: IDW] == txq_head[0][TXW-1 -: IDW]);
      if (same) run = k + 1;
    end
    n_send = (n_alloc < run) ? n_alloc : run;
    // first granted band gets the oldest flit, and so on
    s = 0;
    for (int c = 0; c < M; c++) begin
      dtx_en[c]   = 1'b0;
      dtx_data[c] = '0;
      if (tx_ch_q[c] && s < n_send) begin
        dtx_en[c]   = 1'b1;
        dtx_data[c] = txq_head[s][FW-1:0];
        s++;
      end
    end
    interested = int'(txq_count) > n_send;
    req_dest   = txq_head[n_send][TXW-1 -: IDW];
  end
  assign txq_pop = TXPRW'(n_send);

  // ---------------- data-band receive ----------------
  logic [RXW-1:0]  rxq_push [M];
  logic [RXW-1:0]  rxq_head [M];
  logic [CNTW-1:0] rxq_push_cnt;
  logic [RXCW-1:0] rxq_count, rxq_free;
  logic [IDW-1:0]  rx_src_q;

  always_comb begin
    int unsigned r;
    r = 0;
    for (int k = 0; k < M; k++) rxq_push[k] = '0;
    for (int c = 0; c < M; c++) begin
      if (rx_ch_q[c] && drx_valid[c]) begin
        rxq_push[r] = {rx_src_q, drx_data[c]};
        r++;
      end
    end
    rxq_push_cnt = CNTW'(r);
  end

  mrfi_flit_fifo #(.DEPTH(RXQ_DEPTH), .W(RXW), .NW(M), .NR(M)) u_rxq (
    .clk, .rst_n,
    .push_cnt(rxq_push_cnt), .push_data(rxq_push),
    .pop_cnt(out_pop), .head(rxq_head), .count(rxq_count), .free(rxq_free)
  );

  assign out_cnt = (int'(rxq_count) < M) ? CNTW'(rxq_count) : CNTW'(M);
  always_comb begin
    for (int k = 0; k < M; k++) begin
      out_src[k]  = rxq_head[k][RXW-1 -: IDW];
      out_data[k] = rxq_head[k][FW-1:0];
    end
  end

  // ---------------- sub-stream vector ----------------
  logic fc;
  assign fc      = (int'(rxq_free) - int'(rxq_push_cnt)) < int'(M);
  assign sub_vec = {fc, interested, interested ? req_dest : IDW'(0)};

  // ---------------- arbitration ----------------
  logic [M-1:0]   tx_ch_d, rx_ch_d;
  logic           tx_grant, rx_grant;
  logic [IDW-1:0] rx_src_d;
  logic [CNTW-1:0] arb_q, arb_pt, arb_pr;

  mrfi_stream_arbiter #(.K(K), .M(M)) u_arb (
    .stream(full_stream), .prio_map, .node_id(IDW'(NODE_ID)), .my_prio,
    .tx_ch(tx_ch_d), .rx_ch(rx_ch_d), .tx_grant, .rx_grant, .rx_src(rx_src_d),
    .q(arb_q), .p_t(arb_pt), .p_r(arb_pr)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tx_ch_q  <= '0;
      rx_ch_q  <= '0;
      rx_src_q <= '0;
    end else begin
      tx_ch_q  <= tx_ch_d;
      rx_ch_q  <= rx_ch_d;
      rx_src_q <= rx_src_d;
    end
  end

  assign lost = interested && !tx_grant;

  // Admitted pairs always get at least their first band p+1 <= q <= M.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (int'(out_pop) <= int'(out_cnt)) else $error("mrfi_node: out_pop > out_cnt");
      assert (int'(arb_q) <= M) else $error("mrfi_node: more pairs than bands");
      assert (!tx_grant || (int'(arb_pt) < int'(arb_q) && tx_ch_d != '0))
        else $error("mrfi_node: TX grant without band");
      assert (!rx_grant || (int'(arb_pr) < int'(arb_q) && rx_ch_d != '0))
        else $error("mrfi_node: RX grant without band");
    end
  end

endmodule
