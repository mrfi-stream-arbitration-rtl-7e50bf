// mrfi_priority_map -- priority table of the MRFI stream arbitration.
//
// A node's priority is the index of the arbitration band it transmits its
// sub-stream vector in (band 0 = highest priority). prio_map[i] is the ID of
// the node at priority i (priorityMap[] of the algorithm) and node_prio[n]
// is the inverse, the priority (= arbitration band) of node n. Changing a
// node's priority therefore means changing the band it uses and updating
// this table; every node keeps an identical copy, updated in lock step.
//
// Adjustment schemes:
//   * static  : the reset order, node n at priority n, is kept;
//   * rotary  : on every cycle with step=1 the table rotates by one place,
//               the highest-priority node moving to the lowest priority;
//   * load    : load_en writes an arbitrary permutation (load_map), for any
//               other scheme computed outside; it wins over rotation.
// Rotary adjustment and arbitrary schemes are named by the scheme; the step
// size of one place per arbitration cycle and the load port are this design's
// choices. load_map must be a permutation of 0..K-1 (checked by an assertion).
//
// Timing: registered; prio_map/node_prio change one cycle after step/load.
module mrfi_priority_map #(
  parameter int unsigned K = mrfi_pkg::K_NODES,
  localparam int unsigned IDW = (K > 1) ? $clog2(K) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  mrfi_pkg::prio_mode_e mode,
  input  logic                 step,               // one arbitration cycle done
  input  logic                 load_en,
  input  logic [IDW-1:0]       load_map  [K],
  output logic [IDW-1:0]       prio_map  [K],      // priority -> node ID
  output logic [IDW-1:0]       node_prio [K]       // node ID  -> priority
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < K; i++) prio_map[i] <= IDW'(i);
    end else if (load_en) begin
      prio_map <= load_map;
    end else if (step && mode == mrfi_pkg::PRIO_ROTARY) begin
      for (int i = 0; i < K; i++) prio_map[i] <= prio_map[(i + 1) % K];
    end
  end

  always_comb begin
    for (int n = 0; n < K; n++) node_prio[n] = '0;
    for (int i = 0; i < K; i++) node_prio[prio_map[i]] = IDW'(i);
  end

  // A loaded table must name every node exactly once.
  always_ff @(posedge clk) begin
    if (load_en) begin
      logic [K-1:0] seen;
      seen = '0;
      for (int i = 0; i < K; i++) if (int'(load_map[i]) < K) seen[load_map[i]] = 1'b1;
      assert (&seen) else $error("mrfi_priority_map: load_map is not a permutation");
    end
  end

endmodule
