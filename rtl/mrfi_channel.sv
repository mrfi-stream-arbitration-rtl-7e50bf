// mrfi_channel -- behavioural model of a shared multiband RF interconnect
// (MRFI) medium. Not synthesizable hardware in the real system: it stands
// for the analog path (DACs, per-band mixers, summing node, transmission
// line, coupler, per-band mixers and filters, ADCs, and the carrier
// generators that feed the mixers).
//
// Each of N_TX transmitters can turn on the modulator of any subset of the
// BANDS frequency bands (tx_en) and drive one W-bit symbol per band per cycle
// (tx_data). The modulated bands add up on the line, and every receiver can
// demodulate any band, so the model gives every receiver the same view:
// rx_valid[b] says some transmitter drives band b, rx_data[b] is its symbol.
// Two transmitters on one band would corrupt each other; the model flags that
// on collision[b] (the data is then the OR of both) and an assertion reports
// it, since a correct arbitration never lets it happen.
//
// The same model serves for the K arbitration bands (W = sub-stream vector
// width) and for the M data bands (W = flit width). The propagation time
// (distance over the speed of light) is taken to be well inside one clock
// cycle, so the model is combinational: what is sent in a cycle is received
// in that cycle and registered by the receiver.
module mrfi_channel #(
  parameter int unsigned N_TX  = mrfi_pkg::K_NODES,
  parameter int unsigned BANDS = mrfi_pkg::M_CHANNELS,
  parameter int unsigned W     = mrfi_pkg::FLIT_W
) (
  input  logic             clk,                  // only for the assertion
  input  logic             rst_n,                // assertion off in reset
  input  logic [BANDS-1:0] tx_en     [N_TX],     // modulator on, per band
  input  logic [W-1:0]     tx_data   [N_TX][BANDS],
  output logic [BANDS-1:0] rx_valid,
  output logic [W-1:0]     rx_data   [BANDS],
  output logic [BANDS-1:0] collision
);

  always_comb begin
    rx_valid  = '0;
    collision = '0;
    for (int b = 0; b < BANDS; b++) rx_data[b] = '0;
    for (int n = 0; n < N_TX; n++) begin
      for (int b = 0; b < BANDS; b++) begin
        if (tx_en[n][b]) begin
          collision[b] = collision[b] | rx_valid[b];
          rx_valid[b]  = 1'b1;
          rx_data[b]   = rx_data[b] | tx_data[n][b];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (collision == '0) else $error("mrfi_channel: two transmitters share a band (%b)", collision);
  end

endmodule
