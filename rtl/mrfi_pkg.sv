// mrfi_pkg -- constants and types shared by the MRFI stream-arbitration NoC.
//
// The NoC has K nodes. Each node owns one arbitration frequency band (its
// priority selects which one) and all nodes share M data frequency bands, each
// carrying one flit per clock cycle. A node announces its state every cycle in
// a sub-stream vector {flow control, interested, destination}; the K vectors
// received side by side in the K arbitration bands form the full stream.
// A vector is 2 + ceil(log2 K) bits wide (6 bits for 16 nodes).
//
// The default of 16 nodes is the configuration used to size the arbitration
// bandwidth (6-bit sub-stream vectors). The number of data bands for that
// configuration and the flit width are not fixed by the scheme; 16 bands
// (one per node, as in the 4-node/4-band worked example) and 32-bit flits are
// this design's choices.
package mrfi_pkg;

  localparam int unsigned K_NODES    = 16;  // nodes = arbitration bands
  localparam int unsigned M_CHANNELS = 16;  // data bands
  localparam int unsigned FLIT_W     = 32;  // payload bits per flit

  // Priority adjustment. PRIO_STATIC keeps the reset order (node 0 highest);
  // PRIO_ROTARY rotates the priority map by one place every arbitration cycle.
  typedef enum logic [0:0] {
    PRIO_STATIC = 1'b0,
    PRIO_ROTARY = 1'b1
  } prio_mode_e;

endpackage
