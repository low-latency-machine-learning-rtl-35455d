// qnn_pkg: sizes and types shared by the quantised-neural-network qubit
// readout discriminator.
//
// The network is the fully parallel "((512x8)x8)x5" discriminator: 512 input
// features (boxcar-averaged I and Q samples, 4 bits each), a first hidden
// layer of 64 nodes split into 8 independent segments of 8 nodes, and 5
// output nodes, one per qubit. Weights and hidden activations are 2 bits.
// These numbers follow the published design; the configuration-write record
// below (how weights and thresholds are loaded) is this implementation's own
// choice.
package qnn_pkg;

  // Network shape
  localparam int unsigned N_QUBITS   = 5;    // output nodes, one per qubit
  localparam int unsigned N_FEATURES = 512;  // network inputs (256 I + 256 Q)
  localparam int unsigned N_SEG      = 8;    // first-layer segments
  localparam int unsigned SEG_NODES  = 8;    // nodes per segment
  localparam int unsigned HIDDEN     = N_SEG * SEG_NODES;  // 64

  // Quantisation (input / weight / activation)
  localparam int unsigned IN_BITS = 4;
  localparam int unsigned W_BITS  = 2;
  localparam int unsigned A_BITS  = 2;

  // Front end
  localparam int unsigned ADC_BITS   = 8;  // signed I/Q samples
  localparam int unsigned BOXCAR_LEN = 2;  // samples averaged per feature

  // Configuration bus
  localparam int unsigned CFG_DATA_BITS = 32;
  localparam int unsigned CFG_ADDR_BITS = 16;
  localparam int unsigned CFG_UNIT_BITS = 4;
  localparam int unsigned OUT_UNIT      = N_SEG;  // unit number of the output layer

  typedef enum logic {
    CFG_WEIGHT = 1'b0,  // 32-bit word of packed weights
    CFG_THRESH = 1'b1   // one threshold, sign-extended to 32 bits
  } cfg_kind_e;

  // One configuration write. Units 0..N_SEG-1 are the first-layer segments,
  // unit OUT_UNIT is the output layer.
  typedef struct packed {
    logic                     we;
    cfg_kind_e                kind;
    logic [CFG_UNIT_BITS-1:0] unit;
    logic [CFG_ADDR_BITS-1:0] addr;
    logic [CFG_DATA_BITS-1:0] data;
  } cfg_wr_t;

  // Width of a signed sum of n products of an a-bit and a w-bit operand.
  function automatic int unsigned acc_width(int unsigned n, int unsigned a, int unsigned w);
    return a + w + $clog2(n);
  endfunction

endpackage
