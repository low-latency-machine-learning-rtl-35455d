// mvtu: matrix-vector-threshold unit, one quantised fully connected layer of
// MW inputs and MH outputs.
//
// How it works: MH processing elements (one per output neuron) run in
// parallel on the same SIMD input lanes; each multiplies, sums, accumulates
// over MW/SIMD folds and thresholds its own row (see mvtu_pe). With
// SIMD = MW the layer is fully parallel: one input vector per clock and no
// time multiplexing, which is how the low-latency discriminator uses it.
//
// Configuration: writes on the shared cfg record whose unit field equals
// UNIT_ID are taken by this layer.
//   kind CFG_WEIGHT: addr = neuron * (MW/WPW) + word, data = WPW packed
//                    weights (WPW = 32 / W_BITS), weight j in bits
//                    [W_BITS*j +: W_BITS]
//   kind CFG_THRESH: addr = neuron * 2^OBITS + index, data = threshold
//                    (two's complement, low ACC_BITS bits used)
// Timing: out_valid/out_act follow the last fold's beat by
// ceil(log2(SIMD)) + 2 clocks; a new vector may enter every SF clocks.
//
// PEs, SIMD lanes and the threshold-based activation follow the published
// units; one PE per neuron, the absence of a stream handshake and the
// configuration map are this design's choices.
module mvtu #(
  parameter int unsigned MW        = 512,
  parameter int unsigned MH        = qnn_pkg::SEG_NODES,
  parameter int unsigned SIMD      = 512,
  parameter int unsigned IN_BITS   = qnn_pkg::IN_BITS,
  parameter bit          IN_SIGNED = 1'b1,
  parameter int unsigned W_BITS    = qnn_pkg::W_BITS,
  parameter int unsigned OBITS     = qnn_pkg::A_BITS,
  parameter int unsigned UNIT_ID   = 0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  qnn_pkg::cfg_wr_t             cfg,
  input  logic                         in_valid,
  input  logic [SIMD-1:0][IN_BITS-1:0] in_data,
  output logic                         out_valid,
  output logic [MH-1:0][OBITS-1:0]     out_act
);
  import qnn_pkg::*;

  localparam int unsigned XBITS    = IN_BITS + (IN_SIGNED ? 0 : 1);
  localparam int unsigned ACC_BITS = acc_width(MW, XBITS, W_BITS);
  localparam int unsigned WPW      = CFG_DATA_BITS / W_BITS;
  localparam int unsigned ROW_WORDS = (MW + WPW - 1) / WPW;
  localparam int unsigned WAW      = (ROW_WORDS > 1) ? $clog2(ROW_WORDS) : 1;

  logic sel;
  assign sel = cfg.we && (32'(cfg.unit) == UNIT_ID);

  logic [MH-1:0] pe_valid;

  for (genvar n = 0; n < MH; n++) begin : g_pe
    logic w_we, t_we;
    assign w_we = sel && (cfg.kind == CFG_WEIGHT) && (32'(cfg.addr) / ROW_WORDS == n);
    assign t_we = sel && (cfg.kind == CFG_THRESH) && (32'(cfg.addr) >> OBITS == n);

    mvtu_pe #(
      .MW(MW), .SIMD(SIMD), .IN_BITS(IN_BITS), .IN_SIGNED(IN_SIGNED),
      .W_BITS(W_BITS), .OBITS(OBITS)
    ) u_pe (
      .clk, .rst_n, .in_valid, .in_data,
      .w_we, .w_addr(WAW'(32'(cfg.addr) % ROW_WORDS)), .w_data(cfg.data),
      .t_we, .t_idx(cfg.addr[OBITS-1:0]), .t_data(cfg.data[ACC_BITS-1:0]),
      .out_valid(pe_valid[n]), .out_act(out_act[n])
    );
  end

  // All PEs share one input stream and one pipeline, so they finish together.
  assign out_valid = pe_valid[0];

  always_ff @(posedge clk) begin
    if (rst_n) assert (pe_valid == '0 || pe_valid == '1)
      else $error("mvtu: processing elements out of step");
  end

endmodule
