// mvtu_weight_mem: on-chip weight memory of one processing element (one
// neuron). It holds the neuron's MW weights of W_BITS each and presents the
// SIMD weights of the current fold all at once.
//
// How it works: the weights live in a register array so that a fully
// parallel PE (SIMD = MW, one fold) reads every weight in the same cycle.
// Weights are written as 32-bit words, each holding 32/W_BITS weights; weight
// j of word a is weight a*(32/W_BITS)+j, in bits [W_BITS*j +: W_BITS].
//
// Interface: write port wr_en/wr_addr/wr_data (one word per clock, takes
// effect at the clock edge); read port rd_fold -> rd_w, combinational.
// Weights are two's-complement; with W_BITS = 2 they take the values -2..1.
//
// The published design places a weight memory in every processing element and
// keeps all parameters on chip; run-time loading through a word-wide write
// port is this design's choice (the trained weights are not published).
module mvtu_weight_mem #(
  parameter int unsigned MW     = 512,
  parameter int unsigned SIMD   = 512,
  parameter int unsigned W_BITS = qnn_pkg::W_BITS,
  localparam int unsigned WPW = qnn_pkg::CFG_DATA_BITS / W_BITS,
  localparam int unsigned WORDS = (MW + WPW - 1) / WPW,
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned SF = MW / SIMD,
  localparam int unsigned FW = (SF > 1) ? $clog2(SF) : 1
) (
  input  logic                            clk,
  input  logic                            wr_en,
  input  logic [AW-1:0]                   wr_addr,
  input  logic [qnn_pkg::CFG_DATA_BITS-1:0] wr_data,
  input  logic [FW-1:0]                   rd_fold,
  output logic signed [SIMD-1:0][W_BITS-1:0] rd_w
);


  // Word-organised storage; every weight's position is a constant, so a
  // fully parallel read needs no address decoding.
  logic [WPW-1:0][W_BITS-1:0] mem [WORDS];
  logic [W_BITS-1:0]          fold_w [SF][SIMD];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  for (genvar f = 0; f < SF; f++) begin : g_fold
    for (genvar s = 0; s < SIMD; s++) begin : g_lane
      assign fold_w[f][s] = mem[(f*SIMD + s) / WPW][(f*SIMD + s) % WPW];
    end
  end

  for (genvar s = 0; s < SIMD; s++) begin : g_rd
    assign rd_w[s] = fold_w[rd_fold][s];
  end

endmodule
