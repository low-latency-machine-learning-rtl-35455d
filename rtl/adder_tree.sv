// adder_tree: pipelined binary adder tree that sums the SIMD lane products of
// one processing element.
//
// How it works: the N signed operands are padded with zeros to the next power
// of two and added pairwise, one tree level per clock, each level registered.
// All levels use the output width OW, which the instantiating PE sizes so the
// full sum cannot overflow. A valid bit travels beside the data.
//
// Interface: in_valid/in_data enter every cycle (initiation interval 1, no
// back-pressure); out_valid/out_sum leave LEVELS = ceil(log2(N)) clocks later.
// N must be at least 2.
//
// The published design names an adder tree inside each processing element;
// the binary structure and one register per level are this design's choice.
module adder_tree #(
  parameter int unsigned N  = 512,
  parameter int unsigned IW = 8,
  parameter int unsigned OW = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic signed [N-1:0][IW-1:0] in_data,
  output logic                        out_valid,
  output logic signed [OW-1:0]        out_sum
);

  localparam int unsigned LEVELS = $clog2(N);
  localparam int unsigned NP     = 1 << LEVELS;

  logic [LEVELS:1] vld;

  // Level 0 holds the zero-padded operands; level l has NP >> l registered
  // partial sums.
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    logic signed [OW-1:0] s [NP >> l];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < NP; i++) begin : g_op
        if (i < N) begin : g_in
          assign s[i] = OW'(signed'(in_data[i]));
        end else begin : g_pad
          assign s[i] = '0;
        end
      end
    end else begin : g_add
      for (genvar i = 0; i < (NP >> l); i++) begin : g_node
        always_ff @(posedge clk) s[i] <= g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= LEVELS'({vld, in_valid});
  end

  assign out_valid = vld[LEVELS];
  assign out_sum   = g_lvl[LEVELS].s[0];

endmodule
