// mvtu_threshold: threshold memory and comparator of one processing element.
// It converts the neuron's accumulated dot product into a quantised
// activation.
//
// How it works: NT = 2^OBITS - 1 signed thresholds are stored in ascending
// order. The activation is the number of thresholds that the accumulator value
// reaches (acc >= T[t]). One such step function replaces batch normalisation,
// ReLU and activation quantisation of the trained layer: the thresholds are
// where the normalised, rectified value crosses each quantisation level. With
// OBITS = 1 there is a single threshold and the output is a decision bit.
//
// Interface: wr_en/wr_idx/wr_data writes threshold wr_idx; in_valid/in_acc ->
// out_valid/out_act one clock later (one register stage).
//
// The published design shows a threshold memory and a greater-or-equal
// comparator after the accumulator; the counting rule and the register stage
// are this design's choice, following the usual multi-threshold semantics.
module mvtu_threshold #(
  parameter int unsigned ACC_BITS = 15,
  parameter int unsigned OBITS    = qnn_pkg::A_BITS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [OBITS-1:0]           wr_idx,
  input  logic signed [ACC_BITS-1:0] wr_data,
  input  logic                       in_valid,
  input  logic signed [ACC_BITS-1:0] in_acc,
  output logic                       out_valid,
  output logic [OBITS-1:0]           out_act
);

  localparam int unsigned NT = (1 << OBITS) - 1;

  logic signed [ACC_BITS-1:0] thr [NT];
  logic [OBITS-1:0]           count;

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_idx) < NT)) thr[wr_idx] <= wr_data;
  end

  always_comb begin
    count = '0;
    for (int unsigned t = 0; t < NT; t++)
      if (in_acc >= thr[t]) count = count + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_act   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_act <= count;
    end
  end

endmodule
