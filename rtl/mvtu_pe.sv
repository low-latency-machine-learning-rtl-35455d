// mvtu_pe: one processing element of a matrix-vector-threshold unit, i.e. one
// neuron of a quantised fully connected layer.
//
// How it works: each input beat carries SIMD activations. They are multiplied
// by the neuron's weights for the current fold (combinational 2-bit x 4-bit
// products), summed by the pipelined adder tree, added into the accumulator
// and, after the last of SF = MW/SIMD folds, compared with the neuron's
// thresholds to give an OBITS-bit activation. Inputs are signed IN_BITS values
// when IN_SIGNED = 1 (network inputs) and unsigned otherwise (activations of
// the previous layer). There is no bias: a trained bias is part of the
// thresholds.
//
// Interface: in_valid/in_data, one beat per clock, no back-pressure; the fold
// count restarts after every SF valid beats. Weight memory write
// w_we/w_addr/w_data, threshold write t_we/t_idx/t_data.
// Timing: out_valid rises ceil(log2(SIMD)) + 2 clocks after the last fold's
// beat (adder tree levels, accumulator, threshold stage). With SIMD = 512
// that is 11 clocks; with SIMD = 64, 8 clocks.
//
// The datapath order (weight memory, multiplier, adder tree, accumulator,
// threshold memory with >= comparator) follows the published PE; pipeline
// depth, operand encodings and the absence of a separate bias are this
// design's choices.
module mvtu_pe #(
  parameter int unsigned MW        = 512,
  parameter int unsigned SIMD      = 512,
  parameter int unsigned IN_BITS   = qnn_pkg::IN_BITS,
  parameter bit          IN_SIGNED = 1'b1,
  parameter int unsigned W_BITS    = qnn_pkg::W_BITS,
  parameter int unsigned OBITS     = qnn_pkg::A_BITS,
  localparam int unsigned XBITS = IN_BITS + (IN_SIGNED ? 0 : 1),
  localparam int unsigned PBITS = XBITS + W_BITS,
  localparam int unsigned ACC_BITS = qnn_pkg::acc_width(MW, XBITS, W_BITS),
  localparam int unsigned SF = MW / SIMD,
  localparam int unsigned FW = (SF > 1) ? $clog2(SF) : 1,
  localparam int unsigned LEVELS = $clog2(SIMD),
  localparam int unsigned WPW = qnn_pkg::CFG_DATA_BITS / W_BITS,
  localparam int unsigned WAW = ((MW + WPW - 1) / WPW > 1) ? $clog2((MW + WPW - 1) / WPW) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic [SIMD-1:0][IN_BITS-1:0]   in_data,
  input  logic                           w_we,
  input  logic [WAW-1:0]                 w_addr,
  input  logic [qnn_pkg::CFG_DATA_BITS-1:0] w_data,
  input  logic                           t_we,
  input  logic [OBITS-1:0]               t_idx,
  input  logic signed [ACC_BITS-1:0]     t_data,
  output logic                           out_valid,
  output logic [OBITS-1:0]               out_act
);


  // ---- fold counter and weight read ------------------------------------
  logic [FW-1:0]                      fold;
  logic signed [SIMD-1:0][W_BITS-1:0] w;

  always_ff @(posedge clk) begin
    if (!rst_n) fold <= '0;
    else if (in_valid) fold <= (32'(fold) == SF - 1) ? '0 : fold + 1'b1;
  end

  mvtu_weight_mem #(.MW(MW), .SIMD(SIMD), .W_BITS(W_BITS)) u_wmem (
    .clk, .wr_en(w_we), .wr_addr(w_addr), .wr_data(w_data),
    .rd_fold(fold), .rd_w(w)
  );

  // ---- multipliers ------------------------------------------------------
  logic signed [SIMD-1:0][PBITS-1:0] prod;

  for (genvar s = 0; s < SIMD; s++) begin : g_mul
    logic signed [XBITS-1:0] x;
    if (IN_SIGNED) begin : g_s
      assign x = XBITS'(signed'(in_data[s]));
    end else begin : g_u
      assign x = XBITS'({1'b0, in_data[s]});
    end
    assign prod[s] = PBITS'(x * signed'(w[s]));
  end

  // ---- adder tree, fold markers travel alongside -------------------------
  logic                       sum_valid;
  logic signed [ACC_BITS-1:0] sum;
  logic                       first_in, last_in;
  logic [LEVELS:1]            first_d, last_d;

  adder_tree #(.N(SIMD), .IW(PBITS), .OW(ACC_BITS)) u_tree (
    .clk, .rst_n, .in_valid, .in_data(prod), .out_valid(sum_valid), .out_sum(sum)
  );

  assign first_in = (fold == '0);
  assign last_in  = (32'(fold) == SF - 1);

  always_ff @(posedge clk) begin
    first_d <= LEVELS'({first_d, first_in});
    last_d  <= LEVELS'({last_d, last_in});
  end

  // ---- accumulator --------------------------------------------------------
  logic                       acc_valid;
  logic signed [ACC_BITS-1:0] acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_valid <= 1'b0;
      acc       <= '0;
    end else begin
      acc_valid <= sum_valid && last_d[LEVELS];
      if (sum_valid) acc <= (first_d[LEVELS] ? '0 : acc) + sum;
    end
  end

  // ---- threshold memory and comparator ----------------------------------
  mvtu_threshold #(.ACC_BITS(ACC_BITS), .OBITS(OBITS)) u_thr (
    .clk, .rst_n, .wr_en(t_we), .wr_idx(t_idx), .wr_data(t_data),
    .in_valid(acc_valid), .in_acc(acc), .out_valid, .out_act
  );

endmodule
