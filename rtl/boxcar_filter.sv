// boxcar_filter: front end of the discriminator. It turns the stream of
// down-converted I/Q samples of one readout trace into the 512-element,
// 4-bit input vector of the neural network.
//
// How it works: each input beat carries BOXCAR_LEN consecutive I samples and
// the same number of Q samples. Their sums (a BOXCAR_LEN-point boxcar) are
// quantised to IN_BITS by keeping the most significant bits of the sum, which
// is the average truncated toward minus infinity. The I result of beat k is
// stored as feature k and the Q result as feature N_FEATURES/2 + k. After
// N_FEATURES/2 beats the vector is complete and m_valid is high for one
// cycle.
//
// Interface: s_valid/s_i/s_q, no back-pressure. m_feat is read while m_valid
// is high; it changes when the next trace starts arriving.
// Timing: m_valid rises one clock after the beat carrying the trace's last
// samples (the one-cycle boxcar stage of the published design).
//
// Follows the published design: 2-point boxcar, 8-bit samples, 512 features of
// 4 bits. This design's own choices: samples grouped per beat, truncating
// quantisation, I-then-Q feature order, a trace being the next N_FEATURES/2
// beats after reset or after the previous trace, synchronous active-low reset.
module boxcar_filter #(
  parameter int unsigned ADC_BITS   = qnn_pkg::ADC_BITS,
  parameter int unsigned BOXCAR_LEN = qnn_pkg::BOXCAR_LEN,
  parameter int unsigned N_FEATURES = qnn_pkg::N_FEATURES,
  parameter int unsigned IN_BITS    = qnn_pkg::IN_BITS
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       s_valid,
  input  logic signed [BOXCAR_LEN-1:0][ADC_BITS-1:0] s_i,
  input  logic signed [BOXCAR_LEN-1:0][ADC_BITS-1:0] s_q,
  output logic                                       m_valid,
  output logic        [N_FEATURES-1:0][IN_BITS-1:0]  m_feat
);

  localparam int unsigned HALF     = N_FEATURES / 2;      // beats per trace
  localparam int unsigned SUM_BITS = ADC_BITS + $clog2(BOXCAR_LEN);
  localparam int unsigned SHIFT    = SUM_BITS - IN_BITS;  // keep the MSBs
  localparam int unsigned CW       = (HALF > 1) ? $clog2(HALF) : 1;

  logic [CW-1:0]              beat;
  logic signed [SUM_BITS-1:0] sum_i, sum_q;
  logic [IN_BITS-1:0]         feat_i, feat_q;
  logic [N_FEATURES-1:0][IN_BITS-1:0] feat;

  always_comb begin
    sum_i = '0;
    sum_q = '0;
    for (int unsigned k = 0; k < BOXCAR_LEN; k++) begin
      sum_i += SUM_BITS'(signed'(s_i[k]));
      sum_q += SUM_BITS'(signed'(s_q[k]));
    end
    feat_i = IN_BITS'(sum_i >>> SHIFT);
    feat_q = IN_BITS'(sum_q >>> SHIFT);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beat    <= '0;
      m_valid <= 1'b0;
    end else begin
      m_valid <= s_valid && (beat == CW'(HALF - 1));
      if (s_valid) beat <= (beat == CW'(HALF - 1)) ? '0 : beat + 1'b1;
    end
  end

  // Feature storage (not reset: every element is written before m_valid).
  always_ff @(posedge clk) begin
    if (s_valid) begin
      feat[beat]        <= feat_i;
      feat[HALF + 32'(beat)] <= feat_q;
    end
  end

  assign m_feat = feat;

endmodule
