// qnn_arch7_top: low-latency neural-network discriminator for the
// frequency-multiplexed readout of five superconducting qubits.
//
// The digitised, down-converted readout trace (I and Q, 8-bit samples) goes
// through a 2-point boxcar that yields 512 four-bit features. A quantised
// network 512 -> 64 -> 5 with 2-bit weights and 2-bit hidden activations
// then decides each qubit's state. Its 64-node hidden layer is split into 8
// independent segments of 8 nodes; each segment is its own fully parallel
// matrix-vector-threshold unit (MVTU) that sees all 512 features, so the
// 32768 weights of the layer are evaluated in one pass without time
// multiplexing. The segments' 2-bit outputs are concatenated (segment s,
// node n -> hidden index 8*s + n) and fed to a 64 -> 5 output MVTU whose
// single threshold per node gives one state bit per qubit.
//
// Interface: adc_valid/adc_i/adc_q carry BOXCAR_LEN samples per beat; a
// trace is N_FEATURES/2 = 256 beats. cfg loads weights and thresholds
// (units 0..7: segments, unit 8: output layer; see mvtu). state_valid is
// high for one clock with qubit_state[q] = 1 meaning qubit q is excited.
// Timing: state_valid rises 20 clocks after the trace's last beat: 1 for the
// boxcar, 11 for a segment MVTU (9 adder-tree levels, accumulator,
// threshold), 8 for the output MVTU (6 levels + 2). A new trace may follow
// immediately.
//
// The structure (boxcar, eight parallel segment MVTUs, concatenation, output
// MVTU), the sizes and the bit widths follow the published Arch-7 design; its
// 19-cycle network latency is matched. The pipeline split, the one-bit
// output decision, the configuration port and the sample framing are this
// design's choices.
module qnn_arch7_top
  import qnn_pkg::*;
(
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  cfg_wr_t                                    cfg,
  input  logic                                       adc_valid,
  input  logic signed [BOXCAR_LEN-1:0][ADC_BITS-1:0] adc_i,
  input  logic signed [BOXCAR_LEN-1:0][ADC_BITS-1:0] adc_q,
  output logic                                       state_valid,
  output logic [N_QUBITS-1:0]                        qubit_state
);

  // ---- boxcar front end ---------------------------------------------------
  logic                               feat_valid;
  logic [N_FEATURES-1:0][IN_BITS-1:0] feat;

  boxcar_filter u_boxcar (
    .clk, .rst_n, .s_valid(adc_valid), .s_i(adc_i), .s_q(adc_q),
    .m_valid(feat_valid), .m_feat(feat)
  );

  // ---- first hidden layer: eight parallel segments -----------------------
  logic [N_SEG-1:0]                          seg_valid;
  logic [N_SEG-1:0][SEG_NODES-1:0][A_BITS-1:0] seg_act;

  for (genvar g = 0; g < N_SEG; g++) begin : g_seg
    mvtu #(
      .MW(N_FEATURES), .MH(SEG_NODES), .SIMD(N_FEATURES), .IN_BITS(IN_BITS),
      .IN_SIGNED(1'b1), .W_BITS(W_BITS), .OBITS(A_BITS), .UNIT_ID(g)
    ) u_seg (
      .clk, .rst_n, .cfg, .in_valid(feat_valid), .in_data(feat),
      .out_valid(seg_valid[g]), .out_act(seg_act[g])
    );
  end

  // ---- concatenation: a packed re-view of the segment outputs -------------
  logic [HIDDEN-1:0][A_BITS-1:0] hidden;
  assign hidden = seg_act;

  // ---- output layer ---------------------------------------------------------
  logic [N_QUBITS-1:0][0:0] out_bit;

  mvtu #(
    .MW(HIDDEN), .MH(N_QUBITS), .SIMD(HIDDEN), .IN_BITS(A_BITS),
    .IN_SIGNED(1'b0), .W_BITS(W_BITS), .OBITS(1), .UNIT_ID(OUT_UNIT)
  ) u_out (
    .clk, .rst_n, .cfg, .in_valid(seg_valid[0]), .in_data(hidden),
    .out_valid(state_valid), .out_act(out_bit)
  );

  assign qubit_state = out_bit;

  always_ff @(posedge clk) begin
    if (rst_n) assert (seg_valid == '0 || seg_valid == '1)
      else $error("qnn_arch7_top: segments out of step");
  end

endmodule
