// tb_qnn_arch7_top: end-to-end test of the five-qubit discriminator at its
// default size (no parameter overrides).
//
// The test loads random 2-bit weights into all eight segment MVTUs and the
// output MVTU, with thresholds centred on each neuron's mean response so that
// every activation level and both states of every qubit occur. It then
// streams random readout traces (256 beats of two I and two Q samples each),
// some back to back and some with idle beats inside. A reference model here
// (boxcar, 512x64 layer with 2-bit thresholding, 64x5 layer with one
// threshold) predicts the five state bits of each trace. Checked: the state
// bits, and that they appear exactly 20 clocks after the trace's last beat
// (1 boxcar + 19 network). Coverage counters must all be non-zero: traces
// sent back to back, traces with gaps, hidden activations at 0 (rectified)
// and at 3 (saturated), and each qubit seen in state 0 and in state 1.
module tb_qnn_arch7_top;
  import qnn_pkg::*;

  localparam int HALF = N_FEATURES / 2;
  localparam int ROWW = N_FEATURES / 16;  // weight words per first-layer neuron
  localparam int LAT = 20;
  localparam int N_TRACES = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg = '0;
  logic adc_valid = 1'b0;
  logic signed [BOXCAR_LEN-1:0][ADC_BITS-1:0] adc_i = '0, adc_q = '0;
  logic state_valid;
  logic [N_QUBITS-1:0] qubit_state;

  qnn_arch7_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int w1 [HIDDEN][N_FEATURES];
  int t1 [HIDDEN][3];
  int w2 [N_QUBITS][HIDDEN];
  int t2 [N_QUBITS];
  int exp_state [$];
  int exp_time [$];
  int n_back_to_back = 0, n_gapped = 0, n_act0 = 0, n_act3 = 0, n_results = 0;
  int n_q0 [N_QUBITS], n_q1 [N_QUBITS];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- output checker ----------------------------------------------------
  always @(posedge clk) begin
    if (rst_n && state_valid) begin
      checks += 2;
      n_results++;
      if (exp_time.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        int e, t;
        e = exp_state.pop_front();
        t = exp_time.pop_front();
        if (cycle - t != LAT) begin failures++; $display("latency %0d expected %0d", cycle - t, LAT); end
        if (int'(qubit_state) != e) begin failures++; $display("states %b expected %b", qubit_state, N_QUBITS'(e)); end
        for (int q = 0; q < N_QUBITS; q++) if (qubit_state[q]) n_q1[q]++; else n_q0[q]++;
      end
    end
  end

  // ---- configuration ---------------------------------------------------------
  task automatic cfg_write(int unit, cfg_kind_e kind, int addr, logic [31:0] data);
    cfg = '{we: 1'b1, kind: kind, unit: CFG_UNIT_BITS'(unit), addr: CFG_ADDR_BITS'(addr), data: data};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  task automatic configure();
    // first layer: unit g holds hidden nodes 8g .. 8g+7
    for (int g = 0; g < N_SEG; g++)
      for (int n = 0; n < SEG_NODES; n++) begin
        int h, wsum;
        h = g*SEG_NODES + n;
        wsum = 0;
        for (int a = 0; a < ROWW; a++) begin
          logic [31:0] d;
          d = $urandom;
          for (int j = 0; j < 16; j++) begin
            w1[h][a*16 + j] = int'(signed'(d[2*j +: 2]));
            wsum += w1[h][a*16 + j];
          end
          cfg_write(g, CFG_WEIGHT, n*ROWW + a, d);
        end
        // boxcar features of random samples average about -0.5
        for (int t = 0; t < 3; t++) begin
          t1[h][t] = -wsum/2 + (t - 1)*60 + int'($urandom_range(0, 20)) - 10;
          cfg_write(g, CFG_THRESH, n*4 + t, 32'(t1[h][t]));
        end
      end
    // output layer: unit OUT_UNIT, 4 weight words per node, 1 threshold
    for (int q = 0; q < N_QUBITS; q++) begin
      int wsum;
      wsum = 0;
      for (int a = 0; a < HIDDEN/16; a++) begin
        logic [31:0] d;
        d = $urandom;
        for (int j = 0; j < 16; j++) begin
          w2[q][a*16 + j] = int'(signed'(d[2*j +: 2]));
          wsum += w2[q][a*16 + j];
        end
        cfg_write(OUT_UNIT, CFG_WEIGHT, q*(HIDDEN/16) + a, d);
      end
      t2[q] = (3*wsum)/2;  // hidden activations average about 1.5
      cfg_write(OUT_UNIT, CFG_THRESH, q*2, 32'(t2[q]));
    end
  endtask

  // ---- reference model ---------------------------------------------------------
  function automatic int reference(const ref int feat [N_FEATURES]);
    int hid [HIDDEN];
    int st;
    for (int h = 0; h < HIDDEN; h++) begin
      int acc;
      acc = 0;
      for (int i = 0; i < N_FEATURES; i++) acc += feat[i] * w1[h][i];
      hid[h] = 0;
      for (int t = 0; t < 3; t++) if (acc >= t1[h][t]) hid[h]++;
      if (hid[h] == 0) n_act0++;
      if (hid[h] == 3) n_act3++;
    end
    st = 0;
    for (int q = 0; q < N_QUBITS; q++) begin
      int acc;
      acc = 0;
      for (int h = 0; h < HIDDEN; h++) acc += hid[h] * w2[q][h];
      if (acc >= t2[q]) st |= (1 << q);
    end
    return st;
  endfunction

  function automatic int boxcar(logic signed [ADC_BITS-1:0] a, logic signed [ADC_BITS-1:0] b);
    int s;
    s = int'(a) + int'(b);
    return int'(signed'(IN_BITS'(s >>> (ADC_BITS + 1 - IN_BITS))));
  endfunction

  // ---- trace stimulus -----------------------------------------------------------
  task automatic send_trace(bit gaps);
    int feat [N_FEATURES];
    for (int k = 0; k < HALF; k++) begin
      logic signed [BOXCAR_LEN-1:0][ADC_BITS-1:0] vi, vq;
      if (gaps && $urandom_range(0, 15) == 0) begin
        adc_valid = 1'b0;
        @(negedge clk);
      end
      for (int j = 0; j < BOXCAR_LEN; j++) begin
        vi[j] = ADC_BITS'($urandom);
        vq[j] = ADC_BITS'($urandom);
      end
      feat[k]        = boxcar(vi[0], vi[1]);
      feat[HALF + k] = boxcar(vq[0], vq[1]);
      adc_i = vi;
      adc_q = vq;
      adc_valid = 1'b1;
      if (k == HALF - 1) begin
        exp_state.push_back(reference(feat));
        exp_time.push_back(cycle);
      end
      @(negedge clk);
    end
    adc_valid = 1'b0;
  endtask

  initial begin
    for (int q = 0; q < N_QUBITS; q++) begin n_q0[q] = 0; n_q1[q] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    configure();
    for (int tr = 0; tr < N_TRACES; tr++) begin
      bit gaps;
      gaps = (tr % 3 == 2);
      if (gaps) n_gapped++;
      else if (tr > 0 && (tr % 3) != 0) n_back_to_back++;
      if (tr % 3 == 0) repeat (5) @(negedge clk);   // idle between groups
      send_trace(gaps);
    end
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (exp_time.size() != 0) begin failures++; $display("%0d results missing", exp_time.size()); end
    checks++;
    if (n_results != N_TRACES) begin failures++; $display("%0d results for %0d traces", n_results, N_TRACES); end
    // mechanisms that must have been exercised
    checks += 4;
    if (n_back_to_back == 0) begin failures++; $display("no back-to-back trace"); end
    if (n_gapped == 0)       begin failures++; $display("no trace with gaps"); end
    if (n_act0 == 0)         begin failures++; $display("hidden activation 0 never seen"); end
    if (n_act3 == 0)         begin failures++; $display("hidden activation 3 never seen"); end
    for (int q = 0; q < N_QUBITS; q++) begin
      checks++;
      if (n_q0[q] == 0 || n_q1[q] == 0) begin
        failures++; $display("qubit %0d: state 0 seen %0d times, state 1 seen %0d times", q, n_q0[q], n_q1[q]);
      end
    end
    $display("coverage: back_to_back=%0d gapped=%0d act0=%0d act3=%0d results=%0d",
             n_back_to_back, n_gapped, n_act0, n_act3, n_results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
