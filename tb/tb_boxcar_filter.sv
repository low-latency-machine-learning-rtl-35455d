// tb_boxcar_filter: self-checking test of the boxcar front end at its default
// size (2-point boxcar, 8-bit samples, 512 features of 4 bits).
// Three traces of random samples are streamed, the second immediately after
// the first and the third after a gap with idle cycles inside it. For every
// trace the test checks that the vector becomes valid exactly one clock after
// the last beat, stays valid for one clock, and that each feature equals the
// top four bits of the two-sample sum computed here independently.
module tb_boxcar_filter;
  import qnn_pkg::*;

  localparam int HALF = N_FEATURES / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic s_valid = 1'b0;
  logic signed [BOXCAR_LEN-1:0][ADC_BITS-1:0] s_i = '0, s_q = '0;
  logic m_valid;
  logic [N_FEATURES-1:0][IN_BITS-1:0] m_feat;

  int checks = 0, failures = 0;

  boxcar_filter dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [IN_BITS-1:0] ref_feat(logic signed [ADC_BITS-1:0] a, logic signed [ADC_BITS-1:0] b);
    int s;
    s = int'(a) + int'(b);
    return IN_BITS'(s >>> (ADC_BITS + 1 - IN_BITS));
  endfunction

  logic [IN_BITS-1:0] expect_feat [2][N_FEATURES];  // double-buffered per trace

  task automatic send_trace(bit gaps, int buf_id);
    logic signed [BOXCAR_LEN-1:0][ADC_BITS-1:0] vi, vq;
    for (int k = 0; k < HALF; k++) begin
      if (gaps && ($urandom_range(0, 3) == 0)) begin
        s_valid <= 1'b0;
        @(posedge clk);
        if (m_valid) begin failures++; $display("m_valid during trace"); end
      end
      s_valid <= 1'b1;
      for (int j = 0; j < BOXCAR_LEN; j++) begin
        vi[j] = ADC_BITS'($urandom);
        vq[j] = ADC_BITS'($urandom);
      end
      // extreme values on a few beats
      if (k == 3) begin vi = {8'sh80, 8'sh80}; vq = {8'sh7f, 8'sh7f}; end
      s_i <= vi;
      s_q <= vq;
      expect_feat[buf_id][k]        = ref_feat(vi[0], vi[1]);
      expect_feat[buf_id][HALF + k] = ref_feat(vq[0], vq[1]);
      @(posedge clk);
      if (k > 0 && m_valid) begin failures++; $display("early m_valid at beat %0d", k); end
    end
  endtask

  task automatic check_vector(int t, int buf_id);
    // called right after the clock edge that took the last beat
    #1;
    checks++;
    if (!m_valid) begin failures++; $display("trace %0d: m_valid not one cycle after last beat", t); end
    for (int f = 0; f < N_FEATURES; f++) begin
      checks++;
      if (m_feat[f] !== expect_feat[buf_id][f]) begin
        failures++;
        if (failures < 10) $display("trace %0d feature %0d: got %0d expected %0d", t, f, m_feat[f], expect_feat[buf_id][f]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    send_trace(1'b0, 0);
    fork
      check_vector(0, 0);
      send_trace(1'b0, 1);   // back-to-back: next trace starts right away
    join_any
    wait fork;
    check_vector(1, 1);
    s_valid <= 1'b0;
    repeat (5) @(posedge clk);
    #1 checks++;
    if (m_valid) begin failures++; $display("m_valid held high"); end
    @(posedge clk);
    send_trace(1'b1, 0);
    check_vector(2, 0);
    s_valid <= 1'b0;
    @(posedge clk); #1 checks++;
    if (m_valid) begin failures++; $display("m_valid longer than one cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
