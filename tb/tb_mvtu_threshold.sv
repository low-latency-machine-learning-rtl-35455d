// tb_mvtu_threshold: self-checking test of the threshold memory and
// comparator at its default size (15-bit accumulator, 2-bit activation,
// three thresholds). Several threshold sets are loaded; for each, values at,
// just below and just above every threshold and random values are applied,
// and the registered activation (one clock later) is compared with the count
// of thresholds reached computed here.
module tb_mvtu_threshold;
  localparam int AB = 15, OB = 2, NT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0;
  logic [OB-1:0] wr_idx = '0;
  logic signed [AB-1:0] wr_data = '0;
  logic in_valid = 1'b0;
  logic signed [AB-1:0] in_acc = '0;
  logic out_valid;
  logic [OB-1:0] out_act;

  int checks = 0, failures = 0;
  int thr [NT];

  mvtu_threshold #(.ACC_BITS(AB), .OBITS(OB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(int t0, int t1, int t2);
    thr[0] = t0; thr[1] = t1; thr[2] = t2;
    for (int t = 0; t < NT; t++) begin
      wr_en = 1'b1; wr_idx = OB'(t); wr_data = AB'(thr[t]);
      @(negedge clk);
    end
    wr_en = 1'b0;
  endtask

  task automatic apply(int v);
    int e;
    e = 0;
    for (int t = 0; t < NT; t++) if (v >= thr[t]) e++;
    in_valid = 1'b1; in_acc = AB'(v);
    @(negedge clk);
    in_valid = 1'b0;
    checks += 2;
    if (!out_valid) begin failures++; $display("no out_valid one cycle after input"); end
    if (int'(out_act) != e) begin failures++; $display("acc %0d: act %0d expected %0d", v, out_act, e); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("out_valid after reset"); end
    load(-100, 0, 250);
    for (int t = 0; t < NT; t++) begin apply(thr[t] - 1); apply(thr[t]); apply(thr[t] + 1); end
    apply(-16384); apply(16383);
    for (int k = 0; k < 100; k++) begin
      int a, b, c;
      a = $urandom_range(0, 4000) - 8000;
      b = a + $urandom_range(0, 4000);
      c = b + $urandom_range(0, 4000);
      load(a, b, c);
      for (int r = 0; r < 5; r++) apply(int'($urandom_range(0, 16000)) - 9000);
      apply(b); apply(c - 1);
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("out_valid without input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
