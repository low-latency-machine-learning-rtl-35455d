// tb_mvtu_pe: self-checking test of one processing element in a folded
// configuration: 64 signed 4-bit inputs, 16 SIMD lanes, so every vector takes
// 4 beats and the accumulator must sum across folds. Random weights and
// thresholds are loaded through the write ports; random vectors are streamed
// back to back and with gaps. Each activation is compared with a dot product
// and threshold count computed here, and must appear log2(16) + 2 = 6 clocks
// after the vector's last beat.
module tb_mvtu_pe;
  localparam int MW = 64, SIMD = 16, IB = 4, WB = 2, OB = 2, SF = MW / SIMD;
  localparam int AB = IB + WB + 6;  // accumulator width of this configuration
  localparam int LAT = 4 + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [SIMD-1:0][IB-1:0] in_data = '0;
  logic w_we = 1'b0;
  logic [1:0] w_addr = '0;
  logic [31:0] w_data = '0;
  logic t_we = 1'b0;
  logic [OB-1:0] t_idx = '0;
  logic signed [AB-1:0] t_data = '0;
  logic out_valid;
  logic [OB-1:0] out_act;

  int checks = 0, failures = 0, cycle = 0;
  int wt [MW];
  int thr [3];
  int exp_act [$], exp_time [$];

  mvtu_pe #(.MW(MW), .SIMD(SIMD), .IN_BITS(IB), .IN_SIGNED(1'b1), .W_BITS(WB), .OBITS(OB)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks += 2;
      if (exp_act.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        int e, t;
        e = exp_act.pop_front(); t = exp_time.pop_front();
        if (int'(out_act) != e) begin failures++; $display("act %0d expected %0d", out_act, e); end
        if (cycle - t != LAT) begin failures++; $display("latency %0d expected %0d", cycle - t, LAT); end
      end
    end
  end

  task automatic load_weights();
    for (int a = 0; a < MW / 16; a++) begin
      logic [31:0] d;
      d = $urandom;
      for (int j = 0; j < 16; j++) wt[a*16 + j] = int'(signed'(d[2*j +: 2]));
      w_we = 1'b1; w_addr = 2'(a); w_data = d;
      @(negedge clk);
    end
    w_we = 1'b0;
  endtask

  task automatic load_thresholds(int a, int b, int c);
    thr[0] = a; thr[1] = b; thr[2] = c;
    for (int t = 0; t < 3; t++) begin
      t_we = 1'b1; t_idx = OB'(t); t_data = AB'(thr[t]);
      @(negedge clk);
    end
    t_we = 1'b0;
  endtask

  task automatic send_vector(bit gaps);
    int acc, e;
    acc = 0;
    for (int f = 0; f < SF; f++) begin
      logic [SIMD-1:0][IB-1:0] vec;
      if (gaps && $urandom_range(0, 2) == 0) begin in_valid = 1'b0; @(negedge clk); end
      for (int s = 0; s < SIMD; s++) begin
        logic [IB-1:0] x;
        x = IB'($urandom);
        vec[s] = x;
        acc += int'(signed'(x)) * wt[f*SIMD + s];
      end
      in_data = vec;
      in_valid = 1'b1;
      if (f == SF - 1) begin
        e = 0;
        for (int t = 0; t < 3; t++) if (acc >= thr[t]) e++;
        exp_act.push_back(e);
        exp_time.push_back(cycle);
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    load_weights();
    load_thresholds(-10, 5, 20);
    for (int v = 0; v < 40; v++) send_vector(1'b0);
    for (int v = 0; v < 40; v++) send_vector(1'b1);
    load_weights();
    load_thresholds(-30, -29, 40);
    for (int v = 0; v < 40; v++) send_vector(v[0]);
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (exp_act.size() != 0) begin failures++; $display("%0d results missing", exp_act.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
