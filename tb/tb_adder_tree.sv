// tb_adder_tree: self-checking test of the pipelined adder tree at its default
// size (512 signed 8-bit operands, 9 levels; an 18-bit sum so that the
// all-maximum vector does not overflow).
// A new random operand vector enters on most clocks (with a few idle clocks);
// each result must appear exactly 9 clocks after its operands and equal the
// sum computed here. Vectors of all-maximum and all-minimum operands check
// the extremes.
module tb_adder_tree;
  localparam int N = 512, IW = 8, OW = 18, LAT = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [N-1:0][IW-1:0] in_data = '0;
  logic out_valid;
  logic signed [OW-1:0] out_sum;

  int checks = 0, failures = 0;
  int exp_sum [$];
  int exp_time [$];
  int cycle = 0;

  adder_tree #(.N(N), .IW(IW), .OW(OW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare outputs against the queue of expected sums
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_sum.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        int e, t;
        e = exp_sum.pop_front();
        t = exp_time.pop_front();
        if (int'(out_sum) != e) begin failures++; $display("sum %0d expected %0d", out_sum, e); end
        checks++;
        if (cycle - t != LAT) begin failures++; $display("latency %0d expected %0d", cycle - t, LAT); end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int v = 0; v < 200; v++) begin
      int s;
      logic signed [N-1:0][IW-1:0] vec;
      s = 0;
      if ($urandom_range(0, 7) == 0) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
      for (int i = 0; i < N; i++) begin
        logic signed [IW-1:0] x;
        x = (v == 0) ? 8'sh7f : (v == 1) ? 8'sh80 : IW'($urandom);
        vec[i] = x;
        s += int'(x);
      end
      in_data = vec;
      in_valid = 1'b1;
      exp_sum.push_back(s);
      exp_time.push_back(cycle);
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (exp_sum.size() != 0) begin failures++; $display("%0d results missing", exp_sum.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
