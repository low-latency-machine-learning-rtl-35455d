// tb_mvtu: self-checking test of one first-layer MVTU at its default size
// (512 signed 4-bit inputs, 8 neurons, 512 SIMD lanes: fully parallel, one
// vector per clock). Weights and thresholds are loaded through the shared
// configuration record; writes addressed to another unit are also issued and
// must be ignored. Random vectors stream in back to back and with gaps; every
// neuron's 2-bit activation is compared with a reference computed here and
// must appear log2(512) + 2 = 11 clocks after its vector.
module tb_mvtu;
  import qnn_pkg::*;
  localparam int MW = 512, MH = 8, LAT = 11, ROWW = MW / 16;

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg = '0;
  logic in_valid = 1'b0;
  logic [MW-1:0][IN_BITS-1:0] in_data = '0;
  logic out_valid;
  logic [MH-1:0][A_BITS-1:0] out_act;

  int checks = 0, failures = 0, cycle = 0;
  int wt [MH][MW];
  int thr [MH][3];
  int exp_act [$];   // MH entries per vector
  int exp_time [$];
  int seen [4];

  mvtu #(.UNIT_ID(3)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_time.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        int e [MH];
        int t;
        for (int n = 0; n < MH; n++) e[n] = exp_act.pop_front();
        t = exp_time.pop_front();
        if (cycle - t != LAT) begin failures++; $display("latency %0d expected %0d", cycle - t, LAT); end
        for (int n = 0; n < MH; n++) begin
          checks++;
          seen[out_act[n]]++;
          if (int'(out_act[n]) != e[n]) begin
            failures++;
            if (failures < 10) $display("neuron %0d: act %0d expected %0d", n, out_act[n], e[n]);
          end
        end
      end
    end
  end

  task automatic cfg_write(int unit, cfg_kind_e kind, int addr, logic [31:0] data);
    cfg = '{we: 1'b1, kind: kind, unit: CFG_UNIT_BITS'(unit), addr: CFG_ADDR_BITS'(addr), data: data};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  task automatic load(int unit, bit keep_model);
    for (int n = 0; n < MH; n++) begin
      for (int a = 0; a < ROWW; a++) begin
        logic [31:0] d;
        d = $urandom;
        if (keep_model) for (int j = 0; j < 16; j++) wt[n][a*16 + j] = int'(signed'(d[2*j +: 2]));
        cfg_write(unit, CFG_WEIGHT, n*ROWW + a, d);
      end
      for (int t = 0; t < 3; t++) begin
        int v;
        v = $urandom_range(0, 120) - 200 + t*120;
        if (keep_model) thr[n][t] = v;
        cfg_write(unit, CFG_THRESH, n*4 + t, 32'(v));
      end
    end
  endtask

  task automatic send_vector();
    int e [MH];
    logic [MW-1:0][IN_BITS-1:0] vec;
    for (int n = 0; n < MH; n++) e[n] = 0;
    for (int i = 0; i < MW; i++) begin
      logic [IN_BITS-1:0] x;
      x = IN_BITS'($urandom);
      vec[i] = x;
      for (int n = 0; n < MH; n++) e[n] += int'(signed'(x)) * wt[n][i];
    end
    for (int n = 0; n < MH; n++) begin
      int c;
      c = 0;
      for (int t = 0; t < 3; t++) if (e[n] >= thr[n][t]) c++;
      e[n] = c;
    end
    in_data = vec;
    in_valid = 1'b1;
    for (int n = 0; n < MH; n++) exp_act.push_back(e[n]);
    exp_time.push_back(cycle);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    load(3, 1'b1);
    load(5, 1'b0);   // another unit: must not change this MVTU
    for (int v = 0; v < 60; v++) begin
      if (v >= 30 && $urandom_range(0, 1) == 0) @(negedge clk);
      send_vector();
    end
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (exp_time.size() != 0) begin failures++; $display("%0d results missing", exp_time.size()); end
    for (int a = 0; a < 4; a++) begin
      checks++;
      if (seen[a] == 0) begin failures++; $display("activation %0d never produced", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
