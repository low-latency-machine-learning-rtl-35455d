// tb_mvtu_weight_mem: self-checking test of the PE weight memory, with a
// folded configuration (64 weights read 16 at a time, 4 folds) so that the
// fold selection is exercised. Random words are written, some words are then
// overwritten, and every fold is read back and compared weight by weight with
// a copy kept here.
module tb_mvtu_weight_mem;
  localparam int MW = 64, SIMD = 16, WB = 2, WPW = 16, WORDS = MW / WPW, SF = MW / SIMD;

  logic clk = 1'b0;
  logic wr_en = 1'b0;
  logic [1:0] wr_addr = '0;
  logic [31:0] wr_data = '0;
  logic [1:0] rd_fold = '0;
  logic signed [SIMD-1:0][WB-1:0] rd_w;

  int checks = 0, failures = 0;
  logic [31:0] model [WORDS];  // copy of the written words

  mvtu_weight_mem #(.MW(MW), .SIMD(SIMD), .W_BITS(WB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_word(int a, logic [31:0] d_in);
    logic [31:0] d;
    d = d_in;  // evaluate the argument once
    model[a] = d;
    @(negedge clk);
    wr_en = 1'b1; wr_addr = 2'(a); wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic check_all();
    for (int f = 0; f < SF; f++) begin
      @(negedge clk);
      rd_fold = 2'(f);
      #1;
      for (int s = 0; s < SIMD; s++) begin
        int k;
        logic [WB-1:0] e;
        k = f*SIMD + s;
        e = model[k / WPW][WB*(k % WPW) +: WB];
        checks++;
        if (rd_w[s] !== e) begin
          failures++;
          $display("fold %0d lane %0d: got %0d expected %0d", f, s, rd_w[s], e);
        end
      end
    end
  endtask

  initial begin
    @(posedge clk);
    for (int a = 0; a < WORDS; a++) begin
      logic [31:0] r;
      r = $urandom;
      write_word(a, r);
    end
    check_all();
    write_word(2, 32'h1B1B_E4E4);
    begin
      logic [31:0] r;
      r = $urandom;
      write_word(0, r);
    end
    check_all();
    // a cycle with wr_en low must not write
    @(negedge clk);
    wr_addr = 2'd1; wr_data = ~wr_data; wr_en = 1'b0;
    @(negedge clk);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
