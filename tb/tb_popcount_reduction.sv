// tb_popcount_reduction -- self-checking test of the popcount reduction unit
// at the paper's width of 1024 columns.
//
// Part 1: 16-bit values in every column, stored vertically; one bit-slice per
// cycle, least significant first, each weighted by its position; the sum must
// equal the plain sum of the 1024 values, and take exactly 16 cycles. The
// all-ones slice checks that a count of 1024 is not truncated.
// Part 2: int32 additions through the multiplexer path (par_en), with wrap.
module tb_popcount_reduction;
  import racam_pkg::*;
  localparam int unsigned COLS = 1024;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, clr, pop_en, par_en;
  logic [COLS-1:0] slice;
  logic [4:0] shift;
  logic [ACC_W-1:0] word, sum;
  logic [10:0] count;
  int unsigned checks = 0, failures = 0;

  popcount_reduction #(.COLS(COLS)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] v [COLS];
    logic [31:0] expect_sum;
    int cycles;
    rst_n = 0; clr = 0; pop_en = 0; par_en = 0; slice = '0; shift = 0; word = 0;
    @(negedge clk); rst_n = 1;
    check(sum == 0, "reset");
    for (int t = 0; t < 20; t++) begin
      expect_sum = 0;
      for (int col = 0; col < COLS; col++) begin
        v[col] = (t == 0) ? 16'hFFFF : 16'($urandom);
        expect_sum += 32'(v[col]);
      end
      cycles = 0;
      for (int i = 0; i < 16; i++) begin
        @(negedge clk);
        clr = (i == 0); pop_en = 1; shift = 5'(i);
        for (int col = 0; col < COLS; col++) slice[col] = v[col][i];
        #1 check(32'(count) == 32'($countones(slice)), "popcount of the slice");
        cycles++;
      end
      @(negedge clk); pop_en = 0; clr = 0;
      check(sum == expect_sum, $sformatf("reduction %0d want %0d", sum, expect_sum));
      check(cycles == 16, "one slice per cycle");
    end
    for (int t = 0; t < 50; t++) begin
      logic [31:0] x, y;
      x = $urandom; y = $urandom;
      if (t == 0) begin x = 32'hFFFF_FFFF; y = 32'd1; end
      @(negedge clk); clr = 1; par_en = 1; word = x; pop_en = 1; slice = '1;
      @(negedge clk); clr = 0; word = y; pop_en = 0;
      @(negedge clk); par_en = 0;
      check(sum == x + y, "int32 add through the mux");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
