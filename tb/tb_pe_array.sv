// tb_pe_array -- self-checking test of a 64-column PE array.
//
// Runs the paper's shift-and-add multiplication on every column at once:
// 4-bit op1 and op2 per column, result bits kept in a software copy of the
// locality buffer. Step 0 uses the product output (Sel = 1), later steps the
// sum with B = op2 bit; carries are cleared before each step and the carry-out
// is taken with A = C = 0. The 8-bit products are compared with plain
// multiplication, and the carries are checked to be held while B = 0.
module tb_pe_array;
  localparam int unsigned COLS = 64;
  localparam int unsigned N = 4;
  localparam int unsigned W2 = 2 * N;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, sel;
  logic [COLS-1:0] a, b, c, out, carry_q;
  int unsigned checks = 0, failures = 0;

  pe_array #(.COLS(COLS)) dut (.clk, .rst, .sel, .a, .b, .c, .out, .carry_q);

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
    logic [N-1:0]   x [COLS], y [COLS];
    logic [2*N-1:0] res [COLS];
    logic [COLS-1:0] held;
    rst = 1; sel = 0; a = '0; b = '0; c = '0;
    @(negedge clk);
    for (int t = 0; t < 40; t++) begin
      for (int col = 0; col < COLS; col++) begin
        x[col] = N'($urandom); y[col] = N'($urandom); res[col] = '0;
      end
      for (int j = 0; j < N; j++) begin
        rst = 1; @(negedge clk); rst = 0;
        for (int k = 0; k <= N; k++) begin
          sel = (j == 0);
          for (int col = 0; col < COLS; col++) begin
            a[col] = (k < N) ? x[col][k] : 1'b0;
            b[col] = y[col][j];
            c[col] = (k < N && j > 0) ? res[col][j+k] : 1'b0;
          end
          #1;
          for (int col = 0; col < COLS; col++) res[col][j+k] = out[col];
          @(negedge clk);
          if (k == 0) begin
            // a cycle with B = 0 must keep every carry
            held = carry_q;
            b = '0; a = '1; c = '1; sel = 0;
            @(negedge clk);
            check(carry_q == held, "carries held while B = 0");
          end
        end
      end
      for (int col = 0; col < COLS; col++)
        check(res[col] == W2'(x[col]) * W2'(y[col]),
              $sformatf("col %0d: %0d * %0d gave %0d", col, x[col], y[col], res[col]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
