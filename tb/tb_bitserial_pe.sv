// tb_bitserial_pe -- self-checking test of one bit-serial PE.
//
// Part 1 drives random A, B, C, Sel and clear values and compares the output
// and the carry register every cycle with a reference written from the PE's
// rules (B = 1: full add and carry update; B = 0: C passes, carry kept;
// Sel = 1: A AND B). Part 2 uses the PE alone for a whole 8-bit bit-serial
// addition, LSB first with B tied to 1, and checks the 9-bit sum.
module tb_bitserial_pe;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, a, b, c, sel, out, carry_q;
  int unsigned checks = 0, failures = 0;

  bitserial_pe dut (.clk, .rst, .a, .b, .c, .sel, .out, .carry_q);

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
    logic q, exp_out;
    logic [1:0] s;
    rst = 1; a = 0; b = 0; c = 0; sel = 0;
    @(negedge clk);
    q = 0;
    check(carry_q == 1'b0, "carry cleared by reset");
    // part 1: random stimulus against the reference
    for (int t = 0; t < 2000; t++) begin
      rst = ($urandom % 16) == 0;
      a = 1'($urandom); b = 1'($urandom); c = 1'($urandom); sel = 1'($urandom);
      #1;
      s = 2'(a) + 2'(c) + 2'(q);
      exp_out = sel ? (a & b) : (b ? s[0] : c);
      check(out == exp_out, $sformatf("out a=%b b=%b c=%b q=%b sel=%b", a, b, c, q, sel));
      @(negedge clk);
      q = rst ? 1'b0 : (b ? s[1] : q);
      check(carry_q == q, "carry register");
    end
    // part 2: 8-bit serial addition through one PE
    for (int t = 0; t < 50; t++) begin
      logic [7:0] x, y;
      logic [8:0] r;
      x = 8'($urandom); y = 8'($urandom);
      rst = 1; @(negedge clk); rst = 0;
      for (int i = 0; i <= 8; i++) begin
        c = (i < 8) ? x[i] : 1'b0;
        a = (i < 8) ? y[i] : 1'b0;
        b = 1'b1; sel = 1'b0;
        #1 r[i] = out;
        @(negedge clk);
      end
      check(r == 9'(x) + 9'(y), $sformatf("serial add %0d + %0d = %0d", x, y, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
