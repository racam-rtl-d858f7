// tb_locality_buffer -- self-checking test of a 17 x 64 locality buffer.
//
// Writes random rows through the load port and the PE port (never the same row
// twice in a cycle), keeps a reference copy, and checks all five read ports on
// random rows every cycle, including rows past the end, which read as zero.
module tb_locality_buffer;
  import racam_pkg::*;
  localparam int unsigned ROWS = 17, COLS = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic ld_en, pe_en;
  lb_idx_t ld_row, pe_row, a_row, b_row, c_row, st_row, red_row;
  logic [COLS-1:0] ld_data, pe_data, a_data, b_data, c_data, st_data, red_data;
  logic [COLS-1:0] ref_mem [32];
  int unsigned checks = 0, failures = 0;

  locality_buffer #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

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

  function automatic logic [COLS-1:0] exp_rd(lb_idx_t r);
    return (r < ROWS) ? ref_mem[r] : '0;
  endfunction

  initial begin
    ld_en = 0; pe_en = 0;
    // fill every row first
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      ld_en = 1; ld_row = lb_idx_t'(r); ld_data = {$urandom, $urandom};
      ref_mem[r] = ld_data;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      ld_en = 1'($urandom); pe_en = 1'($urandom);
      ld_row = lb_idx_t'($urandom % 20); pe_row = lb_idx_t'($urandom % 20);
      if (pe_row == ld_row) pe_en = 0;
      ld_data = {$urandom, $urandom}; pe_data = {$urandom, $urandom};
      a_row = lb_idx_t'($urandom % 20); b_row = lb_idx_t'($urandom % 20);
      c_row = lb_idx_t'($urandom % 20); st_row = lb_idx_t'($urandom % 20);
      red_row = lb_idx_t'($urandom % 20);
      #1;
      check(a_data == exp_rd(a_row) && b_data == exp_rd(b_row) && c_data == exp_rd(c_row) &&
            st_data == exp_rd(st_row) && red_data == exp_rd(red_row), "read ports");
      if (ld_en && ld_row < ROWS) ref_mem[ld_row] = ld_data;
      if (pe_en && pe_row < ROWS) ref_mem[pe_row] = pe_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
