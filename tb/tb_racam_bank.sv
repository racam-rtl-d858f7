// tb_racam_bank -- self-checking test of one bank's peripherals (locality
// buffer, PEs, popcount reduction, column broadcast, sub-array port) at 128
// columns, driven micro-op by micro-op as the device FSM would drive it.
//
// A small memory in the testbench answers the sub-array port after 1-3
// cycles. The test checks host writes with and without column broadcast and a
// host read; a 6-bit bit-serial addition on all 128 columns (loads, PE add
// steps, stores, final carry); a popcount reduction of 6 buffer rows written
// horizontally into columns 31:0 with the rest of the row kept; an int32
// addition through the accumulator; and that 'busy' covers each access.
module tb_racam_bank;
  import racam_pkg::*;
  localparam int unsigned COLS = 128, GROUPS = 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, en, busy, col_bc, sa_req, sa_we, sa_ack;
  bank_uop_t uop;
  logic [DATA_W-1:0] host_wdata, host_rword;
  logic [0:0] host_col;
  logic [GROUPS-1:0] col_sel;
  addr_t sa_addr;
  logic [COLS-1:0] sa_wdata, sa_wmask, sa_rdata;
  logic [ACC_W-1:0] acc;
  logic [COLS-1:0] mem [addr_t];
  int unsigned checks = 0, failures = 0, busy_cycles = 0;

  racam_bank #(.COLS(COLS), .LB_ROWS(17)) dut (.*);

  function automatic logic [COLS-1:0] rd(addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  // sub-array side
  int lat = 0;
  always @(posedge clk) begin
    sa_ack <= 1'b0;
    if (busy) busy_cycles++;
    if (sa_req && !sa_ack) begin
      if (lat == 0) lat = 1 + $urandom % 3;
      if (lat == 1) begin
        sa_ack <= 1'b1;
        if (sa_we) mem[sa_addr] = (rd(sa_addr) & ~sa_wmask) | (sa_wdata & sa_wmask);
        else sa_rdata <= rd(sa_addr);
      end
      lat--;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(bit we, addr_t a, wsrc_e src, int ld_row, int st_row);
    int c0;
    @(negedge clk);
    uop = '0; uop.sa_start = 1; uop.sa_we = we; uop.sa_addr = a; uop.sa_wsrc = src;
    uop.lb_ld_row = lb_idx_t'(ld_row); uop.lb_st_row = lb_idx_t'(st_row);
    @(negedge clk);
    uop.sa_start = 0;
    check(busy, "busy after start");
    c0 = 0;
    while (busy && c0 < 20) begin @(negedge clk); c0++; end
    check(!busy, "access acknowledged");
  endtask

  initial begin
    logic [5:0] x [COLS], y [COLS];
    logic [63:0] w;
    sa_ack = 0; sa_rdata = '0;
    rst_n = 0; en = 1; uop = '0; col_bc = 0; col_sel = '0; host_wdata = '0; host_col = '0;
    repeat (2) @(negedge clk); rst_n = 1;

    // host writes: one group, then column broadcast to both groups
    w = {$urandom, $urandom};
    host_wdata = w; host_col = 1'b1; col_bc = 0;
    access(1, 18'h100, WSRC_HOST, 0, 0);
    check(rd(18'h100) == {w, 64'd0}, "host write to group 1");
    w = {$urandom, $urandom};
    host_wdata = w; col_bc = 1; col_sel = 2'b11;
    access(1, 18'h101, WSRC_HOST, 0, 0);
    check(rd(18'h101) == {w, w}, "column broadcast to both groups");
    col_bc = 0; host_col = 1'b1;
    access(0, 18'h101, WSRC_HOST, 0, 0);
    check(host_rword == w, "host read of group 1");

    // 6-bit bit-serial addition on every column
    for (int c = 0; c < COLS; c++) begin x[c] = 6'($urandom); y[c] = 6'($urandom); end
    for (int i = 0; i < 6; i++) begin
      logic [COLS-1:0] ra, rb;
      for (int c = 0; c < COLS; c++) begin ra[c] = x[c][i]; rb[c] = y[c][i]; end
      mem[bit_addr(18'h200, 5'(i))] = ra;
      mem[bit_addr(18'h300, 5'(i))] = rb;
    end
    @(negedge clk); uop = '0; uop.pe_clr = 1;
    for (int i = 0; i <= 6; i++) begin
      if (i < 6) begin
        access(0, bit_addr(18'h200, 5'(i)), WSRC_LB, 0, 0);
        access(0, bit_addr(18'h300, 5'(i)), WSRC_LB, 1, 0);
      end
      @(negedge clk);
      uop = '0; uop.pe_go = 1; uop.pe_b_one = 1; uop.pe_c_row = 0; uop.pe_a_row = 1;
      uop.pe_a_zero = (i == 6); uop.pe_c_zero = (i == 6); uop.pe_o_row = 2;
      access(1, bit_addr(18'h400, 5'(i)), WSRC_LB, 0, 2);
    end
    for (int c = 0; c < COLS; c++) begin
      logic [6:0] s;
      for (int i = 0; i <= 6; i++) s[i] = rd(bit_addr(18'h400, 5'(i)))[c];
      check(s == 7'(x[c]) + 7'(y[c]), $sformatf("serial add col %0d", c));
    end

    // popcount reduction of the 6 sum bits still held? load them back to rows 3..8
    for (int i = 0; i < 6; i++) access(0, bit_addr(18'h400, 5'(i)), WSRC_LB, 3 + i, 0);
    for (int i = 0; i < 6; i++) begin
      @(negedge clk);
      uop = '0; uop.red_pop = 1; uop.red_row = lb_idx_t'(3 + i); uop.red_shift = 5'(i);
      uop.red_clr = (i == 0);
    end
    @(negedge clk); uop = '0;
    begin
      logic [31:0] sum;
      logic [COLS-1:0] fill;
      sum = 0;
      for (int c = 0; c < COLS; c++) sum += 32'(6'(x[c] + y[c]));
      check(acc == sum, $sformatf("reduction %0d want %0d", acc, sum));
      fill = {$urandom, $urandom, $urandom, $urandom};
      mem[18'h500] = fill;
      access(1, 18'h500, WSRC_ACC, 0, 0);
      check(rd(18'h500) == {fill[COLS-1:32], sum}, "horizontal write keeps the rest of the row");
    end

    // int32 addition through the accumulator
    for (int t = 0; t < 10; t++) begin
      logic [31:0] p, q;
      p = $urandom; q = $urandom;
      mem[18'h600] = {96'($urandom), p};
      mem[18'h601] = COLS'(q);
      access(0, 18'h600, WSRC_LB, 0, 0);
      @(negedge clk); uop = '0; uop.red_par = 1; uop.red_clr = 1; uop.red_row = 0;
      access(0, 18'h601, WSRC_LB, 0, 0);
      @(negedge clk); uop = '0; uop.red_par = 1; uop.red_row = 0;
      @(negedge clk); uop = '0;
      check(acc == p + q, "int32 addition");
    end

    // a disabled bank ignores accesses
    en = 0;
    @(negedge clk); uop = '0; uop.sa_start = 1; uop.sa_we = 1; uop.sa_addr = 18'h700;
    @(negedge clk); uop = '0;
    repeat (4) @(negedge clk);
    check(!busy && !mem.exists(18'h700), "disabled bank stays idle");
    check(busy_cycles > 0, "busy seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
