// tb_pim_fsm -- self-checking test of the device FSM on its own.
//
// Four model banks answer each sub-array access after a random delay. For
// every compute command and precision the test counts the micro-ops the FSM
// issues and checks them against the schedule: row reads and writes, PE steps
// and popcount steps (pim_add: 2n reads, n+1 writes, n+1 PE steps; pim_mul:
// 2n reads, 2n writes, n(n+1) PE steps; pim_mul_red: 2n reads, 1 write,
// n(n+1) PE steps, 2n popcount steps; pim_add_parallel: 2 reads, 1 write,
// 2 word additions). It also checks that every operand bit address is read
// exactly once, that a host access enables only the requested banks, that an
// over-wide multiplication is refused, and that the popcount steps of
// pim_mul_red use every bit weight 0 .. 2n-1.
module tb_pim_fsm;
  import racam_pkg::*;
  localparam int unsigned NB = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, cmd_valid, cmd_ready, host_req, host_we, host_ack, busy, done, err;
  pim_cmd_t cmd;
  addr_t host_addr;
  logic [NB-1:0] host_bank_en, bank_en, bank_busy;
  bank_uop_t uop;
  int unsigned checks = 0, failures = 0;
  int unsigned n_rd, n_wr, n_pe, n_pop, n_par, n_errs;
  logic [31:0] pop_shifts;   // one bit per shift amount seen with red_pop
  int unsigned rd_addr_hits [addr_t];
  int unsigned lat [NB];

  pim_fsm #(.NUM_BANKS(NB), .LB_ROWS(17)) dut (.*);

  // model banks: busy from the cycle after a start until a random delay passes
  always @(posedge clk) begin
    if (!rst_n) begin
      bank_busy <= '0;
      for (int b = 0; b < NB; b++) lat[b] = 0;
    end else begin
      for (int b = 0; b < NB; b++) begin
        if (uop.sa_start && bank_en[b]) begin
          bank_busy[b] <= 1'b1;
          lat[b] = 1 + $urandom % 4;
        end else if (bank_busy[b]) begin
          if (lat[b] <= 1) bank_busy[b] <= 1'b0;
          else lat[b]--;
        end
      end
      if (uop.sa_start) begin
        if (uop.sa_we) n_wr++;
        else begin
          n_rd++;
          if (rd_addr_hits.exists(uop.sa_addr)) rd_addr_hits[uop.sa_addr]++;
          else rd_addr_hits[uop.sa_addr] = 1;
        end
      end
      if (uop.pe_go) n_pe++;
      if (uop.red_pop) begin n_pop++; pop_shifts[uop.red_shift] = 1'b1; end
      if (uop.red_par) n_par++;
      if (err) n_errs++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(opcode_e op, int n, addr_t d, addr_t s1, addr_t s2);
    n_rd = 0; n_wr = 0; n_pe = 0; n_pop = 0; n_par = 0; pop_shifts = '0;
    rd_addr_hits.delete();
    @(negedge clk);
    cmd_valid = 1; cmd = '{op: op, prec: prec_t'(n), dst: d, src1: s1, src2: s2};
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    rst_n = 0; cmd_valid = 0; cmd = '0; host_req = 0; host_we = 0; host_addr = '0; host_bank_en = '0;
    n_errs = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int n;
      addr_t d, s1, s2;
      n = 1 + t % 8;
      d = addr_t'({7'd0, 7'd1, 4'($urandom)}); s1 = addr_t'({7'd0, 7'd2, 4'($urandom)});
      s2 = addr_t'({7'd0, 7'd3, 4'($urandom)});
      run(OP_PIM_ADD, n, d, s1, s2);
      check(n_rd == 2*n && n_wr == n + 1 && n_pe == n + 1, $sformatf("pim_add n=%0d: %0d/%0d/%0d", n, n_rd, n_wr, n_pe));
      run(OP_PIM_MUL, n, d, s1, s2);
      check(n_rd == 2*n && n_wr == 2*n && n_pe == n*(n+1), $sformatf("pim_mul n=%0d: %0d/%0d/%0d", n, n_rd, n_wr, n_pe));
      for (int i = 0; i < n; i++)
        check(rd_addr_hits.exists(bit_addr(s1, 5'(i))) && rd_addr_hits[bit_addr(s1, 5'(i))] == 1 &&
              rd_addr_hits.exists(bit_addr(s2, 5'(i))) && rd_addr_hits[bit_addr(s2, 5'(i))] == 1,
              "each operand bit row read once");
      run(OP_PIM_MUL_RED, n, d, s1, s2);
      check(n_rd == 2*n && n_wr == 1 && n_pe == n*(n+1) && n_pop == 2*n,
            $sformatf("pim_mul_red n=%0d: %0d/%0d/%0d/%0d", n, n_rd, n_wr, n_pe, n_pop));
      check(pop_shifts == 32'((64'd1 << (2*n)) - 1), $sformatf("pim_mul_red n=%0d weights %h", n, pop_shifts));
      run(OP_PIM_ADD_PAR, 0, d, s1, s2);
      check(n_rd == 2 && n_wr == 1 && n_par == 2, "pim_add_parallel");
    end
    // over-wide multiplication
    @(negedge clk);
    cmd_valid = 1; cmd = '{op: OP_PIM_MUL, prec: 4'd9, dst: '0, src1: '0, src2: '0};
    @(negedge clk); cmd_valid = 0;
    repeat (3) @(negedge clk);
    check(n_errs == 1 && !busy, "int9 multiplication refused");
    // host access to banks 1 and 3
    @(negedge clk);
    n_wr = 0;
    host_req = 1; host_we = 1; host_addr = 18'h3; host_bank_en = 4'b1010;
    while (!host_ack) begin
      @(negedge clk);
      if (uop.sa_start) check(bank_en == 4'b1010, "host access enables the selected banks");
    end
    host_req = 0;
    check(n_wr == 1, "host write issued once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
