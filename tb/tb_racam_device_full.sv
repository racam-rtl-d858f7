// tb_racam_device_full -- end-to-end test of racam_device at its default, full size (16 banks of 1024 columns, 17-row locality buffers).
//
// The testbench drives racam_device like a host DRAM controller would and puts
// dram_array_model on every bank's sub-array port. It
//  1. sends a compute command before PIM mode is on (must be dropped);
//  2. writes host words with bank and column broadcast on and off, and reads
//     them back through the normal data path;
//  3. turns PIM mode on and runs pim_add, pim_mul, pim_mul_red and
//     pim_add_parallel on random operands laid out vertically in every column
//     of every bank, comparing each result with arithmetic done here, and the
//     number of row reads and writes with the counts of the reuse schedule
//     (pim_mul: 2n reads and 2n writes, not the n*n of a schedule without
//     reuse);
//  4. issues a host access while a command runs (it must wait), a
//     multiplication too wide for the locality buffer (must be dropped), and
//     reads a result back after PIM mode is turned off.
// Every mechanism is counted and one that never happened is a failure.
module tb_racam_device_full;
  import racam_pkg::*;

  localparam int unsigned NB     = 16;
  localparam int unsigned COLS   = 1024;
  localparam int unsigned GROUPS = COLS / DATA_W;
  localparam int unsigned GRP_W  = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned BANK_W = $clog2(NB);
  localparam int unsigned ROUNDS = 1;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                ca_valid = 1'b0, ca_ready;
  logic [CA_W-1:0]     ca = '0;
  logic                host_req = 1'b0, host_we = 1'b0, host_ack;
  logic [BANK_W-1:0]   host_bank = '0;
  addr_t               host_addr = '0;
  logic [GRP_W-1:0]    host_col = '0;
  logic [DATA_W-1:0]   host_wdata = '0, host_rdata;
  logic [NB-1:0]       host_bank_sel = '0;
  logic [GROUPS-1:0]   host_col_sel = '0;
  logic                pim_mode, bank_bc, col_bc, busy, done, err;
  logic [ACC_W-1:0]    bank_acc [NB];
  logic                sa_req [NB], sa_we [NB], sa_ack [NB];
  addr_t               sa_addr [NB];
  logic [COLS-1:0]     sa_wdata [NB], sa_wmask [NB], sa_rdata [NB];

  racam_device dut (
    .clk, .rst_n, .ca_valid, .ca_ready, .ca,
    .host_req, .host_we, .host_bank, .host_addr, .host_col, .host_wdata,
    .host_bank_sel, .host_col_sel, .host_ack, .host_rdata,
    .pim_mode, .bank_bc, .col_bc, .busy, .done, .err, .bank_acc,
    .sa_req, .sa_we, .sa_addr, .sa_wdata, .sa_wmask, .sa_ack, .sa_rdata
  );

  dram_array_model #(.NUM_BANKS(NB), .COLS(COLS), .MIN_LAT(1), .MAX_LAT(3)) u_mem (
    .clk, .req(sa_req), .we(sa_we), .addr(sa_addr), .wdata(sa_wdata),
    .wmask(sa_wmask), .ack(sa_ack), .rdata(sa_rdata)
  );

  int unsigned checks = 0, failures = 0;
  int unsigned n_dropped = 0, n_bad_prec = 0, n_bank_bc = 0, n_col_bc = 0;
  int unsigned n_add = 0, n_mul = 0, n_mul_red = 0, n_add_par = 0;
  int unsigned n_host_stall = 0, n_mode_switch = 0, n_err_pulses = 0;
  int unsigned cyc = 0;
  bit          cmd_running = 1'b0;   // a compute command was sent and has not ended

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && err) n_err_pulses <= n_err_pulses + 1;
    if (done || err) cmd_running <= 1'b0;
  end

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ host side
  task automatic send_beat(logic [CA_W-1:0] beat);
    @(negedge clk);
    while (!ca_ready) @(negedge clk);
    ca_valid = 1'b1;
    ca       = beat;
    @(negedge clk);
    ca_valid = 1'b0;
  endtask

  task automatic send_cmd(opcode_e op, int prec, bit bbc, bit cbc,
                          addr_t dst = '0, addr_t s1 = '0, addr_t s2 = '0);
    logic [OPND_BEATS*CA_W-1:0] o;
    send_beat({op, 4'(prec), bbc, cbc, 2'b00});
    if (op inside {OP_PIM_ADD, OP_PIM_MUL, OP_PIM_MUL_RED, OP_PIM_ADD_PAR}) begin
      o = (OPND_BEATS*CA_W)'({dst, s1, s2});
      for (int b = OPND_BEATS - 1; b >= 0; b--) send_beat(o[b*CA_W +: CA_W]);
      cmd_running = 1'b1;
    end
  endtask

  task automatic wait_done();
    int t = 0;
    while (!done && t < 200000) begin
      @(negedge clk);
      t++;
    end
    check(done, "command finished");
  endtask

  task automatic host_access(bit we, int bank, addr_t a, int col, logic [63:0] wd,
                             logic [NB-1:0] bsel, logic [GROUPS-1:0] csel,
                             output logic [63:0] rd);
    @(negedge clk);
    host_req = 1'b1; host_we = we; host_bank = BANK_W'(bank); host_addr = a;
    host_col = GRP_W'(col); host_wdata = wd; host_bank_sel = bsel; host_col_sel = csel;
    @(negedge clk);
    while (!host_ack) begin
      if (cmd_running) n_host_stall++;
      @(negedge clk);
    end
    rd = host_rdata;
    host_req = 1'b0;
  endtask

  // ----------------------------------------------------- operand layout
  logic [15:0] av [NB][COLS];
  logic [15:0] bv [NB][COLS];

  function automatic void put_vertical(addr_t base, int nbits, bit second);
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < nbits; i++) begin
        logic [COLS-1:0] row;
        for (int c = 0; c < COLS; c++) row[c] = second ? bv[b][c][i] : av[b][c][i];
        u_mem.poke(b, bit_addr(base, 5'(i)), row);
      end
  endfunction

  function automatic logic [31:0] get_vertical(int b, addr_t base, int nbits, int c);
    logic [31:0] v = '0;
    for (int i = 0; i < nbits; i++) v[i] = u_mem.peek(b, bit_addr(base, 5'(i)))[c];
    return v;
  endfunction

  function automatic void randomize_operands(int n);
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < COLS; c++) begin
        av[b][c] = 16'($urandom) & 16'((1 << n) - 1);
        bv[b][c] = 16'($urandom) & 16'((1 << n) - 1);
      end
    // corner values in the first columns
    av[0][0] = 16'((1 << n) - 1); bv[0][0] = 16'((1 << n) - 1);
    av[0][1] = '0;                bv[0][1] = 16'((1 << n) - 1);
  endfunction

  function automatic bit counts_are(int rd, int wr);
    for (int b = 0; b < NB; b++)
      if (u_mem.reads[b] != rd || u_mem.writes[b] != wr) return 1'b0;
    return 1'b1;
  endfunction

  // random base address in the sub-array/row/block space; operand bits go to
  // successive sub-arrays, so the three operands use different rows
  function automatic addr_t base_addr(int slot);
    return addr_t'({7'($urandom % 128), 7'(slot), 4'($urandom % 16)});
  endfunction

  // ------------------------------------------------------------ the test
  initial begin
    logic [63:0] rd;
    addr_t d, s1, s2;
    int n;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. compute command outside PIM mode is dropped
    send_cmd(OP_PIM_ADD, 4, 0, 0, '0, '0, '0);
    repeat (3) @(negedge clk);
    check(n_err_pulses == 1 && !busy, "compute command dropped outside PIM mode");
    n_dropped += n_err_pulses;

    // 2. broadcast writes and normal reads
    begin
      logic [NB-1:0] bsel;
      logic [GROUPS-1:0] csel;
      logic [63:0] w;
      addr_t ra;
      ra   = addr_t'(18'h12345);
      w    = {$urandom, $urandom};
      bsel = NB'($urandom) | NB'(1);
      csel = GROUPS'($urandom) | GROUPS'(1);
      send_cmd(OP_BC_ENABLE, 0, 1, 1);
      @(negedge clk);
      check(bank_bc && col_bc, "broadcast mode set");
      n_mode_switch++;
      host_access(1, 0, ra, 0, w, bsel, csel, rd);
      for (int b = 0; b < NB; b++)
        for (int g = 0; g < GROUPS; g++) begin
          logic [63:0] got;
          got = u_mem.peek(b, ra)[g*64 +: 64];
          check(got == ((bsel[b] && csel[g]) ? w : 64'd0),
                $sformatf("broadcast bank %0d group %0d: got %h want %h (bsel %b csel %b)", b, g, got, w, bsel, csel));
        end
      n_bank_bc++; n_col_bc++;
      // bank broadcast only
      send_cmd(OP_BC_ENABLE, 0, 1, 0);
      w = {$urandom, $urandom};
      host_access(1, 0, ra + 1, 1 % GROUPS, w, '1, '0, rd);
      for (int b = 0; b < NB; b++)
        check(u_mem.peek(b, ra + 1) == (COLS'(w) << ((1 % GROUPS) * 64)), "bank broadcast only");
      n_bank_bc++;
      // column broadcast only
      send_cmd(OP_BC_ENABLE, 0, 0, 1);
      w = {$urandom, $urandom};
      host_access(1, NB - 1, ra + 2, 0, w, '1, '1, rd);
      for (int b = 0; b < NB; b++)
        for (int g = 0; g < GROUPS; g++)
          check(u_mem.peek(b, ra + 2)[g*64 +: 64] == ((b == NB - 1) ? w : 64'd0), "column broadcast only");
      n_col_bc++;
      send_cmd(OP_BC_DISABLE, 0, 0, 0);
      @(negedge clk);
      check(!bank_bc && !col_bc, "broadcast mode cleared");
      n_mode_switch++;
      // plain write and read back
      w = {$urandom, $urandom};
      host_access(1, 1 % NB, ra + 3, GROUPS - 1, w, '1, '1, rd);
      host_access(0, 1 % NB, ra + 3, GROUPS - 1, '0, '0, '0, rd);
      check(rd == w, "normal write then read");
      check(u_mem.peek(0, ra + 3) == '0 || NB == 1, "normal write touched one bank only");
    end

    // 3. PIM mode
    send_cmd(OP_PIM_ENABLE, 0, 0, 0);
    @(negedge clk);
    check(pim_mode, "PIM mode on");
    n_mode_switch++;

    for (int r = 0; r < ROUNDS; r++) begin
      // ---- pim_add
      n  = 1 + ($urandom % 8);
      if (r == 0) n = 8;
      d  = base_addr(1); s1 = base_addr(2); s2 = base_addr(3);
      randomize_operands(n);
      put_vertical(s1, n, 0); put_vertical(s2, n, 1);
      u_mem.clear_counts();
      send_cmd(OP_PIM_ADD, n, 0, 0, d, s1, s2);
      wait_done();
      for (int b = 0; b < NB; b++)
        for (int c = 0; c < COLS; c++)
          check(get_vertical(b, d, n + 1, c) == 32'(av[b][c]) + 32'(bv[b][c]),
                $sformatf("pim_add n=%0d bank %0d col %0d", n, b, c));
      check(counts_are(2 * n, n + 1), $sformatf("pim_add n=%0d row accesses", n));
      n_add++;

      // ---- pim_mul (with a host access racing the command)
      n  = 1 + ($urandom % 8);
      if (r == 0) n = 8;
      d  = base_addr(4); s1 = base_addr(5); s2 = base_addr(6);
      randomize_operands(n);
      put_vertical(s1, n, 0); put_vertical(s2, n, 1);
      u_mem.clear_counts();
      send_cmd(OP_PIM_MUL, n, 0, 0, d, s1, s2);
      if (r == 0) begin
        host_access(0, 0, s1, 0, '0, '0, '0, rd);
        check(rd == u_mem.peek(0, s1)[63:0], "host read issued during pim_mul");
        check(!cmd_running, "host access completed only after the command");
        // the command ran to completion before the host access was served
        u_mem.reads[0]--;
      end else wait_done();
      for (int b = 0; b < NB; b++)
        for (int c = 0; c < COLS; c++)
          check(get_vertical(b, d, 2 * n, c) == 32'(av[b][c]) * 32'(bv[b][c]),
                $sformatf("pim_mul n=%0d bank %0d col %0d", n, b, c));
      check(counts_are(2 * n, 2 * n), $sformatf("pim_mul n=%0d row accesses (2n, 2n)", n));
      n_mul++;

      // ---- pim_mul_red
      n  = 1 + ($urandom % 8);
      if (r == 0) n = 8;
      d  = base_addr(7); s1 = base_addr(8); s2 = base_addr(9);
      randomize_operands(n);
      put_vertical(s1, n, 0); put_vertical(s2, n, 1);
      begin
        logic [COLS-1:0] fill;
        for (int w = 0; w < COLS; w += 32) fill[w +: 32] = $urandom;
        for (int b = 0; b < NB; b++) u_mem.poke(b, d, fill);
        u_mem.clear_counts();
        send_cmd(OP_PIM_MUL_RED, n, 0, 0, d, s1, s2);
        wait_done();
        for (int b = 0; b < NB; b++) begin
          logic [31:0] sum;
          sum = 0;
          for (int c = 0; c < COLS; c++) sum += 32'(av[b][c]) * 32'(bv[b][c]);
          check(u_mem.peek(b, d)[31:0] == sum, $sformatf("pim_mul_red n=%0d bank %0d: got %0d want %0d", n, b, u_mem.peek(b, d)[31:0], sum));
          check(u_mem.peek(b, d)[COLS-1:32] == fill[COLS-1:32], "pim_mul_red kept the rest of the row");
          check(bank_acc[b] == sum, "accumulator holds the reduction");
        end
      end
      check(counts_are(2 * n, 1), $sformatf("pim_mul_red n=%0d row accesses (2n, 1)", n));
      n_mul_red++;

      // ---- pim_add_parallel
      d  = base_addr(10); s1 = base_addr(11); s2 = base_addr(12);
      begin
        logic [31:0] x [NB], y [NB];
        for (int b = 0; b < NB; b++) begin
          x[b] = $urandom; y[b] = $urandom;
          if (r == 0 && b == 0) begin x[b] = 32'hFFFF_FFFF; y[b] = 32'd2; end
          u_mem.poke(b, s1, (COLS'($urandom) << 32) | COLS'(x[b]));
          u_mem.poke(b, s2, COLS'(y[b]));
        end
        u_mem.clear_counts();
        send_cmd(OP_PIM_ADD_PAR, 0, 0, 0, d, s1, s2);
        wait_done();
        for (int b = 0; b < NB; b++)
          check(u_mem.peek(b, d)[31:0] == x[b] + y[b], $sformatf("pim_add_parallel bank %0d", b));
        check(counts_are(2, 1), "pim_add_parallel row accesses (2, 1)");
      end
      n_add_par++;
    end

    // 4. multiplication wider than the locality buffer allows (2n+1 > 17)
    begin
      int e0;
      e0 = n_err_pulses;
      send_cmd(OP_PIM_MUL, 9, 0, 0, base_addr(1), base_addr(2), base_addr(3));
      repeat (4) @(negedge clk);
      check(n_err_pulses == e0 + 1 && !busy, "int9 multiplication dropped");
      n_bad_prec++;
    end

    // 5. PIM mode off, result read through the normal data path
    send_cmd(OP_PIM_DISABLE, 0, 0, 0);
    @(negedge clk);
    check(!pim_mode, "PIM mode off");
    n_mode_switch++;
    host_access(0, NB - 1, d, 0, '0, '0, '0, rd);
    check(rd == u_mem.peek(NB - 1, d)[63:0], "result read back after pim_disable");

    // every mechanism must have happened
    check(n_dropped > 0,    "mechanism: command dropped outside PIM mode");
    check(n_bad_prec > 0,   "mechanism: over-wide multiplication dropped");
    check(n_bank_bc > 0,    "mechanism: bank broadcast");
    check(n_col_bc > 0,     "mechanism: column broadcast");
    check(n_mode_switch >= 4, "mechanism: PIM and broadcast mode switches");
    check(n_add > 0 && n_mul > 0 && n_mul_red > 0 && n_add_par > 0, "mechanism: all compute commands");
    check(n_host_stall > 0, "mechanism: host access stalled by a running command");
    check(u_mem.stall_cycles > 0, "mechanism: sub-array latency stalls");
    $display("mechanisms: dropped=%0d bad_prec=%0d bank_bc=%0d col_bc=%0d mode_sw=%0d add=%0d mul=%0d mul_red=%0d add_par=%0d host_stall_cycles=%0d sa_stall_cycles=%0d cycles=%0d",
             n_dropped, n_bad_prec, n_bank_bc, n_col_bc, n_mode_switch, n_add, n_mul,
             n_mul_red, n_add_par, n_host_stall, u_mem.stall_cycles, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
