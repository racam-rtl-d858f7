// tb_pim_cmd_decoder -- self-checking test of the PIM command decoder.
//
// Sends beats as a host controller would and checks: mode commands set and
// clear the PIM-mode and broadcast registers; a compute command sent with PIM
// mode off, and an unknown opcode, give one err pulse and no command; a
// compute command with PIM mode on appears with its opcode, precision and
// three 18-bit operands intact after exactly 1 + 4 beats; and ca_ready stays
// low while the command waits for the FSM.
module tb_pim_cmd_decoder;
  import racam_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, ca_valid, ca_ready, cmd_valid, cmd_ready, pim_mode, bank_bc, col_bc, cmd_err;
  logic [CA_W-1:0] ca;
  pim_cmd_t cmd;
  int unsigned checks = 0, failures = 0, errs = 0, beats = 0;

  pim_cmd_decoder dut (.*);

  always @(posedge clk) begin
    if (cmd_err) errs++;
    if (ca_valid && ca_ready) beats++;
  end

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

  task automatic send_beat(logic [CA_W-1:0] beat);
    @(negedge clk);
    while (!ca_ready) @(negedge clk);
    ca_valid = 1; ca = beat;
    @(negedge clk);
    ca_valid = 0;
  endtask

  task automatic send(logic [5:0] op, logic [3:0] prec, bit bb, bit cb, addr_t d, addr_t s1, addr_t s2,
                      bit operands);
    logic [OPND_BEATS*CA_W-1:0] o;
    send_beat({op, prec, bb, cb, 2'b00});
    if (operands) begin
      o = (OPND_BEATS*CA_W)'({d, s1, s2});
      for (int b = OPND_BEATS - 1; b >= 0; b--) send_beat(o[b*CA_W +: CA_W]);
    end
  endtask

  initial begin
    rst_n = 0; ca_valid = 0; ca = '0; cmd_ready = 0;
    @(negedge clk); rst_n = 1;
    check(!pim_mode && !bank_bc && !col_bc && !cmd_valid, "reset state");
    // compute command outside PIM mode
    send(6'(OP_PIM_MUL), 4'd8, 0, 0, 18'h1, 18'h2, 18'h3, 1);
    @(negedge clk);
    check(errs == 1 && !cmd_valid, "dropped outside PIM mode");
    // unknown opcode
    send(6'b111111, 0, 0, 0, '0, '0, '0, 0);
    @(negedge clk);
    check(errs == 2, "unknown opcode flagged");
    // broadcast enable / disable
    send(6'(OP_BC_ENABLE), 0, 1, 0, '0, '0, '0, 0);
    @(negedge clk) check(bank_bc && !col_bc, "bank broadcast on");
    send(6'(OP_BC_ENABLE), 0, 0, 1, '0, '0, '0, 0);
    @(negedge clk) check(!bank_bc && col_bc, "column broadcast on");
    send(6'(OP_BC_DISABLE), 0, 0, 0, '0, '0, '0, 0);
    @(negedge clk) check(!bank_bc && !col_bc, "broadcast off");
    send(6'(OP_PIM_ENABLE), 0, 0, 0, '0, '0, '0, 0);
    @(negedge clk) check(pim_mode, "PIM mode on");
    // compute commands with random fields
    for (int t = 0; t < 200; t++) begin
      opcode_e op;
      logic [3:0] p;
      addr_t d, s1, s2;
      int b0, wait_cycles;
      case ($urandom % 4)
        0: op = OP_PIM_ADD; 1: op = OP_PIM_MUL; 2: op = OP_PIM_MUL_RED; default: op = OP_PIM_ADD_PAR;
      endcase
      p = 4'($urandom); d = addr_t'($urandom); s1 = addr_t'($urandom); s2 = addr_t'($urandom);
      b0 = beats;
      send(6'(op), p, 0, 0, d, s1, s2, 1);
      check(cmd_valid && cmd.op == op && cmd.prec == p && cmd.dst == d && cmd.src1 == s1 &&
            cmd.src2 == s2, "command fields");
      check(beats - b0 == 1 + OPND_BEATS, "1 + 4 beats per compute command");
      wait_cycles = $urandom % 4;
      repeat (wait_cycles) begin
        @(negedge clk);
        check(cmd_valid && !ca_ready, "held while the FSM is busy");
      end
      cmd_ready = 1;
      @(negedge clk);
      cmd_ready = 0;
      check(!cmd_valid && ca_ready, "released after accept");
    end
    send(6'(OP_PIM_DISABLE), 0, 0, 0, '0, '0, '0, 0);
    @(negedge clk) check(!pim_mode, "PIM mode off");
    check(errs == 2, "no spurious errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
