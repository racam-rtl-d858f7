// tb_racam_gemm -- a slice of an int8 GEMM/GEMV run on one full-size device
// (16 banks x 1024 PEs, default parameters), the way a matrix multiplication
// is laid out on RACAM.
//
// Y[M_T x N_T] = X[M_T x K] * W[K x N_T] with K = 2048, N_T = 32, M_T = 2
// (M_T = 1 is a GEMV). The K dimension is spread over the 1024 columns of a
// block, in K/1024 = 2 blocks; the N dimension over the 16 banks, two output
// columns per bank. Every operand is stored vertically, 8 bit rows each.
//  * W is static and placed ahead of time in each bank (back door).
//  * X, the dynamic operand that every bank needs, is written by the host
//    once through the data bus with bank broadcast on: one 64-bit bus write
//    reaches all 16 banks. The test checks that each bank received every row
//    while the bus carried only 1/16 of the bank writes.
//  * For every (m, n, k-block) one pim_mul_red multiplies the 1024 column
//    pairs and reduces them to a 32-bit partial sum; pim_add_parallel adds
//    the two k-block partial sums. All 16 banks do this at once.
//  * After pim_disable the host reads every Y element through normal reads
//    and compares it with a dot product computed here.
// Row accesses per pim_mul_red (16 reads, 1 write) are checked as well, and
// the cycle count of each phase is printed.
module tb_racam_gemm;
  import racam_pkg::*;
  localparam int unsigned NB     = 16;
  localparam int unsigned COLS   = 1024;
  localparam int unsigned GROUPS = COLS / DATA_W;
  localparam int unsigned K      = 2048;
  localparam int unsigned KB     = K / COLS;      // k-blocks
  localparam int unsigned NPB    = 2;             // outputs per bank
  localparam int unsigned NT     = NB * NPB;
  localparam int unsigned MT     = 2;
  localparam int unsigned PREC   = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                ca_valid = 1'b0, ca_ready;
  logic [CA_W-1:0]     ca = '0;
  logic                host_req = 1'b0, host_we = 1'b0, host_ack;
  logic [3:0]          host_bank = '0;
  addr_t               host_addr = '0;
  logic [3:0]          host_col = '0;
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

  int unsigned checks = 0, failures = 0, cyc = 0, n_err = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && err) n_err <= n_err + 1;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
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
    ca_valid = 1'b1; ca = beat;
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
    end
  endtask

  task automatic wait_done();
    int t = 0;
    while (!done && t < 100000) begin @(negedge clk); t++; end
    check(done, "command finished");
  endtask

  task automatic host_access(bit we, int bank, addr_t a, int col, logic [63:0] wd,
                             logic [NB-1:0] bsel, output logic [63:0] rd);
    @(negedge clk);
    host_req = 1'b1; host_we = we; host_bank = 4'(bank); host_addr = a;
    host_col = 4'(col); host_wdata = wd; host_bank_sel = bsel; host_col_sel = '0;
    @(negedge clk);
    while (!host_ack) @(negedge clk);
    rd = host_rdata;
    host_req = 1'b0;
  endtask

  // operand placement: base rows in sub-array 0, block 0; bits in sub-arrays 0..7
  function automatic addr_t x_addr(int m, int kb);        return addr_t'({7'd0, 7'(10 + m*KB + kb), 4'd0}); endfunction
  function automatic addr_t w_addr(int j, int kb);        return addr_t'({7'd0, 7'(20 + j*KB + kb), 4'd0}); endfunction
  function automatic addr_t p_addr(int m, int j, int kb); return addr_t'({7'd0, 7'(40 + (m*NPB + j)*KB + kb), 4'd0}); endfunction
  function automatic addr_t y_addr(int m, int j);         return addr_t'({7'd0, 7'(80 + m*NPB + j), 4'd0}); endfunction

  logic [7:0]  xm [MT][K];
  logic [7:0]  wm [NT][K];
  logic [31:0] yref [MT][NT];

  initial begin
    logic [63:0] rd;
    int unsigned host_writes, t0;
    for (int m = 0; m < MT; m++) for (int k = 0; k < K; k++) xm[m][k] = 8'($urandom);
    for (int n = 0; n < NT; n++) for (int k = 0; k < K; k++) wm[n][k] = 8'($urandom);
    xm[0][0] = 8'hff; wm[0][0] = 8'hff;
    for (int m = 0; m < MT; m++)
      for (int n = 0; n < NT; n++) begin
        yref[m][n] = 0;
        for (int k = 0; k < K; k++) yref[m][n] += 32'(xm[m][k]) * 32'(wm[n][k]);
      end
    // static weights, placed vertically ahead of time: output n = b*NPB + j
    for (int b = 0; b < NB; b++)
      for (int j = 0; j < NPB; j++)
        for (int kb = 0; kb < KB; kb++)
          for (int i = 0; i < PREC; i++) begin
            logic [COLS-1:0] row;
            for (int c = 0; c < COLS; c++) row[c] = wm[b*NPB + j][kb*COLS + c][i];
            u_mem.poke(b, bit_addr(w_addr(j, kb), 5'(i)), row);
          end

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- activations: one bus write per 64 bits, broadcast to all 16 banks
    t0 = cyc;
    send_cmd(OP_BC_ENABLE, 0, 1'b1, 1'b0);
    @(negedge clk);
    check(bank_bc && !col_bc, "bank broadcast on");
    u_mem.clear_counts();
    host_writes = 0;
    for (int m = 0; m < MT; m++)
      for (int kb = 0; kb < KB; kb++)
        for (int i = 0; i < PREC; i++)
          for (int g = 0; g < GROUPS; g++) begin
            logic [63:0] w;
            for (int t = 0; t < 64; t++) w[t] = xm[m][kb*COLS + g*64 + t][i];
            host_access(1'b1, 0, bit_addr(x_addr(m, kb), 5'(i)), g, w, '1, rd);
            host_writes++;
          end
    for (int b = 0; b < NB; b++) begin
      check(u_mem.writes[b] == host_writes, $sformatf("bank %0d got every broadcast write", b));
      for (int m = 0; m < MT; m++)
        for (int kb = 0; kb < KB; kb++)
          for (int i = 0; i < PREC; i++) begin
            logic [COLS-1:0] row, want;
            row = u_mem.peek(b, bit_addr(x_addr(m, kb), 5'(i)));
            for (int c = 0; c < COLS; c++) want[c] = xm[m][kb*COLS + c][i];
            check(row == want, $sformatf("activation row m=%0d kb=%0d bit %0d in bank %0d", m, kb, i, b));
          end
    end
    $display("activations: %0d bus writes delivered %0d bank row writes in %0d cycles",
             host_writes, host_writes * NB, cyc - t0);
    send_cmd(OP_BC_DISABLE, 0, 1'b0, 1'b0);

    // ---- compute
    send_cmd(OP_PIM_ENABLE, 0, 1'b0, 1'b0);
    @(negedge clk);
    check(pim_mode, "PIM mode on");
    t0 = cyc;
    for (int m = 0; m < MT; m++)
      for (int j = 0; j < NPB; j++) begin
        for (int kb = 0; kb < KB; kb++) begin
          u_mem.clear_counts();
          send_cmd(OP_PIM_MUL_RED, PREC, 1'b0, 1'b0, p_addr(m, j, kb), w_addr(j, kb), x_addr(m, kb));
          wait_done();
          for (int b = 0; b < NB; b++)
            check(u_mem.reads[b] == 2*PREC && u_mem.writes[b] == 1,
                  $sformatf("pim_mul_red bank %0d: %0d reads, %0d writes", b, u_mem.reads[b], u_mem.writes[b]));
        end
        send_cmd(OP_PIM_ADD_PAR, 0, 1'b0, 1'b0, y_addr(m, j), p_addr(m, j, 0), p_addr(m, j, 1));
        wait_done();
      end
    $display("compute: %0d pim_mul_red + %0d pim_add_parallel on %0d banks in %0d cycles",
             MT*NPB*KB, MT*NPB, NB, cyc - t0);
    send_cmd(OP_PIM_DISABLE, 0, 1'b0, 1'b0);
    @(negedge clk);
    check(!pim_mode, "PIM mode off");

    // ---- results through normal reads
    for (int b = 0; b < NB; b++)
      for (int m = 0; m < MT; m++)
        for (int j = 0; j < NPB; j++) begin
          host_access(1'b0, b, y_addr(m, j), 0, '0, '0, rd);
          check(rd[31:0] == yref[m][b*NPB + j],
                $sformatf("Y[%0d][%0d] = %0d, want %0d", m, b*NPB + j, rd[31:0], yref[m][b*NPB + j]));
        end
    check(n_err == 0, "no command dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
