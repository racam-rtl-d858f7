// pim_fsm -- the per-device controller that turns PIM compute commands into
// micro-operations executed by every bank in lockstep, and that also carries
// the host's normal reads and writes to the banks.
//
// Each cycle it drives one bank_uop_t to all banks. A sub-array access is a
// one-cycle sa_start pulse; each bank then holds its request until its
// sub-array acknowledges, and the FSM waits (state S_WAIT) until no enabled
// bank is busy, so a slow sub-array stalls the whole device.
//
// Sequences (n = prec, op1 = src1, op2 = src2, bit i of an operand at
// bit_addr(base, i)):
//  pim_add        for i < n: load op1[i], load op2[i], one PE add step (B = 1),
//                 store sum bit to dst[i]; then one step on zeros stores the
//                 carry to dst[n]. 2n reads, n+1 writes.
//  pim_mul        the paper's reuse scheme. Buffer rows 0..n-1 hold op1, row n
//                 the current op2 bit, rows n+1..2n a circular window of n
//                 result bits (2n+1 rows). Load op1 once. For each op2 bit j:
//                 load it, clear the carries, then n+1 PE steps k = 0..n update
//                 result bits j..j+n (step 0 uses the PGEN product a_k & b_0).
//                 Result bit j is final after k = 0 and is stored at once; its
//                 row then takes bit j+n (the carry) at k = n. Finally bits
//                 n..2n-1 are stored. 2n reads, 2n writes: O(n) row accesses.
//  pim_mul_red    as pim_mul, but each final product bit-slice goes straight
//                 from the PEs into the popcount reduction unit instead of to
//                 DRAM, weighted by 2^bit; the 32-bit sum is written
//                 horizontally (columns 31:0) into row dst. 2n reads, 1 write.
//  pim_add_parallel  load row src1, add its columns 31:0 as an int32 into the
//                 cleared accumulator, load row src2 and add it, write the sum
//                 horizontally into row dst.
// A multiplication whose 2n+1 rows do not fit the buffer, or an add or
// multiplication with n = 0, is dropped with an err pulse. 'done' pulses when a compute command ends.
//
// The command set and the multiplication schedule follow the paper; the
// micro-operation encoding, the stall rule, the row assignment for pim_add and
// the placement of reduction results in columns 31:0 are this design's
// choices. Multiplication is unsigned.
module pim_fsm
  import racam_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 16,
  parameter int unsigned LB_ROWS   = 17
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // compute commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  pim_cmd_t             cmd,
  // host access
  input  logic                 host_req,
  input  logic                 host_we,
  input  addr_t                host_addr,
  input  logic [NUM_BANKS-1:0] host_bank_en,
  output logic                 host_ack,
  // banks
  output bank_uop_t            uop,
  output logic [NUM_BANKS-1:0] bank_en,
  input  logic [NUM_BANKS-1:0] bank_busy,
  // status
  output logic                 busy,
  output logic                 done,
  output logic                 err
);
  typedef enum logic [4:0] {
    S_IDLE, S_WAIT, S_HOST, S_HOST_DONE, S_DONE,
    S_ADD_LD1, S_ADD_LD2, S_ADD_PE, S_ADD_ST, S_ADD_CY, S_ADD_CST,
    S_MUL_LDA, S_MUL_LDB, S_MUL_PE, S_MUL_ST, S_MUL_FL, S_RED_WR,
    S_AP_LD1, S_AP_ACC1, S_AP_LD2, S_AP_ACC2, S_AP_WR
  } state_e;

  state_e   state, ret;
  pim_cmd_t c;                 // command being executed
  logic [4:0] i, j, k;         // bit, step and PE-step counters
  logic [4:0] n;
  logic [NUM_BANKS-1:0] host_en_q;

  assign n = 5'(c.prec);

  // buffer row holding result bit m of the circular window
  function automatic lb_idx_t res_row(logic [4:0] nn, logic [5:0] m);
    logic [5:0] r;
    r = (m >= 6'(nn)) ? m - 6'(nn) : m;
    return lb_idx_t'(6'(nn) + 6'd1 + r);
  endfunction

  function automatic logic prec_ok(pim_cmd_t cc);
    if (cc.op == OP_PIM_MUL || cc.op == OP_PIM_MUL_RED)
      return cc.prec != '0 && (2 * 32'(cc.prec) + 1) <= LB_ROWS;
    if (cc.op == OP_PIM_ADD) return cc.prec != '0 && LB_ROWS >= 3;
    return 1'b1;    // pim_add_parallel has no precision field
  endfunction

  // ------------------------------------------------------------ micro-ops
  always_comb begin
    uop = '0;
    uop.sa_wsrc = WSRC_LB;
    unique case (state)
      S_HOST: begin
        uop.sa_start = 1'b1;
        uop.sa_we    = host_we;
        uop.sa_addr  = host_addr;
        uop.sa_wsrc  = WSRC_HOST;
        uop.lb_ld_row = '0;
      end
      // ---------------------------------------------------------- pim_add
      S_ADD_LD1: begin
        uop.sa_start  = 1'b1;
        uop.sa_addr   = bit_addr(c.src1, i);
        uop.lb_ld_row = lb_idx_t'(0);
        uop.pe_clr    = (i == '0);
      end
      S_ADD_LD2: begin
        uop.sa_start  = 1'b1;
        uop.sa_addr   = bit_addr(c.src2, i);
        uop.lb_ld_row = lb_idx_t'(1);
      end
      S_ADD_PE, S_ADD_CY: begin
        uop.pe_go    = 1'b1;
        uop.pe_b_one = 1'b1;
        uop.pe_c_row = lb_idx_t'(0);
        uop.pe_a_row = lb_idx_t'(1);
        uop.pe_a_zero = (state == S_ADD_CY);
        uop.pe_c_zero = (state == S_ADD_CY);
        uop.pe_o_row = lb_idx_t'(2);
      end
      S_ADD_ST, S_ADD_CST: begin
        uop.sa_start  = 1'b1;
        uop.sa_we     = 1'b1;
        uop.sa_addr   = bit_addr(c.dst, (state == S_ADD_CST) ? n : i);
        uop.lb_st_row = lb_idx_t'(2);
      end
      // ---------------------------------------------------------- pim_mul
      S_MUL_LDA: begin
        uop.sa_start  = 1'b1;
        uop.sa_addr   = bit_addr(c.src1, i);
        uop.lb_ld_row = lb_idx_t'(i);
      end
      S_MUL_LDB: begin
        uop.sa_start  = 1'b1;
        uop.sa_addr   = bit_addr(c.src2, j);
        uop.lb_ld_row = lb_idx_t'(n);
        uop.pe_clr    = 1'b1;
      end
      S_MUL_PE: begin
        uop.pe_go      = 1'b1;
        uop.pe_product = (j == '0);
        uop.pe_b_row   = lb_idx_t'(n);
        uop.pe_a_row   = lb_idx_t'(k);
        uop.pe_a_zero  = (k == n);
        uop.pe_c_row   = res_row(n, 6'(j) + 6'(k));
        uop.pe_c_zero  = (k == n) || (j == '0);
        uop.pe_o_row   = res_row(n, 6'(j) + 6'(k));
        if (k == '0 && c.op == OP_PIM_MUL_RED) begin
          uop.red_pop    = 1'b1;
          uop.red_pop_pe = 1'b1;
          uop.red_shift  = j;
          uop.red_clr    = (j == '0);
        end
      end
      S_MUL_ST: begin
        uop.sa_start  = 1'b1;
        uop.sa_we     = 1'b1;
        uop.sa_addr   = bit_addr(c.dst, j);
        uop.lb_st_row = res_row(n, 6'(j));
      end
      S_MUL_FL: begin
        if (c.op == OP_PIM_MUL) begin
          uop.sa_start  = 1'b1;
          uop.sa_we     = 1'b1;
          uop.sa_addr   = bit_addr(c.dst, n + i);
          uop.lb_st_row = res_row(n, 6'(i));
        end else begin
          uop.red_pop   = 1'b1;
          uop.red_row   = res_row(n, 6'(i));
          uop.red_shift = n + i;
        end
      end
      S_RED_WR, S_AP_WR: begin
        uop.sa_start = 1'b1;
        uop.sa_we    = 1'b1;
        uop.sa_addr  = c.dst;
        uop.sa_wsrc  = WSRC_ACC;
      end
      // ------------------------------------------------- pim_add_parallel
      S_AP_LD1, S_AP_LD2: begin
        uop.sa_start  = 1'b1;
        uop.sa_addr   = (state == S_AP_LD1) ? c.src1 : c.src2;
        uop.lb_ld_row = lb_idx_t'(0);
      end
      S_AP_ACC1, S_AP_ACC2: begin
        uop.red_par = 1'b1;
        uop.red_clr = (state == S_AP_ACC1);
        uop.red_row = lb_idx_t'(0);
      end
      default: ;
    endcase
  end

  assign bank_en   = (state == S_HOST || ret == S_HOST_DONE) ? host_en_q : '1;
  assign cmd_ready = (state == S_IDLE) && cmd_valid;
  assign busy      = (state != S_IDLE);
  assign host_ack  = (state == S_HOST_DONE);

  // ------------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ret       <= S_IDLE;
      c         <= '0;
      i         <= '0;
      j         <= '0;
      k         <= '0;
      host_en_q <= '0;
      done      <= 1'b0;
      err       <= 1'b0;
    end else begin
      done <= 1'b0;
      err  <= 1'b0;
      unique case (state)
        S_IDLE: begin
          i <= '0; j <= '0; k <= '0;
          ret <= S_IDLE;
          if (cmd_valid) begin
            c <= cmd;
            if (!prec_ok(cmd)) err <= 1'b1;
            else unique case (cmd.op)
              OP_PIM_ADD:     state <= S_ADD_LD1;
              OP_PIM_MUL,
              OP_PIM_MUL_RED: state <= S_MUL_LDA;
              OP_PIM_ADD_PAR: state <= S_AP_LD1;
              default:        err   <= 1'b1;
            endcase
          end else if (host_req) begin
            host_en_q <= host_bank_en;
            state     <= S_HOST;
          end
        end
        S_WAIT: if ((bank_busy & bank_en) == '0) state <= ret;
        S_HOST: begin ret <= S_HOST_DONE; state <= S_WAIT; end
        S_HOST_DONE: begin ret <= S_IDLE; state <= S_IDLE; end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        // pim_add
        S_ADD_LD1: begin ret <= S_ADD_LD2; state <= S_WAIT; end
        S_ADD_LD2: begin ret <= S_ADD_PE;  state <= S_WAIT; end
        S_ADD_PE:  state <= S_ADD_ST;
        S_ADD_ST: begin
          ret   <= (i == n - 5'd1) ? S_ADD_CY : S_ADD_LD1;
          i     <= i + 5'd1;
          state <= S_WAIT;
        end
        S_ADD_CY:  state <= S_ADD_CST;
        S_ADD_CST: begin ret <= S_DONE; state <= S_WAIT; end
        // pim_mul / pim_mul_red
        S_MUL_LDA: begin
          ret   <= (i == n - 5'd1) ? S_MUL_LDB : S_MUL_LDA;
          i     <= (i == n - 5'd1) ? '0 : i + 5'd1;
          state <= S_WAIT;
        end
        S_MUL_LDB: begin k <= '0; ret <= S_MUL_PE; state <= S_WAIT; end
        S_MUL_PE: begin
          k <= k + 5'd1;
          if (k == '0 && c.op == OP_PIM_MUL) state <= S_MUL_ST;
          else if (k == n) begin
            j     <= j + 5'd1;
            i     <= '0;
            state <= (j == n - 5'd1) ? S_MUL_FL : S_MUL_LDB;
          end
        end
        S_MUL_ST: begin ret <= S_MUL_PE; state <= S_WAIT; end
        S_MUL_FL: begin
          i <= i + 5'd1;
          if (c.op == OP_PIM_MUL) begin
            ret   <= (i == n - 5'd1) ? S_DONE : S_MUL_FL;
            state <= S_WAIT;
          end else if (i == n - 5'd1) state <= S_RED_WR;
        end
        S_RED_WR: begin ret <= S_DONE; state <= S_WAIT; end
        // pim_add_parallel
        S_AP_LD1:  begin ret <= S_AP_ACC1; state <= S_WAIT; end
        S_AP_ACC1: state <= S_AP_LD2;
        S_AP_LD2:  begin ret <= S_AP_ACC2; state <= S_WAIT; end
        S_AP_ACC2: state <= S_AP_WR;
        S_AP_WR:   begin ret <= S_DONE; state <= S_WAIT; end
        default:   state <= S_IDLE;
      endcase
    end
  end

  a_no_start_while_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_WAIT |-> !uop.sa_start)
    else $error("pim_fsm: sub-array access started while waiting");

endmodule
