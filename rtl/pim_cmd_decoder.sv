// pim_cmd_decoder -- receives PIM commands from the host's DRAM controller and
// keeps the PIM mode registers of the device.
//
// PIM commands use DRAM command encodings that are otherwise unused, and their
// operand and control fields travel over the address bus in several beats.
// Here one beat is a CA_W (14) bit word qualified by ca_valid/ca_ready:
//   beat 0 : ca[13:8] opcode, ca[7:4] prec, ca[3] bank_bc, ca[2] col_bc
//   beats 1..4 (compute commands only): {dst, src1, src2}, most significant
//            beat first, 3 x 18 address bits right-aligned in 4 x 14 bits.
// pim_enable / pim_disable set and clear the PIM-mode register, and
// broadcast_enable / broadcast_disable load and clear the bank and column
// broadcast bits; these act in the cycle after their beat and need no FSM
// work. A compute command (pim_add, pim_mul, pim_mul_red, pim_add_parallel) is
// handed to the device FSM through cmd_valid/cmd_ready; while one waits there,
// ca_ready is low. A compute command that arrives with PIM mode off, or an
// unknown opcode, is dropped with a one-cycle cmd_err pulse. Opcodes and field
// names are the paper's; the beat layout, the handshakes and the dropping of
// commands outside PIM mode are this design's choices.
module pim_cmd_decoder
  import racam_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ca_valid,
  output logic            ca_ready,
  input  logic [CA_W-1:0] ca,
  output logic            cmd_valid,
  input  logic            cmd_ready,
  output pim_cmd_t        cmd,
  output logic            pim_mode,
  output logic            bank_bc,
  output logic            col_bc,
  output logic            cmd_err
);
  typedef enum logic [1:0] {D_OPCODE, D_OPND, D_PEND} dstate_e;

  dstate_e                    state;
  logic [2:0]                 beat;
  logic [OPND_BEATS*CA_W-1:0] opnd;
  opcode_e                    op_q;
  prec_t                      prec_q;
  opcode_e                    op_in;
  logic                       is_compute;

  assign op_in      = opcode_e'(ca[CA_W-1 -: 6]);
  assign is_compute = (op_in == OP_PIM_ADD) || (op_in == OP_PIM_MUL) ||
                      (op_in == OP_PIM_MUL_RED) || (op_in == OP_PIM_ADD_PAR);
  assign ca_ready   = (state != D_PEND);
  assign cmd_valid  = (state == D_PEND);

  always_comb begin
    cmd.op   = op_q;
    cmd.prec = prec_q;
    {cmd.dst, cmd.src1, cmd.src2} = opnd[OPND_BITS-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= D_OPCODE;
      beat     <= '0;
      opnd     <= '0;
      op_q     <= OP_PIM_ADD;
      prec_q   <= '0;
      pim_mode <= 1'b0;
      bank_bc  <= 1'b0;
      col_bc   <= 1'b0;
      cmd_err  <= 1'b0;
    end else begin
      cmd_err <= 1'b0;
      unique case (state)
        D_OPCODE: if (ca_valid) begin
          case (op_in)
            OP_PIM_ENABLE:  pim_mode <= 1'b1;
            OP_PIM_DISABLE: pim_mode <= 1'b0;
            OP_BC_ENABLE:   begin bank_bc <= ca[3]; col_bc <= ca[2]; end
            OP_BC_DISABLE:  begin bank_bc <= 1'b0;  col_bc <= 1'b0;  end
            default: begin
              // the operand beats always follow a compute opcode; they are
              // collected even if the command is then dropped
              if (!is_compute) cmd_err <= 1'b1;
            end
          endcase
          if (is_compute) begin
            op_q   <= op_in;
            prec_q <= ca[7:4];
            beat   <= '0;
            state  <= D_OPND;
          end
        end
        D_OPND: if (ca_valid) begin
          opnd <= {opnd[(OPND_BEATS-1)*CA_W-1:0], ca};
          if (32'(beat) == OPND_BEATS - 1) begin
            if (pim_mode) state <= D_PEND;
            else begin
              state   <= D_OPCODE;
              cmd_err <= 1'b1;
            end
          end
          beat <= beat + 3'd1;
        end
        D_PEND: if (cmd_ready) state <= D_OPCODE;
        default: state <= D_OPCODE;
      endcase
    end
  end

  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd))
    else $error("pim_cmd_decoder: command changed while waiting for the FSM");

endmodule
