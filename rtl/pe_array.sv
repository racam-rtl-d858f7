// pe_array -- the row of bit-serial PEs of one bank, one PE per column of the
// locality buffer (1024 by default, as in the evaluated configuration).
//
// All PEs share the control inputs (clear and Sel) and each takes its own
// column's A, B and C bits, so one call of the array performs the same 1-bit
// step on every column in SIMD fashion. Outputs are combinational; the carry
// registers update on the rising edge. The PE count per bank is the paper's;
// sharing one Sel across the array is this design's choice.
module pe_array #(
  parameter int unsigned COLS = 1024
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            sel,
  input  logic [COLS-1:0] a,
  input  logic [COLS-1:0] b,
  input  logic [COLS-1:0] c,
  output logic [COLS-1:0] out,
  output logic [COLS-1:0] carry_q
);
  for (genvar i = 0; i < COLS; i++) begin : g_pe
    bitserial_pe u_pe (
      .clk     (clk),
      .rst     (rst),
      .a       (a[i]),
      .b       (b[i]),
      .c       (c[i]),
      .sel     (sel),
      .out     (out[i]),
      .carry_q (carry_q[i])
    );
  end
endmodule
