// bitserial_pe -- one bit-serial processing element, attached to one column of
// the locality buffer.
//
// Two generators feed an output multiplexer:
//  * SGEN: a 1-bit full adder over C, A and the carry register Q. Input B
//    selects: B = 1 gives sum_out = C + A + Q and loads the adder carry into the
//    register; B = 0 passes C to sum_out and reloads the register with its own
//    value, so the carry is kept. This one rule covers both bit-serial addition
//    (B tied to 1) and the shift-and-add multiplication step (B = multiplier bit).
//  * PGEN: product = A AND B, a 1-bit partial product.
// 'sel' picks the PGEN product (1) or the SGEN sum (0) for 'out'.
//
// Timing: 'out' is combinational from A, B, C and the register; the carry
// register updates on the rising clock edge. 'rst' clears the register
// synchronously; it is the reset pin of the paper's schematic and is driven
// both by the device reset and by the controller before each new carry chain.
// The structure (adder, two muxes, register, AND gate, output mux) follows the
// paper's PE schematic; the encoding of 'sel' and the synchronous clear are
// this design's choices.
module bitserial_pe (
  input  logic clk,
  input  logic rst,     // synchronous clear of the carry register
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic sel,     // 1: product (PGEN), 0: sum (SGEN)
  output logic out,
  output logic carry_q  // carry register, observable for test
);
  logic sum, carry, carry_d, sum_out, product;

  // SGEN
  always_comb begin
    {carry, sum} = 2'(c) + 2'(a) + 2'(carry_q);
    sum_out      = b ? sum   : c;
    carry_d      = b ? carry : carry_q;
  end

  always_ff @(posedge clk) begin
    if (rst) carry_q <= 1'b0;
    else     carry_q <= carry_d;
  end

  // PGEN
  assign product = a & b;

  assign out = sel ? product : sum_out;

endmodule
