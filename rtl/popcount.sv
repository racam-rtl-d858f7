// popcount -- number of ones in a W-bit slice, as a plain adder tree.
//
// Combinational. Used by the popcount reduction unit on one bit-slice (bit i of
// every column of a bank). The output is wide enough for the all-ones slice,
// $clog2(W+1) bits (11 for 1024 columns).
module popcount #(
  parameter int unsigned W  = 1024,
  parameter int unsigned OW = $clog2(W + 1)
) (
  input  logic [W-1:0]  in,
  output logic [OW-1:0] count
);
  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < W; i++) count += OW'(in[i]);
  end
endmodule
