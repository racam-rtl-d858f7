// popcount_reduction -- the per-bank unit that sums a value stored vertically
// in every column of the bank into one 32-bit number.
//
// With vertical (bit-serial) layout one cycle sees bit i of every column, a
// bit-slice. The unit counts the ones of the slice and adds that count,
// weighted by 2^i, to a 32-bit accumulator:  sum = sum + popcount(slice_i)*2^i.
// A multiplexer in front of the adder instead lets a 32-bit word taken from the
// locality buffer through, so the same adder also performs the int32
// bit-parallel addition of pim_add_parallel.
//
// Interface: 'clr' starts a new sum (it may come in the same cycle as an
// operation, which then adds to zero); 'pop_en' adds popcount(slice) << shift;
// 'par_en' adds 'word'. If both are set, 'par_en' wins. 'sum' is the
// accumulator register, updated on the rising edge, so a slice can be taken
// every cycle. The structure (popcount, mux, 32-bit adder, partial-sum
// register) and widths follow the paper. The paper's figure draws the
// accumulator being shifted left (most-significant slice first), while the
// text states the formula above; this design weights each count by its bit
// position instead, so slices can come least-significant first, as product
// bits leave the PEs during a fused multiply-reduce.
module popcount_reduction
  import racam_pkg::*;
#(
  parameter int unsigned COLS = 1024,
  parameter int unsigned PC_W = $clog2(COLS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             pop_en,
  input  logic [COLS-1:0]  slice,
  input  logic [4:0]       shift,
  input  logic             par_en,
  input  logic [ACC_W-1:0] word,
  output logic [ACC_W-1:0] sum,
  output logic [PC_W-1:0]  count    // popcount of the current slice
);
  logic [ACC_W-1:0] addend, base;

  popcount #(.W(COLS), .OW(PC_W)) u_pc (.in(slice), .count(count));

  always_comb begin
    addend = par_en ? word : (ACC_W'(count) << shift);   // the MUX
    base   = clr ? '0 : sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 sum <= '0;
    else if (pop_en || par_en)  sum <= base + addend;
    else if (clr)               sum <= '0;
  end

endmodule
