// locality_buffer -- the per-bank buffer that keeps operand and result bits
// next to the PEs so that each DRAM row is read or written only once per
// bit-serial multiplication.
//
// ROWS x COLS bits (17 x 1024 by default, the paper's size: 2n+1 rows give full
// reuse for n = 8 bit multiplication). Two write ports and five read ports:
//  * ld    : a row coming from the sub-array over the global bitlines;
//  * pe    : the PE outputs written back into one row;
//  * a/b/c : the three rows feeding the PE inputs;
//  * st    : the row sent back to the sub-array;
//  * red   : the row seen by the popcount reduction unit.
// Reads are combinational; writes land on the rising edge. A row index past
// ROWS-1 reads as zero and is not written. The controller never writes the same
// row through both ports in one cycle (checked by an assertion); if it did, the
// load would win. The paper gives the size and purpose of the buffer; the port
// set is this design's choice, made to run one PE step per cycle. The paper's
// area model treats the buffer as SRAM; here it is a register array.
module locality_buffer
  import racam_pkg::*;
#(
  parameter int unsigned ROWS = 17,
  parameter int unsigned COLS = 1024
) (
  input  logic            clk,
  input  logic            ld_en,
  input  lb_idx_t         ld_row,
  input  logic [COLS-1:0] ld_data,
  input  logic            pe_en,
  input  lb_idx_t         pe_row,
  input  logic [COLS-1:0] pe_data,
  input  lb_idx_t         a_row,
  input  lb_idx_t         b_row,
  input  lb_idx_t         c_row,
  input  lb_idx_t         st_row,
  input  lb_idx_t         red_row,
  output logic [COLS-1:0] a_data,
  output logic [COLS-1:0] b_data,
  output logic [COLS-1:0] c_data,
  output logic [COLS-1:0] st_data,
  output logic [COLS-1:0] red_data
);
  logic [COLS-1:0] mem [ROWS];

  function automatic logic [COLS-1:0] rd(lb_idx_t r);
    return (32'(r) < ROWS) ? mem[r] : '0;
  endfunction

  always_comb begin
    a_data   = rd(a_row);
    b_data   = rd(b_row);
    c_data   = rd(c_row);
    st_data  = rd(st_row);
    red_data = rd(red_row);
  end

  always_ff @(posedge clk) begin
    if (pe_en && 32'(pe_row) < ROWS) mem[pe_row] <= pe_data;
    if (ld_en && 32'(ld_row) < ROWS) mem[ld_row] <= ld_data;
  end

  a_one_writer: assert property (@(posedge clk) !(ld_en && pe_en && ld_row == pe_row))
    else $error("locality_buffer: two writes to row %0d in one cycle", ld_row);

endmodule
