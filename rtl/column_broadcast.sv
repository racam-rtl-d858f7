// column_broadcast -- the bank-level 1-to-16 broadcasting unit that places a
// 64-bit word into the 1024-bit row buffer of a block.
//
// A normal write fills one 64-bit column group, picked by the column address.
// With column broadcast on, the word is copied into every group whose bit is
// set in the Column Select mask; the row is then written to the sub-array with
// only those groups enabled. Combinational: out_data is the word repeated across
// the row and out_mask marks the bits to write. The paper gives the function,
// the 64-bit input, the 1024-bit row and the 1-to-16 fan-out; the per-group
// mask encoding of Column Select is this design's choice.
module column_broadcast
  import racam_pkg::*;
#(
  parameter int unsigned COLS   = 1024,
  parameter int unsigned GROUPS = COLS / DATA_W,
  parameter int unsigned GRP_W  = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic [GRP_W-1:0]  col,        // addressed column group
  input  logic              col_bc,     // broadcast mode on
  input  logic [GROUPS-1:0] col_sel,    // Column Select
  input  logic [DATA_W-1:0] data_in,
  output logic [COLS-1:0]   out_data,
  output logic [COLS-1:0]   out_mask
);
  always_comb begin
    for (int unsigned g = 0; g < GROUPS; g++) begin
      out_data[g*DATA_W +: DATA_W] = data_in;
      out_mask[g*DATA_W +: DATA_W] = {DATA_W{col_bc ? col_sel[g] : (GRP_W'(g) == col)}};
    end
  end
endmodule
