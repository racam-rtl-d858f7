// racam_pkg -- types and constants shared by the RACAM device RTL.
//
// RACAM adds bit-serial compute to a DRAM device: every bank gets a locality
// buffer, a row of 1-bit processing elements (one per buffer column) and a
// popcount reduction unit, and one controller per device expands PIM commands
// into micro-operations that all banks execute in lockstep.
//
// What this package fixes:
//  * the device geometry of the evaluated configuration (16 banks, 128
//    sub-arrays of 128 rows, 16K columns per sub-array cut into 1024-column
//    blocks served by 1024 PEs, a 17x1024 locality buffer, 64-bit data path);
//  * the 6-bit PIM opcodes of the command table of the paper;
//  * the packed command and micro-operation structs that travel between the
//    command decoder, the device FSM and the banks.
// The row-address layout {sub-array, row, block}, the 14-bit command/address
// beat and the micro-operation fields are this design's own choices.
package racam_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned SA_W     = 7;   // 128 sub-arrays per bank
  localparam int unsigned ROW_W    = 7;   // 128 rows per sub-array
  localparam int unsigned BLK_W    = 4;   // 16K columns / 1024 = 16 blocks
  localparam int unsigned ADDR_W   = SA_W + ROW_W + BLK_W;  // bank row address
  localparam int unsigned LB_IDX_W = 5;   // enough for up to 32 buffer rows
  localparam int unsigned PREC_W   = 4;   // prec[3:0] control field
  localparam int unsigned ACC_W    = 32;  // popcount accumulator / int32 adder
  localparam int unsigned DATA_W   = 64;  // device data path width
  localparam int unsigned CA_W     = 14;  // one command/address beat

  typedef logic [ADDR_W-1:0]   addr_t;
  typedef logic [LB_IDX_W-1:0] lb_idx_t;
  typedef logic [PREC_W-1:0]   prec_t;

  // Address of bit 'i' of a vertically stored operand whose bit 0 sits at
  // 'base': successive bits go to successive sub-arrays (same row, same
  // block), so their activations can overlap (sub-array level parallelism).
  function automatic addr_t bit_addr(addr_t base, logic [4:0] i);
    return base + (addr_t'(i) << (ROW_W + BLK_W));
  endfunction

  // ---------------------------------------------------------------- opcodes
  typedef enum logic [5:0] {
    OP_BC_ENABLE   = 6'b000000,
    OP_BC_DISABLE  = 6'b000001,
    OP_PIM_ENABLE  = 6'b000010,
    OP_PIM_DISABLE = 6'b000011,
    OP_PIM_ADD     = 6'b010000,
    OP_PIM_MUL     = 6'b010001,
    OP_PIM_MUL_RED = 6'b010010,
    OP_PIM_ADD_PAR = 6'b010011
  } opcode_e;

  // A compute command after all its beats have arrived.
  typedef struct packed {
    opcode_e op;
    prec_t   prec;
    addr_t   dst;
    addr_t   src1;
    addr_t   src2;
  } pim_cmd_t;

  // Operand beats after the opcode beat: {dst, src1, src2} cut into CA_W bits.
  localparam int unsigned OPND_BITS  = 3 * ADDR_W;
  localparam int unsigned OPND_BEATS = (OPND_BITS + CA_W - 1) / CA_W;

  // ------------------------------------------------------- bank micro-ops
  // What may be written to a sub-array row.
  typedef enum logic [1:0] {
    WSRC_LB   = 2'd0,   // a whole locality-buffer row (vertical layout)
    WSRC_ACC  = 2'd1,   // the accumulator, horizontally in columns [31:0]
    WSRC_HOST = 2'd2    // a 64-bit host word through the column broadcast
  } wsrc_e;

  // One cycle of control from the device FSM to every bank.
  typedef struct packed {
    // sub-array access (started by a one-cycle pulse, finished by ack)
    logic    sa_start;
    logic    sa_we;
    addr_t   sa_addr;
    wsrc_e   sa_wsrc;
    lb_idx_t lb_ld_row;    // buffer row that receives read data
    lb_idx_t lb_st_row;    // buffer row written out when sa_wsrc == WSRC_LB
    // processing elements
    logic    pe_go;        // PEs act this cycle (else B is held at 0)
    logic    pe_clr;       // clear every carry register
    logic    pe_product;   // Sel: PGEN product instead of SGEN sum
    lb_idx_t pe_a_row;
    logic    pe_a_zero;
    lb_idx_t pe_b_row;
    logic    pe_b_one;     // B forced to 1 (addition)
    lb_idx_t pe_c_row;
    logic    pe_c_zero;
    lb_idx_t pe_o_row;     // buffer row that takes the PE outputs
    // popcount reduction
    logic    red_clr;
    logic    red_pop;      // accumulate popcount(slice) << red_shift
    logic    red_pop_pe;   // slice = PE outputs of this cycle (else a buffer row)
    logic    red_par;      // accumulate the 32-bit word in columns [31:0]
    lb_idx_t red_row;
    logic [4:0] red_shift;
  } bank_uop_t;

endpackage
