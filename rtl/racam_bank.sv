// racam_bank -- the compute peripherals RACAM adds to one DRAM bank: the
// locality buffer, the PE array, the popcount reduction unit and the column
// broadcasting unit, joined to the bank's sub-arrays over the global bitlines.
//
// The bank has no sequencer of its own: every cycle it obeys the micro-op
// 'uop' sent by the device FSM to all banks.
//  * Sub-array access: on uop.sa_start (and 'en') the bank latches the row
//    address and, for a write, the data and the bit mask, then holds sa_req
//    until the sub-array returns sa_ack (a req/ack handshake standing in for
//    the DRAM ACT/RD/WR/PRE timing). Read data go into locality-buffer row
//    uop.lb_ld_row. Write data are a buffer row (vertical layout, all columns),
//    the accumulator (horizontal layout, columns 31:0) or a host word placed by
//    the column broadcast unit. 'busy' is high from the cycle after sa_start
//    until the acknowledge.
//  * PE step (uop.pe_go): A, B and C come from three buffer rows (A and C may
//    be forced to zero, B to one); the outputs are written to buffer row
//    uop.pe_o_row at the clock edge. When no step runs, B is held at 0, which
//    makes every PE keep its carry.
//  * Reduction: the popcount slice is either this cycle's PE outputs (fused
//    multiply-reduce) or a buffer row; the int32 word is columns 31:0 of a row.
// host_rword is the 64-bit word captured by the last host read. The block
// layout follows the paper's system figure; the handshake and the latching of
// the write data are this design's choices.
module racam_bank
  import racam_pkg::*;
#(
  parameter int unsigned COLS    = 1024,
  parameter int unsigned LB_ROWS = 17,
  parameter int unsigned GROUPS  = COLS / DATA_W,
  parameter int unsigned GRP_W   = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  bank_uop_t         uop,
  output logic              busy,
  // host write data (after bank broadcast) and column addressing
  input  logic [DATA_W-1:0] host_wdata,
  input  logic [GRP_W-1:0]  host_col,
  input  logic              col_bc,
  input  logic [GROUPS-1:0] col_sel,
  output logic [DATA_W-1:0] host_rword,
  // sub-array port (global bitlines)
  output logic              sa_req,
  output logic              sa_we,
  output addr_t             sa_addr,
  output logic [COLS-1:0]   sa_wdata,
  output logic [COLS-1:0]   sa_wmask,
  input  logic              sa_ack,
  input  logic [COLS-1:0]   sa_rdata,
  // observation
  output logic [ACC_W-1:0]  acc
);
  logic [COLS-1:0] a_data, b_data, c_data, st_data, red_data;
  logic [COLS-1:0] pe_a, pe_b, pe_c, pe_out, pe_carry;
  logic [COLS-1:0] bc_data, bc_mask, wdata_d, wmask_d;
  lb_idx_t         ld_row_q;
  wsrc_e           wsrc_q;
  logic [GRP_W-1:0] col_q;

  // ------------------------------------------------------- locality buffer
  locality_buffer #(.ROWS(LB_ROWS), .COLS(COLS)) u_lb (
    .clk     (clk),
    .ld_en   (sa_req && sa_ack && !sa_we),
    .ld_row  (ld_row_q),
    .ld_data (sa_rdata),
    .pe_en   (uop.pe_go),
    .pe_row  (uop.pe_o_row),
    .pe_data (pe_out),
    .a_row   (uop.pe_a_row),
    .b_row   (uop.pe_b_row),
    .c_row   (uop.pe_c_row),
    .st_row  (uop.lb_st_row),
    .red_row (uop.red_row),
    .a_data  (a_data),
    .b_data  (b_data),
    .c_data  (c_data),
    .st_data (st_data),
    .red_data(red_data)
  );

  // -------------------------------------------------------------- PE array
  always_comb begin
    pe_a = uop.pe_a_zero ? '0 : a_data;
    pe_c = uop.pe_c_zero ? '0 : c_data;
    pe_b = !uop.pe_go ? '0 : (uop.pe_b_one ? '1 : b_data);
  end

  pe_array #(.COLS(COLS)) u_pes (
    .clk     (clk),
    .rst     (!rst_n || uop.pe_clr),
    .sel     (uop.pe_product),
    .a       (pe_a),
    .b       (pe_b),
    .c       (pe_c),
    .out     (pe_out),
    .carry_q (pe_carry)
  );

  // ---------------------------------------------------- popcount reduction
  popcount_reduction #(.COLS(COLS)) u_red (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (uop.red_clr),
    .pop_en (uop.red_pop),
    .slice  (uop.red_pop_pe ? pe_out : red_data),
    .shift  (uop.red_shift),
    .par_en (uop.red_par),
    .word   (red_data[ACC_W-1:0]),
    .sum    (acc),
    .count  ()
  );

  // ------------------------------------------------------ column broadcast
  column_broadcast #(.COLS(COLS), .GROUPS(GROUPS), .GRP_W(GRP_W)) u_cbc (
    .col      (host_col),
    .col_bc   (col_bc),
    .col_sel  (col_sel),
    .data_in  (host_wdata),
    .out_data (bc_data),
    .out_mask (bc_mask)
  );

  // ------------------------------------------------------ sub-array access
  always_comb begin
    unique case (uop.sa_wsrc)
      WSRC_ACC:  begin wdata_d = COLS'(acc); wmask_d = COLS'({ACC_W{1'b1}}); end
      WSRC_HOST: begin wdata_d = bc_data;    wmask_d = bc_mask;              end
      default:   begin wdata_d = st_data;    wmask_d = '1;                   end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa_req     <= 1'b0;
      sa_we      <= 1'b0;
      sa_addr    <= '0;
      sa_wdata   <= '0;
      sa_wmask   <= '0;
      ld_row_q   <= '0;
      wsrc_q     <= WSRC_LB;
      col_q      <= '0;
      host_rword <= '0;
    end else begin
      if (uop.sa_start && en) begin
        sa_req   <= 1'b1;
        sa_we    <= uop.sa_we;
        sa_addr  <= uop.sa_addr;
        sa_wdata <= wdata_d;
        sa_wmask <= wmask_d;
        ld_row_q <= uop.lb_ld_row;
        wsrc_q   <= uop.sa_wsrc;
        col_q    <= host_col;
      end else if (sa_req && sa_ack) begin
        sa_req <= 1'b0;
        if (!sa_we && wsrc_q == WSRC_HOST)
          host_rword <= sa_rdata[32'(col_q)*DATA_W +: DATA_W];
      end
    end
  end

  assign busy = sa_req;

  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    sa_req && !sa_ack |=> sa_req && $stable(sa_addr) && $stable(sa_we) && $stable(sa_wdata))
    else $error("racam_bank: sub-array request changed before its acknowledge");
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    uop.sa_start && en |-> !sa_req)
    else $error("racam_bank: new sub-array access while one is pending");

endmodule
