// racam_device -- one RACAM DRAM device (chip): a DRAM with bit-serial
// processing-in-memory added to every bank.
//
// Blocks and wiring:
//   host CA beats -> pim_cmd_decoder (PIM mode and broadcast mode registers)
//                 -> pim_fsm (one per device, shared by all banks)
//                 -> one micro-op per cycle to all NUM_BANKS racam_bank blocks
//   host data     -> bank_broadcast (1-to-16, Bank Select)
//                 -> each bank's column_broadcast (1-to-16, Column Select)
//   each bank     <-> its sub-arrays, through the sa_* port arrays
// The DRAM cell arrays, sense amplifiers and global bitlines are conventional
// DRAM and are not part of this RTL: each bank's sub-array port is brought out
// as a req/ack port (sa_req held until sa_ack; read data valid with sa_ack).
//
// Host interface: PIM commands arrive as 14-bit beats on ca/ca_valid/ca_ready
// (see pim_cmd_decoder). Normal data accesses use host_req/host_ack: host_req
// and the address, bank, column group and write data are held until a
// one-cycle host_ack; read data are on host_rdata with host_ack. A write goes
// to host_bank, or with bank broadcast on to every bank in host_bank_sel, and
// within the 1024-bit block to column group host_col, or with column broadcast
// on to every group in host_col_sel. Host accesses wait while a compute
// command runs; a pending compute command goes before a host access.
// 'done' pulses at the end of each compute command, 'err' when a command is
// dropped. bank_acc shows each bank's reduction accumulator.
//
// Default sizes are the paper's evaluated device: 16 banks, 1024 PEs and a
// 17 x 1024 locality buffer per bank, 64-bit data path; a bank row address
// covers 128 sub-arrays x 128 rows x 16 blocks of 1024 columns.
module racam_device
  import racam_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 16,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned LB_ROWS   = 17,
  parameter int unsigned BANK_W    = $clog2(NUM_BANKS),
  parameter int unsigned GROUPS    = COLS / DATA_W,
  parameter int unsigned GRP_W     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // PIM command beats
  input  logic                 ca_valid,
  output logic                 ca_ready,
  input  logic [CA_W-1:0]      ca,
  // normal data access
  input  logic                 host_req,
  input  logic                 host_we,
  input  logic [BANK_W-1:0]    host_bank,
  input  addr_t                host_addr,
  input  logic [GRP_W-1:0]     host_col,
  input  logic [DATA_W-1:0]    host_wdata,
  input  logic [NUM_BANKS-1:0] host_bank_sel,
  input  logic [GROUPS-1:0]    host_col_sel,
  output logic                 host_ack,
  output logic [DATA_W-1:0]    host_rdata,
  // status
  output logic                 pim_mode,
  output logic                 bank_bc,
  output logic                 col_bc,
  output logic                 busy,
  output logic                 done,
  output logic                 err,
  output logic [ACC_W-1:0]     bank_acc  [NUM_BANKS],
  // sub-array ports, one per bank
  output logic                 sa_req    [NUM_BANKS],
  output logic                 sa_we     [NUM_BANKS],
  output addr_t                sa_addr   [NUM_BANKS],
  output logic [COLS-1:0]      sa_wdata  [NUM_BANKS],
  output logic [COLS-1:0]      sa_wmask  [NUM_BANKS],
  input  logic                 sa_ack    [NUM_BANKS],
  input  logic [COLS-1:0]      sa_rdata  [NUM_BANKS]
);
  logic                 cmd_valid, cmd_ready, cmd_err, fsm_err;
  pim_cmd_t             cmd;
  bank_uop_t            uop;
  logic [NUM_BANKS-1:0] bank_en, bank_busy, host_bank_en;
  logic [DATA_W-1:0]    bank_data  [NUM_BANKS];
  logic [DATA_W-1:0]    bank_rword [NUM_BANKS];

  pim_cmd_decoder u_dec (
    .clk       (clk),
    .rst_n     (rst_n),
    .ca_valid  (ca_valid),
    .ca_ready  (ca_ready),
    .ca        (ca),
    .cmd_valid (cmd_valid),
    .cmd_ready (cmd_ready),
    .cmd       (cmd),
    .pim_mode  (pim_mode),
    .bank_bc   (bank_bc),
    .col_bc    (col_bc),
    .cmd_err   (cmd_err)
  );

  // Reads always target the addressed bank only.
  bank_broadcast #(.NUM_BANKS(NUM_BANKS), .BANK_W(BANK_W)) u_bbc (
    .wr_en      (1'b1),
    .bank       (host_bank),
    .bank_bc    (bank_bc && host_we),
    .bank_sel   (host_bank_sel),
    .data_in    (host_wdata),
    .bank_wr_en (host_bank_en),
    .bank_data  (bank_data)
  );

  pim_fsm #(.NUM_BANKS(NUM_BANKS), .LB_ROWS(LB_ROWS)) u_fsm (
    .clk          (clk),
    .rst_n        (rst_n),
    .cmd_valid    (cmd_valid),
    .cmd_ready    (cmd_ready),
    .cmd          (cmd),
    .host_req     (host_req),
    .host_we      (host_we),
    .host_addr    (host_addr),
    .host_bank_en (host_bank_en),
    .host_ack     (host_ack),
    .uop          (uop),
    .bank_en      (bank_en),
    .bank_busy    (bank_busy),
    .busy         (busy),
    .done         (done),
    .err          (fsm_err)
  );

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    racam_bank #(.COLS(COLS), .LB_ROWS(LB_ROWS), .GROUPS(GROUPS), .GRP_W(GRP_W)) u_bank (
      .clk        (clk),
      .rst_n      (rst_n),
      .en         (bank_en[b]),
      .uop        (uop),
      .busy       (bank_busy[b]),
      .host_wdata (bank_data[b]),
      .host_col   (host_col),
      .col_bc     (col_bc),
      .col_sel    (host_col_sel),
      .host_rword (bank_rword[b]),
      .sa_req     (sa_req[b]),
      .sa_we      (sa_we[b]),
      .sa_addr    (sa_addr[b]),
      .sa_wdata   (sa_wdata[b]),
      .sa_wmask   (sa_wmask[b]),
      .sa_ack     (sa_ack[b]),
      .sa_rdata   (sa_rdata[b]),
      .acc        (bank_acc[b])
    );
  end

  assign host_rdata = bank_rword[host_bank];
  assign err        = cmd_err || fsm_err;

endmodule
