// bank_broadcast -- the device-level 1-to-16 broadcasting unit between the
// 64-bit data bus and the banks.
//
// A host write normally reaches only the bank it addresses. With bank
// broadcast on, the same 64-bit word is sent to every bank whose bit is set in
// the Bank Select mask, so data that every bank needs crosses the data bus once.
// Purely combinational: each bank sees the data word (wired to all banks, as a
// demultiplexer would) and its own write-enable. The paper gives the function,
// the 64-bit width and the 1-to-16 fan-out; taking Bank Select as a per-bank
// mask is this design's choice.
module bank_broadcast
  import racam_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 16,
  parameter int unsigned BANK_W    = $clog2(NUM_BANKS)
) (
  input  logic                  wr_en,
  input  logic [BANK_W-1:0]     bank,        // addressed bank
  input  logic                  bank_bc,     // broadcast mode on
  input  logic [NUM_BANKS-1:0]  bank_sel,    // Bank Select
  input  logic [DATA_W-1:0]     data_in,
  output logic [NUM_BANKS-1:0]  bank_wr_en,
  output logic [DATA_W-1:0]     bank_data [NUM_BANKS]
);
  always_comb begin
    for (int unsigned b = 0; b < NUM_BANKS; b++) begin
      bank_data[b]  = data_in;
      bank_wr_en[b] = wr_en && (bank_bc ? bank_sel[b] : (BANK_W'(b) == bank));
    end
  end
endmodule
