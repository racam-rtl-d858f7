// dram_array_model -- behavioural model (not synthesizable) of the DRAM side of
// every bank of a device: sub-arrays, sense amplifiers and global bitlines, as
// seen from the per-bank sub-array ports of racam_device.
//
// Storage is sparse (an associative array of 1024-bit block rows keyed by bank
// and row address; unwritten rows read as zero), so the full 16 banks x 128
// sub-arrays x 128 rows x 16 blocks cost memory only for the rows used. Each
// bank's request (req held until ack) is acknowledged after a random delay of
// MIN_LAT..MAX_LAT cycles, standing in for row activation and precharge; read
// data are valid with ack, a write changes only the bits set in wmask. The
// model counts reads, writes and wait cycles per bank, so testbenches can
// check how many row accesses an operation makes. peek/poke give backdoor
// access for loading operands and checking results.
module dram_array_model
  import racam_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 16,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned MIN_LAT   = 1,
  parameter int unsigned MAX_LAT   = 4
) (
  input  logic            clk,
  input  logic            req   [NUM_BANKS],
  input  logic            we    [NUM_BANKS],
  input  addr_t           addr  [NUM_BANKS],
  input  logic [COLS-1:0] wdata [NUM_BANKS],
  input  logic [COLS-1:0] wmask [NUM_BANKS],
  output logic            ack   [NUM_BANKS],
  output logic [COLS-1:0] rdata [NUM_BANKS]
);
  logic [COLS-1:0] mem [int unsigned];
  int unsigned     reads  [NUM_BANKS];
  int unsigned     writes [NUM_BANKS];
  int unsigned     stall_cycles;
  int unsigned     wait_left [NUM_BANKS];
  bit              active    [NUM_BANKS];

  function automatic int unsigned key(int unsigned b, addr_t a);
    return (b << ADDR_W) | 32'(a);
  endfunction

  function automatic logic [COLS-1:0] peek(int unsigned b, addr_t a);
    return mem.exists(key(b, a)) ? mem[key(b, a)] : '0;
  endfunction

  function automatic void poke(int unsigned b, addr_t a, logic [COLS-1:0] d);
    mem[key(b, a)] = d;
  endfunction

  function automatic void clear_counts();
    for (int b = 0; b < NUM_BANKS; b++) begin
      reads[b]  = 0;
      writes[b] = 0;
    end
  endfunction

  initial begin
    stall_cycles = 0;
    for (int b = 0; b < NUM_BANKS; b++) begin
      ack[b]       = 1'b0;
      rdata[b]     = '0;
      reads[b]     = 0;
      writes[b]    = 0;
      wait_left[b] = 0;
      active[b]    = 1'b0;
    end
  end

  always @(posedge clk) begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      ack[b] <= 1'b0;
      if (req[b] && !ack[b]) begin
        if (!active[b]) begin
          active[b]    = 1'b1;
          wait_left[b] = MIN_LAT + ((MAX_LAT > MIN_LAT) ?
                         ($urandom % (MAX_LAT - MIN_LAT + 1)) : 0);
        end
        if (wait_left[b] > 1) begin
          wait_left[b]--;
          stall_cycles++;
        end else begin
          active[b] = 1'b0;
          ack[b]   <= 1'b1;
          if (we[b]) begin
            mem[key(b, addr[b])] = (peek(b, addr[b]) & ~wmask[b]) | (wdata[b] & wmask[b]);
            writes[b]++;
          end else begin
            rdata[b] <= peek(b, addr[b]);
            reads[b]++;
          end
        end
      end
    end
  end
endmodule
