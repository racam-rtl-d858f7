// tb_bank_broadcast -- self-checking test of the 1-to-16 bank broadcasting
// unit: with broadcast off exactly the addressed bank is enabled, with it on
// exactly the banks of Bank Select; every bank sees the 64-bit word; nothing is
// enabled without a write.
module tb_bank_broadcast;
  import racam_pkg::*;
  localparam int unsigned NB = 16;
  logic wr_en, bank_bc;
  logic [3:0] bank;
  logic [NB-1:0] bank_sel, bank_wr_en;
  logic [DATA_W-1:0] data_in, bank_data [NB];
  int unsigned checks = 0, failures = 0;

  bank_broadcast #(.NUM_BANKS(NB)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [NB-1:0] exp_en;
      wr_en = 1'($urandom); bank_bc = 1'($urandom); bank = 4'($urandom);
      bank_sel = NB'($urandom); data_in = {$urandom, $urandom};
      #1;
      exp_en = !wr_en ? '0 : (bank_bc ? bank_sel : NB'(1) << bank);
      check(bank_wr_en == exp_en, $sformatf("enables %b want %b", bank_wr_en, exp_en));
      for (int b = 0; b < NB; b++) check(bank_data[b] == data_in, "data to every bank");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
