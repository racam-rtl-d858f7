// tb_column_broadcast -- self-checking test of the 1-to-16 column broadcasting
// unit at 1024 columns: the word must appear in every 64-bit group, and the
// write mask must cover the addressed group (broadcast off) or the groups of
// Column Select (broadcast on), and nothing else.
module tb_column_broadcast;
  import racam_pkg::*;
  localparam int unsigned COLS = 1024, GROUPS = 16;
  logic [3:0] col;
  logic col_bc;
  logic [GROUPS-1:0] col_sel;
  logic [DATA_W-1:0] data_in;
  logic [COLS-1:0] out_data, out_mask;
  int unsigned checks = 0, failures = 0;

  column_broadcast #(.COLS(COLS)) dut (.*);

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
      col = 4'($urandom); col_bc = 1'($urandom); col_sel = GROUPS'($urandom);
      data_in = {$urandom, $urandom};
      #1;
      for (int g = 0; g < GROUPS; g++) begin
        bit on;
        on = col_bc ? col_sel[g] : (g == col);
        check(out_data[g*64 +: 64] == data_in, "word in every group");
        check(out_mask[g*64 +: 64] == (on ? '1 : '0), $sformatf("mask of group %0d", g));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
