// tb_apu_table: self-checking test of the APU table.
//
// Checks that every entry reads as "no access" after reset, that writes are
// read back from a shadow copy kept by the testbench, that a read returns
// its entry exactly one cycle after rd_en (and holds it while rd_en is
// low), and that a read and a write of the same index in one cycle return
// the old entry. Also checks the published size: 64 entries of 16 bits.
module tb_apu_table;
  import cmc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic rd_en = 0, wr_en = 0;
  logic [5:0] rd_idx = 0, wr_idx = 0;
  logic [15:0] rd_entry, wr_entry = 0;
  logic [15:0] shadow [64];
  int checks = 0, failures = 0;

  apu_table dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic read_and_check(input logic [5:0] idx, input logic [15:0] exp);
    @(negedge clk);
    rd_en = 1; rd_idx = idx;
    @(negedge clk);
    rd_en = 0;
    check(rd_entry == exp, $sformatf("entry %0d read %h expected %h", idx, rd_entry, exp));
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check($bits(rd_entry) == 16 && N_REGIONS == 64, "table geometry 64 x 16 bits");
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      shadow[i] = '0;
      read_and_check(6'(i), 16'h0000);
    end
    // random writes, then read everything back
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 6'($urandom); wr_entry = 16'($urandom);
      shadow[wr_idx] = wr_entry;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 64; i++) read_and_check(6'(i), shadow[i]);
    // Fig. 12 example: region shared read/write by chiplets 0 and 1
    @(negedge clk); wr_en = 1; wr_idx = 6'd9; wr_entry = 16'b00_00_00_00_00_00_11_11;
    @(negedge clk); wr_en = 0; shadow[9] = 16'h000F;
    read_and_check(6'd9, 16'h000F);
    // entry is held while rd_en is low
    @(negedge clk); @(negedge clk);
    check(rd_entry == 16'h000F, "entry held while rd_en low");
    // same-cycle read and write return the old entry, then the new one
    @(negedge clk);
    rd_en = 1; rd_idx = 6'd9; wr_en = 1; wr_idx = 6'd9; wr_entry = 16'hC3C3;
    @(negedge clk);
    rd_en = 0; wr_en = 0;
    check(rd_entry == 16'h000F, "read during write returns old entry");
    read_and_check(6'd9, 16'hC3C3);
    // reset clears the table again
    rst_n = 0; @(negedge clk); rst_n = 1;
    read_and_check(6'd9, 16'h0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
