// tb_rule_ram: self-checking test of the skip-state RAM: random writes,
// reads one cycle after the address, compared with a model.
module tb_rule_ram;
  import qn_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic       wr_en = 0, rd_en = 0;
  logic [8:0] wr_addr = 0, rd_addr = 0;
  ram_entry_t wr_entry = '0, rd_entry;
  ram_entry_t m [512];

  rule_ram dut (.clk, .wr_en, .wr_addr, .wr_entry, .rd_en, .rd_addr, .rd_entry);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 512; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 9'(a); wr_entry = ram_entry_t'($urandom); m[a] = wr_entry;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 3000; i++) begin
      int a;
      a = int'($urandom % 512);
      @(negedge clk);
      if ($urandom % 4 == 0) begin
        wr_en = 1; wr_addr = 9'($urandom % 512); wr_entry = ram_entry_t'($urandom);
      end else wr_en = 0;
      rd_en = 1; rd_addr = 9'(a);
      @(negedge clk);
      checks++;
      if (rd_entry !== m[a]) begin failures++; $display("FAIL addr %0d", a); end
      if (wr_en) m[wr_addr] = wr_entry;
      wr_en = 0; rd_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
