// tb_tri_comparator -- checks the comparator pair against the readout truth
// table: 1/2 VDD -> 00, 1/4 VDD -> 11, VSS -> 10, floating -> 00, and both
// outputs low whenever comp_en is low.
module tb_tri_comparator;
  import bitrom_pkg::*;
  bl_level_t bl; logic comp_en, msb, lsb;
  tri_comparator dut (.*);
  int checks = 0, failures = 0;
  task automatic t(input bl_level_t l, input logic en, input logic [1:0] exp);
    bl = l; comp_en = en; #1;
    checks++;
    if ({msb, lsb} != exp) begin
      failures++; $display("FAIL level %0d en %0d: %b%b exp %b", l, en, msb, lsb, exp);
    end
  endtask
  initial begin
    t(BL_HALF, 1, 2'b00);  t(BL_QUARTER, 1, 2'b11); t(BL_VSS, 1, 2'b10); t(BL_FLOAT, 1, 2'b00);
    t(BL_HALF, 0, 2'b00);  t(BL_QUARTER, 0, 2'b00); t(BL_VSS, 0, 2'b00); t(BL_FLOAT, 0, 2'b00);
    t(BL_VSS, 1, 2'b10);   t(BL_QUARTER, 1, 2'b11);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
