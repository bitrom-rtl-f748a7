// tb_biroma -- self-checking test of the bidirectional ROM array model.
//
// Opens random wordlines on the even and the odd side, steps the column
// select through all 8 columns and checks every group's bitline level
// against the contents function, including a row read on both sides.
// Also checks that an illegal precharge/supply setting or a missing or
// double column select leaves the bitlines floating.
module tb_biroma;
  import bitrom_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] seed = 32'hCAFE_0001;
  logic wl_en = 0; logic [10:0] wl_addr = '0;
  logic pre_e = 0, pre_o = 0, sup_e = 0, sup_o = 0;
  logic [7:0] cs_e = '0, cs_o = '0;
  bl_level_t bl [128];
  biroma dut (.*);

  int checks = 0, failures = 0, nz = 0;

  function automatic bl_level_t lvl(input tern_code_t w);
    return (w == TC_POS) ? BL_QUARTER : (w == TC_NEG) ? BL_VSS : BL_HALF;
  endfunction

  task automatic read_row(input int row, input side_t sd, input bit legal);
    @(negedge clk);
    wl_en = 1; wl_addr = 11'(row);
    pre_o = legal && (sd == SIDE_O); sup_e = legal && (sd == SIDE_O);
    pre_e = (sd == SIDE_E); sup_o = (sd == SIDE_E) || !legal;
    @(negedge clk);
    {wl_en, pre_e, pre_o, sup_e, sup_o} = '0;
    for (int c = 0; c < 8; c++) begin
      if (sd == SIDE_O) cs_o = 8'(1 << c); else cs_e = 8'(1 << c);
      #1;
      for (int g = 0; g < 128; g++) begin
        bl_level_t e;
        e = legal ? lvl(rom_weight(seed, 11'(row), 10'(g * 8 + c), sd)) : BL_FLOAT;
        if (e != BL_HALF) nz++;
        checks++;
        if (bl[g] != e) begin
          failures++;
          $display("FAIL row %0d side %0d col %0d: %0d exp %0d", row, sd, g*8+c, bl[g], e);
        end
      end
      @(negedge clk);
    end
    cs_e = '0; cs_o = '0;
  endtask

  initial begin
    for (int i = 0; i < 6; i++) read_row($urandom_range(0, 2047), side_t'(i % 2), 1);
    read_row(5, SIDE_E, 1);
    read_row(5, SIDE_O, 1);
    read_row(2047, SIDE_O, 1);
    read_row(9, SIDE_O, 0);     // both sides supplied: no valid read
    read_row(3, SIDE_E, 1);
    cs_e = 8'b0000_0011; #1;    // two columns at once
    checks++; if (bl[0] != BL_FLOAT) failures++;
    cs_e = 8'b0; #1;            // none
    checks++; if (bl[7] != BL_FLOAT) failures++;
    checks++; if (nz == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
