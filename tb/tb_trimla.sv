// tb_trimla -- self-checking test of the Tri-Mode Local Accumulator.
//
// Drives random mode bits and activations (signed and unsigned nibbles),
// with clears at random points, and compares the accumulator and the
// sticky overflow flag each cycle with a reference model that uses the
// readout truth table: MSB=0 skip, MSB=1/LSB=1 add, MSB=1/LSB=0 subtract.
module tb_trimla;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, en = 0, add_n_sub = 0, ia_signed = 1;
  logic [3:0] ia = '0;
  logic signed [7:0] acc; logic ovf;
  trimla dut (.*);

  int checks = 0, failures = 0;
  int model = 0; bit movf = 0;
  int n_add = 0, n_sub = 0, n_skip = 0;

  initial begin
    #200_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    if (acc !== 0) failures++;
    checks++;
    for (int i = 0; i < 3000; i++) begin
      int op, wide;
      clr = ($urandom_range(0, 40) == 0) || i == 0;
      en = $urandom_range(0, 2) != 0; add_n_sub = $urandom_range(0, 1);
      ia_signed = $urandom_range(0, 1); ia = 4'($urandom_range(0, 15));
      op = ia_signed ? int'($signed(ia)) : int'(ia);
      if (clr) begin model = 0; movf = 0; end
      wide = model;
      if (en && add_n_sub) begin wide = model + op; n_add++; end
      else if (en)         begin wide = model - op; n_sub++; end
      else n_skip++;
      if (wide > 127 || wide < -128) movf = 1;
      model = int'($signed(8'(wide)));
      @(negedge clk);
      checks++;
      if (acc != 8'(model) || ovf != movf) begin
        failures++;
        $display("FAIL cycle %0d: acc %0d exp %0d ovf %0d exp %0d", i, acc, model, ovf, movf);
      end
    end
    checks++;
    if (n_add == 0 || n_sub == 0 || n_skip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
