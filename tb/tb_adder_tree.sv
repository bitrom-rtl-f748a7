// tb_adder_tree -- self-checking test of the adder tree.
//
// Applies extreme and random sets of 128 signed 8-bit inputs (and a
// non-power-of-two instance with 5 inputs) and compares the sum with a
// plain loop sum.
module tb_adder_tree;
  logic signed [7:0] in [128];
  logic signed [14:0] sum;
  logic signed [7:0] in5 [5];
  logic signed [10:0] sum5;
  adder_tree dut (.in, .sum);
  adder_tree #(.N(5), .IN_W(8)) dut5 (.in(in5), .sum(sum5));

  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 200; t++) begin
      int exp, exp5;
      exp = 0; exp5 = 0;
      for (int i = 0; i < 128; i++) begin
        in[i] = (t == 0) ? -8'sd128 : (t == 1) ? 8'sd127 : 8'($urandom_range(0, 255));
        exp += in[i];
      end
      for (int i = 0; i < 5; i++) begin
        in5[i] = 8'($urandom_range(0, 255)); exp5 += in5[i];
      end
      #1;
      checks += 2;
      if (sum != exp)  begin failures++; $display("FAIL sum %0d exp %0d", sum, exp); end
      if (sum5 != exp5) begin failures++; $display("FAIL sum5 %0d exp %0d", sum5, exp5); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
