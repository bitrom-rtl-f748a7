// tb_aux_arith -- self-checking test of the requantization unit.
//
// Streams random results with random scale, shift and output width through
// the unit under random output back-pressure and checks every output value,
// its saturation flag and the order against a reference; also checks the
// one-cycle latency when the output is not stalled.
module tb_aux_arith;
  import bitrom_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready; logic signed [23:0] in_data = '0;
  logic [7:0] scale = '0; logic [4:0] shift = '0; qmode_t mode = Q_INT8;
  logic out_valid, out_ready = 0; logic signed [15:0] out_data; logic sat;
  aux_arith dut (.*);

  int checks = 0, failures = 0, nsat = 0;
  int expq [$]; bit exps [$];

  initial begin
    #500_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // reference
  task automatic ref_push(input int x, input int sc, input int sh, input qmode_t m);
    longint p, lo, hi; bit s;
    p = longint'(x) * sc;
    if (sh > 0) p = (p + (longint'(1) << (sh - 1))) >>> sh;
    lo = (m == Q_INT4) ? -8 : (m == Q_INT8) ? -128 : -32768;
    hi = (m == Q_INT4) ? 7 : (m == Q_INT8) ? 127 : 32767;
    s = 0;
    if (p > hi) begin p = hi; s = 1; end
    if (p < lo) begin p = lo; s = 1; end
    expq.push_back(int'(p)); exps.push_back(s);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int e; bit es;
      e = expq.pop_front(); es = exps.pop_front();
      checks++;
      if (out_data != 16'(e) || sat != es) begin
        failures++; $display("FAIL out %0d exp %0d sat %0d exp %0d", out_data, e, sat, es);
      end
      if (sat) nsat++;
    end
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // latency: one cycle
    in_valid = 1; in_data = 24'sd1000; scale = 8'd3; shift = 5'd4; mode = Q_INT16; out_ready = 1;
    ref_push(1000, 3, 4, Q_INT16);
    @(negedge clk); in_valid = 0;
    checks++; if (!out_valid || out_data != 16'sd188) failures++;
    @(negedge clk);
    for (int i = 0; i < 2000; i++) begin
      in_valid = $urandom_range(0, 3) != 0;
      in_data = 24'($urandom_range(0, 32'hFFFFFF));
      if (i % 3 == 0) in_data = in_data >>> 10;
      scale = 8'($urandom_range(0, 255)); shift = 5'($urandom_range(0, 20));
      mode = qmode_t'($urandom_range(0, 2));
      out_ready = $urandom_range(0, 3) != 0;
      #1;
      if (in_valid && in_ready) ref_push(int'(in_data), int'(scale), int'(shift), mode);
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    checks++; if (expq.size() != 0 || nsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
