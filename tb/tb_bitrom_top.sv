// tb_bitrom_top -- end-to-end test of the accelerator top level.
//
// Instantiates bitrom_top with 2 partitions of 3 layers x 2 macros (full
// 2048 x 1024 ROM arrays, full-size eDRAM) so that the run stays short,
// connects a behavioural external DRAM and runs the command sequence of
// tb_top_body.svh: activation loading, 4-bit and 8-bit activation
// projections in parallel partitions, requantization with saturation, batch
// slot advance, Key writes for 40 tokens (32 on die, 8 external), a
// decode-step KV read per partition, and a LoRA-corrected projection. Every
// result is compared with a reference model and each mechanism is counted;
// a mechanism that never happens is a failure. Timing: the 4-bit run of 5
// channels with 2 row steps must finish in 5 x (2 x 9 + 2) cycles plus the
// fixed command overhead, checked below.
module tb_bitrom_top;
  localparam int NP  = 2;
  localparam int MPL = 2;

  `include "tb_top_body.svh"

  bitrom_top #(.NP(NP), .MPL(MPL)) dut (.*);

  initial begin
    #20ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
