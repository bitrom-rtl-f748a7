// tb_bitrom_macro -- self-checking test of one BitROM macro.
//
// Loads random activations, runs projections in 4-bit and 8-bit activation
// mode, with and without a LoRA term, and compares every output channel with
// a reference computed here from the ROM contents function: per group an
// 8-bit wrapped partial sum, then the sum over the 128 groups (and for 8-bit
// activations 16*high + low). Also checks the output period of 9*n_steps+2
// cycles with no back-pressure, that results hold under res_ready stalls,
// and that the zero-skip counter moves.
module tb_bitrom_macro;
  import bitrom_pkg::*;

  localparam int COLS = 1024, GC = 8, GROUPS = COLS / GC, MAX_STEPS = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] seed = 32'h1234_5678;
  logic act_we = 0; logic [10:0] act_waddr = '0; logic [31:0] act_wdata = '0;
  logic start = 0; logic [13:0] n_out = '0; logic [3:0] n_steps = '0; logic [11:0] row_base = '0;
  act_mode_t act_mode = ACT_A4; logic lora_en = 0; logic [4:0] lora_shift = '0;
  logic lora_valid = 0; logic signed [31:0] lora_data = '0; logic lora_ready;
  logic res_valid, res_ready = 1; logic signed [23:0] res_data; logic [13:0] res_idx;
  logic busy, ovf; logic [31:0] zero_skips;

  bitrom_macro dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] act [MAX_STEPS*COLS];
  int cyc = 0;
  int hs_cyc [$];     // cycles of result handshakes and starts
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (start || (res_valid && res_ready)) hs_cyc.push_back(cyc);
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_acts(input int k, input bit a8);
    for (int i = 0; i < k; i++) begin
      if (a8) act[i] = 8'($urandom_range(0, 255));
      else    act[i] = {4'h0, 4'($urandom_range(0, 15))};
    end
    for (int w = 0; w < k / 4; w++) begin
      @(negedge clk);
      act_we = 1; act_waddr = 11'(w);
      act_wdata = {act[4*w+3], act[4*w+2], act[4*w+1], act[4*w]};
    end
    @(negedge clk) act_we = 0;
  endtask

  function automatic int nib(input logic [3:0] v, input bit sgn);
    return sgn ? int'($signed(v)) : int'(v);
  endfunction

  // reference for output o
  function automatic longint ref_out(input int o, input int ns, input int rb, input bit a8);
    longint total = 0;
    for (int pass = 0; pass < (a8 ? 2 : 1); pass++) begin
      longint ptot = 0;
      for (int g = 0; g < GROUPS; g++) begin
        logic [7:0] acc8 = 0;
        for (int s = 0; s < ns; s++) begin
          int lin = o * ns + s;
          int row = (rb + lin / 2) % 2048;
          side_t sd = side_t'(lin % 2);
          for (int c = 0; c < GC; c++) begin
            int k = s * COLS + g * GC + c;
            int a = (a8 && pass == 0) ? nib(act[k][7:4], 1) : nib(act[k][3:0], !a8 || pass == 0);
            int w = tern_value(rom_weight(seed, 11'(row), 10'(g * GC + c), sd));
            acc8 = acc8 + 8'(w * a);
          end
        end
        ptot += longint'($signed(acc8));
      end
      total = (pass == 0) ? ptot : total * 16 + ptot;
    end
    return total;
  endfunction

  task automatic run(input int no, input int ns, input int rb, input bit a8, input bit lora,
                     input bit stalls);
    longint lterm [];
    int got;
    lterm = new[no];
    hs_cyc.delete();
    @(negedge clk);
    n_out = 14'(no); n_steps = 4'(ns); row_base = 12'(rb);
    act_mode = a8 ? ACT_A8 : ACT_A4; lora_en = lora; lora_shift = 5'd2; start = 1;
    @(negedge clk) start = 0;
    got = 0;
    while (got < no) begin
      @(negedge clk);
      if (lora) begin
        lora_valid = ($urandom_range(0, 3) == 0);
        lora_data  = $signed(32'($urandom_range(0, 4000)) - 32'sd2000);
      end
      res_ready = stalls ? ($urandom_range(0, 2) == 0) : 1'b1;
      #1;
      if (lora && lora_valid && lora_ready) lterm[got] = longint'(lora_data >>> 2);
      if (res_valid && res_ready) begin
        longint exp = ref_out(got, ns, rb, a8) + (lora ? lterm[got] : 0);
        check(res_idx == 14'(got), $sformatf("index %0d got %0d", got, res_idx));
        check(longint'(res_data) == exp,
              $sformatf("out %0d: got %0d exp %0d (a8=%0d lora=%0d)", got, res_data, exp, a8, lora));
        got++;
      end
    end
    @(negedge clk);
    lora_valid = 0; res_ready = 1;
    @(negedge clk);
    check(!busy, "idle after last output");
    // start -> first result and result -> result: 9*n_steps+2 (A4), 18*n_steps+3 (A8)
    if (!stalls && !lora)
      for (int i = 1; i < hs_cyc.size(); i++) begin
        int period = a8 ? 18 * ns + 3 : 9 * ns + 2;
        check(hs_cyc[i] - hs_cyc[i-1] == period,
              $sformatf("output period %0d exp %0d at %0d", hs_cyc[i] - hs_cyc[i-1], period, hs_cyc[i]));
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_acts(2048, 0);
    run(4, 2, 100, 0, 0, 0);          // 4-bit activations, K = 2048
    check(zero_skips > 0, "zero weights were skipped");
    run(3, 1, 2047, 0, 0, 1);         // row wrap-around, stalls
    load_acts(1024, 1);
    run(3, 1, 7, 1, 0, 0);            // 8-bit activations, two passes
    run(3, 1, 40, 1, 1, 1);           // 8-bit with LoRA term and stalls
    load_acts(8192, 0);
    run(2, 8, 500, 0, 0, 0);          // K = 8192 (down projection)
    $display("zero_skips=%0d ovf=%0d", zero_skips, ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
