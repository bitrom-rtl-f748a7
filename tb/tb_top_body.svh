// tb_top_body.svh -- body of the end-to-end testbench of bitrom_top.
//
// Included by tb_bitrom_top, kept separate so that a testbench of another
// configuration can reuse it. The including module defines localparams NP and MPL
// and instantiates bitrom_top as `dut` with those values. Connects an
// external DRAM model and runs a sequence of host commands:
//   1. load 2048 activations into layer 1 of every partition;
//   2. a 4-bit-activation projection (K = 2048) in all partitions at once,
//      results requantized to 8 bits and written to external memory;
//   3. a saturating 4-bit requantization run;
//   4. advance the batch pipeline slot;
//   5. 8-bit-activation projections (K = 1024) whose 16-bit results become
//      Key entries for tokens 0..NTOK-1, half of them on die, the rest in
//      external DRAM;
//   6. a decode-step KV read of those tokens in each partition;
//   7. a LoRA down projection and a LoRA-corrected projection.
// Every value is checked against a reference computed here from the ROM
// contents function and the DRAM model's data, and each mechanism (parallel
// partitions, result stalls, zero skipping, both activation modes, LoRA,
// saturation, on-die and external KV placement, slot advance, eDRAM refresh
// by reads) is counted and must have happened.

  import bitrom_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready; cmd_t cmd = '0;
  logic ext_rd_valid, ext_rd_ready, ext_rdata_valid, ext_wr_valid, ext_wr_ready;
  logic [31:0] ext_rd_addr, ext_rdata, ext_wr_addr, ext_wr_data;
  logic kv_out_valid, kv_out_err; logic [15:0] kv_out_data;
  logic busy; logic [2:0] slot;
  logic [31:0] kv_ondie_reads, kv_ext_reads, kv_ondie_writes, kv_ext_writes;
  logic tbt_violation, edram_ret_fail, mla_overflow, quant_sat;
  logic [31:0] edram_refreshes, zero_skips, res_stalls;

  ext_mem_model #(.LATENCY(5), .STALL(1)) mem (.*);

  int checks = 0, failures = 0;
  int n_sat = 0;
  localparam int NTOK = 40;
  localparam logic [31:0] ACT_BASE = 32'h0000_1000, DST = 32'h0002_0000;
  localparam logic [31:0] A_BASE = 32'h0003_0000, B_BASE = 32'h0004_0000;

  always @(posedge clk) if (rst_n && dut.aux_out_valid && dut.aux_out_ready && quant_sat) n_sat++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(input cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    #1 while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
    #1 while (busy) begin @(negedge clk); #1; end
  endtask

  function automatic logic [31:0] seed_of(input int p, input int l, input int m);
    return {8'hB1, 5'(p), 3'(l), 4'(m), 12'h5A7};
  endfunction

  function automatic logic [7:0] act_byte(input logic [31:0] base, input int k);
    logic [31:0] w;
    w = mem.peek(base + 32'(k / 4));
    return w[8 * (k % 4) +: 8];
  endfunction

  function automatic longint macro_ref(input logic [31:0] seed, input logic [31:0] base,
                                       input int o, input int ns, input int rb, input bit a8);
    longint total = 0;
    for (int pass = 0; pass < (a8 ? 2 : 1); pass++) begin
      longint ptot = 0;
      for (int g = 0; g < 128; g++) begin
        logic [7:0] acc8 = 0;
        for (int s = 0; s < ns; s++) begin
          int lin = o * ns + s;
          int row = (rb + lin / 2) % 2048;
          for (int c = 0; c < 8; c++) begin
            int k = s * 1024 + g * 8 + c;
            logic [7:0] b = act_byte(base, k);
            int a = (a8 && pass == 0) ? int'($signed(b[7:4]))
                  : (a8 ? int'(b[3:0]) : int'($signed(b[3:0])));
            int w = tern_value(rom_weight(seed, 11'(row), 10'(g * 8 + c), side_t'(lin % 2)));
            acc8 = acc8 + 8'(w * a);
          end
        end
        ptot += longint'($signed(acc8));
      end
      total = (pass == 0) ? ptot : total * 16 + ptot;
    end
    return total;
  endfunction

  function automatic int quant(input longint x, input int sc, input int sh, input qmode_t m);
    longint p, lo, hi;
    p = x * sc;
    if (sh > 0) p = (p + (longint'(1) << (sh - 1))) >>> sh;
    lo = (m == Q_INT4) ? -8 : (m == Q_INT8) ? -128 : -32768;
    hi = (m == Q_INT4) ? 7 : (m == Q_INT8) ? 127 : 32767;
    if (p > hi) p = hi;
    if (p < lo) p = lo;
    return int'(p);
  endfunction

  function automatic int batch_of(input int s, input int p);
    return (s + 6 - p) % 6;
  endfunction

  cmd_t c;
  int kv_exp [NP][NTOK][8];
  int t_start;

  // Automatic, so that declarations with initializers inside loops are
  // re-initialized on every iteration.
  task automatic run_all();
    int n_a4, n_a8, n_lora, n_slot, n_par;
    n_a4 = 0; n_a8 = 0; n_lora = 0; n_slot = 0; n_par = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. activations, layer 1, all partitions
    c = '0; c.op = OP_LOAD_ACT; c.part_mask = 6'((1 << NP) - 1); c.layer = 2'd1;
    c.src_addr = ACT_BASE; c.count = 14'd512;
    issue(c);

    // 2. A4 projection in all partitions, INT8 results to external memory
    c = '0; c.op = OP_RUN; c.part_mask = 6'((1 << NP) - 1); c.layer = 2'd1; c.macro = 4'(MPL - 1);
    c.count = 14'd5; c.n_steps = 4'd2; c.row_base = 12'd300; c.act_mode = ACT_A4;
    c.q_scale = 8'd3; c.q_shift = 5'd4; c.q_mode = Q_INT8; c.dst_addr = DST;
    t_start = int'($time / 10);
    issue(c);
    n_a4++; n_par++;
    $display("A4 run: %0d partitions x 5 channels in %0d cycles", NP, int'($time / 10) - t_start);
    // 5 channels x (2 steps x 9 + 2) cycles per macro, plus command overhead
    check(int'($time / 10) - t_start >= 100 && int'($time / 10) - t_start <= 100 + 8 * NP + 20,
          "A4 run cycle count");
    for (int p = 0; p < NP; p++)
      for (int n = 0; n < 5; n++) begin
        int e = quant(macro_ref(seed_of(p, 1, MPL - 1), ACT_BASE, n, 2, 300, 0), 3, 4, Q_INT8);
        logic [31:0] got = mem.peek(DST + 32'(p * 5 + n));
        check(got == 32'(e), $sformatf("A4 p%0d n%0d: %0d exp %0d", p, n, $signed(got), e));
      end
    check(res_stalls > 0, "partition results waited for the shared requantizer");

    // 3. saturating INT4 requantization
    c.q_scale = 8'd200; c.q_shift = 5'd1; c.q_mode = Q_INT4; c.dst_addr = DST + 32'h100;
    c.part_mask = 6'd1; c.count = 14'd3;
    issue(c);
    n_a4++;
    for (int n = 0; n < 3; n++) begin
      int e = quant(macro_ref(seed_of(0, 1, MPL - 1), ACT_BASE, n, 2, 300, 0), 200, 1, Q_INT4);
      check(mem.peek(DST + 32'h100 + 32'(n)) == 32'(e), "INT4 saturating result");
    end

    // 4. next pipeline slot: partition p now serves batch (1 - p) mod 6
    c = '0; c.op = OP_NEXT_SLOT;
    issue(c);
    n_slot++;
    check(slot == 3'd1, "slot advanced");

    // 5. A8 projections as Key entries of tokens 0..NTOK-1
    for (int t = 0; t < NTOK; t++) begin
      c = '0; c.op = OP_RUN; c.part_mask = 6'((1 << NP) - 1); c.layer = 2'd1; c.macro = 4'd0;
      c.count = 14'd8; c.n_steps = 4'd1; c.row_base = 12'(t * 8); c.act_mode = ACT_A8;
      c.q_scale = 8'd1; c.q_shift = 5'd0; c.q_mode = Q_INT16; c.dest_kv = 1; c.kv_sel = 0;
      c.token = 8'(t);
      issue(c);
      n_a8++;
      for (int p = 0; p < NP; p++)
        for (int n = 0; n < 8; n++)
          kv_exp[p][t][n] = quant(macro_ref(seed_of(p, 1, 0), ACT_BASE, n, 1, t * 8, 1), 1, 0, Q_INT16);
    end
    check(kv_ondie_writes == 32'(NP * 32 * 8) && kv_ext_writes == 32'(NP * (NTOK - 32) * 8),
          $sformatf("KV writes on die %0d, external %0d", kv_ondie_writes, kv_ext_writes));

    // 6. decode-step KV read, per partition
    for (int p = 0; p < NP; p++) begin
      int cnt; cnt = 0;
      c = '0; c.op = OP_KV_READ; c.part_mask = 6'(1 << p); c.layer = 2'd1; c.head = 2'd0;
      c.kv_sel = 0; c.count = 14'(NTOK);
      fork
        issue(c);
        begin
          while (cnt < NTOK * 256) begin
            @(posedge clk);
            if (kv_out_valid) begin
              int t = cnt / 256, e = cnt % 256;
              if (e < 8)
                check(kv_out_data == 16'(kv_exp[p][t][e]) && !kv_out_err,
                      $sformatf("KV p%0d token %0d elem %0d: %0d exp %0d", p, t, e,
                                $signed(kv_out_data), kv_exp[p][t][e]));
              cnt++;
            end
          end
        end
      join
    end
    check(kv_ondie_reads == 32'(NP * 32 * 256) && kv_ext_reads == 32'(NP * (NTOK - 32) * 256),
          "KV reads split between eDRAM and external DRAM");
    check(edram_refreshes >= kv_ondie_reads, "eDRAM rows refreshed by reads");

    // 7. LoRA on partition 0, layer 2, K = 1024
    c = '0; c.op = OP_LOAD_ACT; c.part_mask = 6'd1; c.layer = 2'd2; c.src_addr = ACT_BASE;
    c.count = 14'd256;
    issue(c);
    c = '0; c.op = OP_LORA_DOWN; c.part_mask = 6'd1; c.layer = 2'd2; c.src_addr = A_BASE;
    c.count = 14'd256; c.h_shift = 5'd9;
    issue(c);
    c = '0; c.op = OP_RUN; c.part_mask = 6'd1; c.layer = 2'd2; c.macro = 4'd0; c.count = 14'd3;
    c.n_steps = 4'd1; c.row_base = 12'd77; c.act_mode = ACT_A8; c.lora_en = 1; c.lora_shift = 5'd3;
    c.src_addr = B_BASE; c.q_scale = 8'd1; c.q_shift = 5'd0; c.q_mode = Q_INT16; c.dst_addr = DST + 32'h200;
    issue(c);
    n_lora++;
    begin
      int h [16];
      for (int r = 0; r < 16; r++) begin
        longint s = 0;
        for (int k = 0; k < 1024; k++) begin
          logic [7:0] wb = act_byte(A_BASE + 32'(r * 256), k);
          s += longint'($signed(wb[5:0])) * longint'($signed(act_byte(ACT_BASE, k)));
        end
        s = s >>> 9;
        h[r] = s > 127 ? 127 : (s < -128 ? -128 : int'(s));
      end
      for (int n = 0; n < 3; n++) begin
        longint y = 0, e;
        for (int r = 0; r < 16; r++) begin
          logic [7:0] wb = act_byte(B_BASE + 32'(n * 4), r);
          y += longint'($signed(wb[5:0])) * h[r];
        end
        e = quant(macro_ref(seed_of(0, 2, 0), ACT_BASE, n, 1, 77, 1) + (y >>> 3), 1, 0, Q_INT16);
        check(mem.peek(DST + 32'h200 + 32'(n)) == 32'(int'(e)),
              $sformatf("LoRA n%0d: %0d exp %0d", n, $signed(mem.peek(DST + 32'h200 + 32'(n))), e));
      end
    end

    // mechanisms
    $display("mechanisms: parallel-partition runs %0d, A4 runs %0d, A8 runs %0d, LoRA runs %0d",
             n_par, n_a4, n_a8, n_lora);
    $display("            result stall cycles %0d, zero-weight skips %0d, saturations %0d",
             res_stalls, zero_skips, n_sat);
    $display("            slot advances %0d, KV on-die/external writes %0d/%0d, reads %0d/%0d",
             n_slot, kv_ondie_writes, kv_ext_writes, kv_ondie_reads, kv_ext_reads);
    $display("            eDRAM row activations %0d", edram_refreshes);
    check(n_par > 0 && n_a4 > 0 && n_a8 > 0 && n_lora > 0 && n_slot > 0, "commands exercised");
    check(res_stalls > 0, "stall happened");
    check(zero_skips > 0, "zero skipping happened");
    check(n_sat > 0, "saturation happened");
    check(kv_ondie_reads > 0 && kv_ext_reads > 0, "both KV placements used");
    check(!tbt_violation && !edram_ret_fail, "no retention failure");
  endtask

  initial begin
    run_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
