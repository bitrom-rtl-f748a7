// tb_bitrom_ctrl -- self-checking test of the command controller.
//
// bitrom_ctrl (6 partitions) is connected to behavioural stand-ins: six
// partitions that answer run_start with `count` results after random
// delays and accept adapter weight words, an external memory port with
// random back-pressure and fixed read latency, a KV manager that accepts
// requests with random back-pressure, and the real aux_arith unit set to
// pass results through. Checked: activation broadcast to the masked
// partitions, result routing to external addresses dst + p*count + n,
// round-robin service of all partitions, result stall counting, the batch
// slot sequence (mod 6), KV write addresses (batch (slot - p) mod 6, layer
// p*3 + layer, head/elem from the channel index), the decode-step KV read
// order and output stream, and the LoRA weight streams.
module tb_bitrom_ctrl;
  import bitrom_pkg::*;
  localparam int NP = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready; cmd_t cmd = '0;
  logic [1:0] sel_layer; logic [3:0] sel_macro;
  logic [NP-1:0] act_we, run_start, down_start, up_start, w_valid, p_w_ready, p_busy;
  logic [NP-1:0] p_res_valid, p_res_ready;
  logic [10:0] act_waddr; logic [31:0] act_wdata, w_data;
  logic [13:0] n_out; logic [3:0] n_steps; logic [11:0] row_base, k_words;
  act_mode_t act_mode; logic lora_en; logic [4:0] lora_shift, h_shift;
  logic signed [23:0] p_res_data [NP]; logic [13:0] p_res_idx [NP];
  logic aux_in_valid, aux_in_ready, aux_out_valid, aux_out_ready, quant_sat;
  logic signed [23:0] aux_in_data; logic [7:0] aux_scale; logic [4:0] aux_shift;
  qmode_t aux_mode; logic signed [15:0] aux_out_data;
  logic rd_req_valid, rd_req_ready = 0, rd_data_valid = 0, rd_data_ready;
  logic [31:0] rd_req_addr, rd_data = 0, wr_addr, wr_data;
  logic wr_valid, wr_ready = 0, io_rd_kv, io_wr_kv;
  logic kv_req_valid, kv_req_ready = 0, kv_req_we, kv_rsp_valid = 0, kv_rsp_err = 0, decode_step;
  kv_addr_t kv_req_addr; logic [15:0] kv_req_wdata, kv_rsp_data = 0;
  logic kv_out_valid, kv_out_err; logic [15:0] kv_out_data;
  logic busy; logic [2:0] slot; logic [31:0] res_stalls;

  bitrom_ctrl #(.NP(NP)) dut (.*);

  aux_arith u_aux (
    .clk, .rst_n, .in_valid(aux_in_valid), .in_ready(aux_in_ready), .in_data(aux_in_data),
    .scale(aux_scale), .shift(aux_shift), .mode(aux_mode),
    .out_valid(aux_out_valid), .out_ready(aux_out_ready), .out_data(aux_out_data), .sat(quant_sat)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] mem_word(input logic [31:0] a);
    return (a * 32'h0001_0003) ^ 32'hC3A5_0F0F;
  endfunction
  function automatic logic [15:0] kv_word(input kv_addr_t a);
    return 16'(a) ^ 16'h3C5A;
  endfunction
  function automatic int res_val(input int p, input int n);
    return p * 4096 + n * 7 - 100;
  endfunction

  // ---------------- partition stand-ins
  int left [NP], nxt [NP], w_base [NP];
  int n_act_we [NP], n_w [NP], n_down [NP], n_up [NP];
  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (act_we[p]) begin
        n_act_we[p]++;
        check(act_wdata == mem_word(32'h100 + 32'(act_waddr)), "activation word");
      end
      if (w_valid[p] && p_w_ready[p]) n_w[p]++;
      if (down_start[p]) n_down[p]++;
      if (up_start[p]) n_up[p]++;
      if (p_res_valid[p] && p_res_ready[p]) begin
        left[p] <= left[p] - 1;
        nxt[p]  <= nxt[p] + 1;
        p_res_valid[p] <= 0;
      end
      if (run_start[p]) begin
        left[p] <= int'(n_out);
        w_base[p] = n_w[p];
        nxt[p]  <= 0;
      end
      // with LoRA, result n waits for the 4 B-row words of channel n
      if (!(p_res_valid[p] && p_res_ready[p]) && left[p] > 0 && !p_res_valid[p] && $urandom_range(3) == 0 &&
          (!lora_en || n_w[p] - w_base[p] >= 4 * (nxt[p] + 1)))
        p_res_valid[p] <= 1;
      p_res_data[p] <= 24'(res_val(p, nxt[p] + ((p_res_valid[p] && p_res_ready[p]) ? 1 : 0)));
      p_res_idx[p]  <= 14'(nxt[p] + ((p_res_valid[p] && p_res_ready[p]) ? 1 : 0));
    end
  end
  always_comb for (int p = 0; p < NP; p++) p_busy[p] = left[p] > 0;
  assign p_w_ready = '1;

  // ---------------- external memory port
  logic [31:0] lat_q [$];
  int n_rd = 0, n_wr = 0;
  int wr_seen [int];
  always @(posedge clk) begin
    rd_req_ready <= $urandom_range(1);
    wr_ready     <= $urandom_range(1);
    rd_data_valid <= 0;
    if (rd_req_valid && rd_req_ready) begin lat_q.push_back(rd_req_addr); n_rd++; end
    if (lat_q.size() > 0 && rd_data_ready) begin
      rd_data_valid <= 1;
      rd_data <= mem_word(lat_q.pop_front());
    end
    if (wr_valid && wr_ready) begin
      n_wr++;
      wr_seen[int'(wr_addr)] = int'($signed(wr_data));
    end
  end

  // ---------------- KV manager stand-in
  kv_addr_t kv_w [$]; logic [15:0] kv_wd [$];
  kv_addr_t kv_r [$];
  int n_decode = 0;
  always @(posedge clk) begin
    kv_req_ready <= $urandom_range(1);
    kv_rsp_valid <= 0;
    if (decode_step) n_decode++;
    if (kv_req_valid && kv_req_ready) begin
      if (kv_req_we) begin kv_w.push_back(kv_req_addr); kv_wd.push_back(kv_req_wdata); end
      else begin
        kv_r.push_back(kv_req_addr);
        kv_rsp_valid <= 1;
        kv_rsp_data  <= kv_word(kv_req_addr);
      end
    end
  end

  task automatic issue(input cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    #1 while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
    #1 while (busy) begin @(negedge clk); #1; end
  endtask

  int kv_out_n = 0;
  logic [15:0] kv_out_q [$];
  always @(posedge clk) if (kv_out_valid) kv_out_q.push_back(kv_out_data);

  task automatic run_all();
    cmd_t c;
    for (int p = 0; p < NP; p++) begin left[p] = 0; nxt[p] = 0; p_res_valid[p] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;

    // activation broadcast
    c = '0; c.op = OP_LOAD_ACT; c.part_mask = 6'b101011; c.layer = 2'd2; c.src_addr = 32'h100;
    c.count = 14'd20;
    issue(c);
    for (int p = 0; p < NP; p++)
      check(n_act_we[p] == (c.part_mask[p] ? 20 : 0), $sformatf("act words to p%0d: %0d", p, n_act_we[p]));
    check(sel_layer == 2'd2, "layer select");

    // run, results to external memory
    c = '0; c.op = OP_RUN; c.part_mask = 6'h3F; c.layer = 2'd1; c.macro = 4'd7; c.count = 14'd10;
    c.q_scale = 8'd1; c.q_shift = 5'd0; c.q_mode = Q_INT16; c.dst_addr = 32'h8000;
    issue(c);
    check(n_wr == 60, $sformatf("60 results written, got %0d", n_wr));
    for (int p = 0; p < NP; p++)
      for (int n = 0; n < 10; n++)
        check(wr_seen.exists(32'h8000 + p * 10 + n) && wr_seen[32'h8000 + p * 10 + n] == res_val(p, n),
              $sformatf("result p%0d n%0d", p, n));
    check(res_stalls > 0, "result stalls counted");
    check(sel_macro == 4'd7, "macro select");

    // slot sequence
    for (int i = 1; i <= 7; i++) begin
      c = '0; c.op = OP_NEXT_SLOT;
      issue(c);
      check(slot == 3'(i % 6), $sformatf("slot %0d after %0d advances", slot, i));
    end

    // run, results to the KV-cache (slot is 1)
    c = '0; c.op = OP_RUN; c.part_mask = 6'h3F; c.layer = 2'd2; c.macro = 4'd0; c.count = 14'd300;
    c.q_scale = 8'd1; c.q_shift = 5'd0; c.q_mode = Q_INT16; c.dest_kv = 1; c.kv_sel = 1; c.token = 8'd33;
    issue(c);
    check(kv_w.size() == 6 * 300, $sformatf("KV writes %0d", kv_w.size()));
    begin
      bit seen [NP][300];
      while (kv_w.size() > 0) begin
        kv_addr_t a; logic [15:0] d; int p, n;
        a = kv_w.pop_front(); d = kv_wd.pop_front();
        p = int'(a.layer) / 3;
        n = int'(a.head) * 256 + int'(a.elem);
        check(p < NP && int'(a.layer) % 3 == 2 && a.batch == 3'((1 + 6 - p) % 6) && a.kv &&
              a.token == 8'd33 && n < 300 && d == 16'(res_val(p, n)),
              $sformatf("KV write layer %0d batch %0d head %0d elem %0d", a.layer, a.batch, a.head, a.elem));
        if (p < NP && n < 300) seen[p][n] = 1;
      end
      for (int p = 0; p < NP; p++)
        for (int n = 0; n < 300; n++) check(seen[p][n], "every KV element written");
    end

    // decode-step KV read in partition 2
    c = '0; c.op = OP_KV_READ; c.part_mask = 6'b000100; c.layer = 2'd1; c.head = 2'd3; c.kv_sel = 0;
    c.count = 14'd3;
    issue(c);
    check(n_decode == 1, "one decode-step mark");
    check(kv_r.size() == 768 && kv_out_q.size() == 768, "768 KV reads and outputs");
    for (int i = 0; i < 768 && kv_r.size() > 0; i++) begin
      kv_addr_t a; logic [15:0] d;
      a = kv_r.pop_front(); d = kv_out_q.pop_front();
      check(a.batch == 3'((1 + 6 - 2) % 6) && a.layer == 5'd7 && a.head == 2'd3 && !a.kv &&
            a.token == 8'(i / 256) && a.elem == 8'(i % 256) && d == kv_word(a),
            $sformatf("KV read %0d", i));
    end

    // LoRA down projection in partition 4, then a LoRA run in partition 3
    c = '0; c.op = OP_LORA_DOWN; c.part_mask = 6'b110000; c.layer = 2'd0; c.src_addr = 32'h4000;
    c.count = 14'd5;
    issue(c);
    check(n_down[4] == 1 && n_w[4] == 80 && n_down[5] == 0, "down projection weight stream");
    c = '0; c.op = OP_RUN; c.part_mask = 6'b001000; c.layer = 2'd0; c.count = 14'd4; c.lora_en = 1;
    c.src_addr = 32'h5000; c.q_scale = 8'd1; c.q_mode = Q_INT16; c.dst_addr = 32'h9000;
    issue(c);
    check(n_up[3] == 1 && n_w[3] == 16, "up projection weight stream");
    check(n_wr == 64, "LoRA run results written");
    check(kv_out_err == 0, "no KV error");
  endtask

  initial begin
    run_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
