// tb_kv_manager -- decode-refresh KV-cache placement with eDRAM and DRAM models.
//
// Plays the KV-cache traffic of auto-regressive decoding: at step t the
// entry of token t-1 is written and the entries of tokens 0..t-1 are read
// back, for sequence lengths 32, 64, 128 and 256 (one element per token,
// which is enough for the access counts). Checks every value read, the
// on-die/external split of reads against i < 32 (n - i) / (n(n+1)/2), e.g.
// 43.6% at length 128, and the counters. A shortened retention time (4000
// cycles) shows that the decode reads alone keep the eDRAM alive over a
// run many times longer, and that a pause longer than the retention time
// corrupts data and raises tbt_violation.
module tb_kv_manager;
  import bitrom_pkg::*;
  localparam longint TR = 4000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_we = 0; kv_addr_t req_addr = '0; logic [15:0] req_wdata = '0;
  logic rsp_valid, rsp_err; logic [15:0] rsp_data; logic decode_step = 0;
  logic e_req, e_we; logic [14:0] e_row; logic [7:0] e_col; logic [15:0] e_wdata;
  logic e_rvalid, e_rerr, ret_fail; logic [15:0] e_rdata; logic [31:0] refreshes;
  logic x_rd_valid, x_rd_ready, x_rdata_valid, x_rdata_ready, x_wr_valid, x_wr_ready;
  logic [31:0] x_rd_addr, x_rdata, x_wr_addr, x_wr_data;
  logic [31:0] ondie_reads, ext_reads, ondie_writes, ext_writes; logic tbt_violation;
  logic ext_rd_valid, ext_rd_ready, ext_rdata_valid, ext_wr_valid, ext_wr_ready;
  logic [31:0] ext_rd_addr, ext_rdata, ext_wr_addr, ext_wr_data;

  kv_manager #(.T_RET(TR)) dut (.*);
  dr_edram #(.T_RET(TR)) u_edram (.clk, .rst_n, .req(e_req), .we(e_we), .row(e_row), .col(e_col),
    .wdata(e_wdata), .rvalid(e_rvalid), .rdata(e_rdata), .rerr(e_rerr), .ret_fail, .refreshes);
  io_buffer u_io (.clk, .rst_n,
    .rd_req_valid(x_rd_valid), .rd_req_ready(x_rd_ready), .rd_req_addr(x_rd_addr),
    .rd_data_valid(x_rdata_valid), .rd_data_ready(x_rdata_ready), .rd_data(x_rdata),
    .wr_valid(x_wr_valid), .wr_ready(x_wr_ready), .wr_addr(x_wr_addr), .wr_data(x_wr_data), .*);
  ext_mem_model #(.LATENCY(4), .STALL(0)) u_mem (.*);

  int checks = 0, failures = 0;
  int n_err = 0;

  initial begin
    #50_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] val(input int seq, input int tok);
    return 16'(seq * 1000 + tok * 7 + 1);
  endfunction

  task automatic access(input bit we, input kv_addr_t a, input logic [15:0] d, output logic [15:0] q,
                        output bit err);
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    #1 while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
    q = '0; err = 0;
    if (!we) begin
      while (!rsp_valid) @(negedge clk);
      q = rsp_data; err = rsp_err;
    end
  endtask

  task automatic decode(input int seq, input int n, input int pause_at, input int pause);
    logic [31:0] od0, ex0;
    logic [15:0] q; bit err;
    kv_addr_t a;
    longint exp_on, exp_all;
    od0 = ondie_reads; ex0 = ext_reads;
    a = '0; a.batch = 3'(seq % 6); a.layer = 5'(seq); a.head = 2'(seq % 4); a.kv = 1'(seq % 2);
    for (int t = 1; t <= n; t++) begin
      if (t == pause_at) repeat (pause) @(negedge clk);
      @(negedge clk) decode_step = 1;
      @(negedge clk) decode_step = 0;
      a.token = 8'(t - 1);
      access(1, a, val(seq, t - 1), q, err);
      for (int i = 0; i < t; i++) begin
        a.token = 8'(i);
        access(0, a, 16'h0, q, err);
        if (err) n_err++;
        if (pause_at == 0) check(q == val(seq, i) && !err,
                                 $sformatf("seq %0d step %0d token %0d: %h", seq, t, i, q));
      end
    end
    exp_on = 0; exp_all = longint'(n) * (n + 1) / 2;
    for (int i = 0; i < n && i < 32; i++) exp_on += n - i;
    check(ondie_reads - od0 == 32'(exp_on), $sformatf("on-die reads %0d exp %0d", ondie_reads - od0, exp_on));
    check((ondie_reads - od0) + (ext_reads - ex0) == 32'(exp_all), "total reads");
    $display("sequence length %0d, 32 tokens on die: external DRAM reads reduced by %0.1f%%",
             n, 100.0 * real'(ondie_reads - od0) / real'(exp_all));
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    decode(0, 32, 0, 0);
    decode(1, 64, 0, 0);
    decode(2, 128, 0, 0);
    decode(3, 256, 0, 0);
    check(!ret_fail && !tbt_violation, "no retention failure with regular decode steps");
    check($time / 10 > 10 * TR, "run much longer than the retention time");
    check(ondie_writes == 32 * 4 && ext_writes == (32 - 32) + (64 - 32) + (128 - 32) + (256 - 32),
          "write counters");
    check(u_mem.n_writes == ext_writes, $sformatf("external writes reached DRAM: %0d of %0d", u_mem.n_writes, ext_writes));
    // a pause longer than the retention time before step 20
    decode(4, 20, 20, int'(TR) + 100);
    check(n_err > 0 && ret_fail, "stale eDRAM rows detected after pause");
    check(tbt_violation, "TBT violation flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
