// tb_dr_edram -- self-checking test of the decode-refresh eDRAM model.
//
// Uses the full 13.5 MiB organisation with a retention time shortened to
// 300 cycles. Writes random words to random rows, reads them back, keeps
// one row alive by reading it every 200 cycles for 3000 cycles (10 times the
// retention time) and lets another row expire, checking data, the one-cycle
// read latency, rerr, ret_fail and the refresh counter.
module tb_dr_edram;
  localparam longint TR = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, we = 0; logic [14:0] row = '0; logic [7:0] col = '0; logic [15:0] wdata = '0;
  logic rvalid, rerr, ret_fail; logic [15:0] rdata; logic [31:0] refreshes;
  dr_edram #(.T_RET(TR)) dut (.*);

  int checks = 0, failures = 0, nacc = 0;
  logic [15:0] shadow [int];

  initial begin
    #1_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int r, input int c, input logic [15:0] d);
    @(negedge clk); req = 1; we = 1; row = 15'(r); col = 8'(c); wdata = d;
    @(negedge clk); req = 0; we = 0; nacc++;
    shadow[r * 256 + c] = d;
  endtask

  task automatic rd(input int r, input int c, input bit expect_err);
    @(negedge clk); req = 1; we = 0; row = 15'(r); col = 8'(c);
    @(negedge clk); req = 0; nacc++;
    check(rvalid, "read data one cycle after the request");
    if (expect_err) check(rerr && rdata == 0, $sformatf("row %0d should have expired", r));
    else check(!rerr && rdata == shadow[r * 256 + c],
               $sformatf("row %0d col %0d: %h exp %h", r, c, rdata, shadow[r * 256 + c]));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 50; i++) wr($urandom_range(0, 27647), $urandom_range(0, 255), 16'($urandom));
    foreach (shadow[k]) rd(k / 256, k % 256, 0);
    wr(27647, 255, 16'hBEEF); wr(100, 3, 16'h1234); wr(200, 4, 16'h5678);
    for (int t = 0; t < 15; t++) begin
      repeat (200) @(negedge clk);
      rd(100, 7 * t % 256 == 3 ? 3 : 3, 0);   // decode read of row 100 refreshes it
    end
    check(!ret_fail, "no failure while the row is read regularly");
    rd(200, 4, 1);                               // never read: expired
    check(ret_fail, "ret_fail set");
    check(refreshes == 32'(nacc), "every access counted as a row refresh");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
