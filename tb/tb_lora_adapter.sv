// tb_lora_adapter -- self-checking test of the LoRA domain adapter.
//
// Writes random 8-bit activations, streams a random rank-16 A matrix with
// gaps in w_valid, checks the saturated rank vector h against a reference,
// then streams B rows and checks every output y = B h, with back-pressure
// on y_ready. Also checks that a gap-free down phase takes one cycle per
// weight word.
module tb_lora_adapter;
  localparam int RANK = 16, LANES = 4, K = 256, KW = K / LANES, NOUT = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_we = 0; logic [10:0] x_waddr = '0; logic [31:0] x_wdata = '0;
  logic down_start = 0; logic [11:0] k_words = '0; logic [4:0] h_shift = '0;
  logic up_start = 0; logic [13:0] n_out = '0;
  logic w_valid = 0; logic [31:0] w_data = '0; logic w_ready;
  logic y_valid; logic signed [31:0] y_data; logic y_ready = 0; logic busy;
  logic signed [7:0] h [RANK];

  lora_adapter dut (.*);

  int checks = 0, failures = 0;
  int x [K]; int a [RANK][K]; int b [NOUT][RANK]; int href [RANK];

  initial begin
    #500_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [7:0] w6(input int v); return 8'(v) & 8'h3f; endfunction

  task automatic down(input bit gaps, input int shift);
    int t0, t1;
    for (int r = 0; r < RANK; r++) begin
      longint s = 0;
      for (int k = 0; k < K; k++) s += a[r][k] * x[k];
      s = s >>> shift;
      href[r] = s > 127 ? 127 : (s < -128 ? -128 : int'(s));
    end
    @(negedge clk); down_start = 1; k_words = 12'(KW); h_shift = 5'(shift);
    @(negedge clk); down_start = 0; t0 = $time;
    for (int r = 0; r < RANK; r++)
      for (int j = 0; j < KW; j++) begin
        while (gaps && $urandom_range(0, 2) == 0) begin w_valid = 0; @(negedge clk); end
        w_valid = 1;
        w_data = {w6(a[r][4*j+3]), w6(a[r][4*j+2]), w6(a[r][4*j+1]), w6(a[r][4*j])};
        #1 while (!w_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
    w_valid = 0; t1 = $time;
    @(negedge clk);
    if (!gaps) check((t1 - t0) / 10 == RANK * KW, $sformatf("down phase %0d cycles", (t1 - t0) / 10));
    check(!busy, "idle after down phase");
    for (int r = 0; r < RANK; r++)
      check(h[r] == 8'(href[r]), $sformatf("h[%0d] = %0d exp %0d", r, h[r], href[r]));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < K; k++) x[k] = $urandom_range(0, 255) - 128;
    for (int w = 0; w < KW; w++) begin
      @(negedge clk); x_we = 1; x_waddr = 11'(w);
      x_wdata = {8'(x[4*w+3]), 8'(x[4*w+2]), 8'(x[4*w+1]), 8'(x[4*w])};
    end
    @(negedge clk) x_we = 0;
    for (int r = 0; r < RANK; r++) for (int k = 0; k < K; k++) a[r][k] = $urandom_range(0, 63) - 32;
    down(0, 8);     // in range
    down(1, 2);     // saturating, with gaps
    down(1, 9);
    for (int n = 0; n < NOUT; n++) for (int r = 0; r < RANK; r++) b[n][r] = $urandom_range(0, 63) - 32;
    @(negedge clk); up_start = 1; n_out = 14'(NOUT);
    @(negedge clk); up_start = 0;
    fork
      for (int n = 0; n < NOUT; n++)
        for (int q = 0; q < RANK / LANES; q++) begin
          w_valid = 1;
          w_data = {w6(b[n][4*q+3]), w6(b[n][4*q+2]), w6(b[n][4*q+1]), w6(b[n][4*q])};
          #1 while (!w_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          w_valid = 0;
        end
      for (int n = 0; n < NOUT; n++) begin
        int exp;
        exp = 0;
        for (int r = 0; r < RANK; r++) exp += b[n][r] * href[r];
        y_ready = 0;
        while (!y_valid) @(negedge clk);
        repeat ($urandom_range(0, 2)) @(negedge clk);
        check(y_valid && y_data == exp, $sformatf("y[%0d] = %0d exp %0d", n, y_data, exp));
        y_ready = 1; @(negedge clk); y_ready = 0;
      end
    join
    repeat (2) @(negedge clk);
    check(!busy, "idle after up phase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
