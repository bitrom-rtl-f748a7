// tb_io_buffer -- self-checking test of the IO buffer with a DRAM model.
//
// Issues a burst of reads to random addresses while the core side drains
// read data slowly, and a burst of writes; checks the data comes back in
// request order with the right values, that every write lands in memory,
// and (by assertion inside the buffer) that returned data never finds the
// read-data queue full.
module tb_io_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_req_valid = 0, rd_req_ready; logic [31:0] rd_req_addr = '0;
  logic rd_data_valid, rd_data_ready = 0; logic [31:0] rd_data;
  logic wr_valid = 0, wr_ready; logic [31:0] wr_addr = '0, wr_data = '0;
  logic ext_rd_valid, ext_rd_ready; logic [31:0] ext_rd_addr;
  logic ext_rdata_valid; logic [31:0] ext_rdata;
  logic ext_wr_valid, ext_wr_ready; logic [31:0] ext_wr_addr, ext_wr_data;

  io_buffer dut (.*);
  ext_mem_model #(.LATENCY(9)) mem (.*);

  int checks = 0, failures = 0;
  logic [31:0] addrs [$];
  localparam int N = 200;

  initial begin
    #1_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    fork
      for (int i = 0; i < N; i++) begin
        rd_req_valid = 1; rd_req_addr = 32'($urandom_range(0, 1 << 20));
        #1 while (!rd_req_ready) begin @(negedge clk); #1; end
        addrs.push_back(rd_req_addr);
        @(negedge clk);
        rd_req_valid = 0;
      end
      for (int i = 0; i < N; i++) begin
        logic [31:0] a;
        rd_data_ready = $urandom_range(0, 4) == 0;
        #1 while (!(rd_data_valid && rd_data_ready)) begin
          @(negedge clk); rd_data_ready = $urandom_range(0, 4) == 0; #1;
        end
        a = addrs.pop_front();
        checks++;
        if (rd_data != mem.peek(a)) begin
          failures++; $display("FAIL read %0d addr %h: %h exp %h", i, a, rd_data, mem.peek(a));
        end
        @(negedge clk);
        rd_data_ready = 0;
      end
      for (int i = 0; i < N; i++) begin
        wr_valid = 1; wr_addr = 32'h8000_0000 + 32'(i); wr_data = 32'(i * 7 + 3);
        #1 while (!wr_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        wr_valid = 0;
      end
    join
    repeat (40) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (mem.peek(32'h8000_0000 + 32'(i)) != 32'(i * 7 + 3)) failures++;
    end
    checks++; if (mem.n_reads != N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
