// ext_mem_model -- behavioural model of the external DRAM, for testbenches.
//
// Word-addressed 32-bit memory held in an associative array. Read requests
// are accepted when ready (randomly withheld when STALL is set) and answered
// in order LATENCY cycles later; writes are accepted likewise. A word never
// written reads as init_word(addr). Counts reads and writes. Requests in the
// first two cycles, while the design is still in reset, are ignored.
module ext_mem_model #(
  parameter int LATENCY = 6,
  parameter bit STALL   = 1
) (
  input  logic        clk,
  input  logic        ext_rd_valid,
  output logic        ext_rd_ready,
  input  logic [31:0] ext_rd_addr,
  output logic        ext_rdata_valid,
  output logic [31:0] ext_rdata,
  input  logic        ext_wr_valid,
  output logic        ext_wr_ready,
  input  logic [31:0] ext_wr_addr,
  input  logic [31:0] ext_wr_data
);
  logic [31:0] mem [int unsigned];
  int unsigned n_reads = 0, n_writes = 0;
  longint due [$]; logic [31:0] dq [$];
  longint now = 0;

  function automatic logic [31:0] init_word(input logic [31:0] a);
    return (a * 32'h0101_0101) ^ 32'h5A3C_0F1E;
  endfunction

  function automatic logic [31:0] peek(input logic [31:0] a);
    return mem.exists(a) ? mem[a] : init_word(a);
  endfunction

  task automatic poke(input logic [31:0] a, input logic [31:0] d);
    mem[a] = d;
  endtask

  initial begin
    ext_rd_ready = 1; ext_wr_ready = 1; ext_rdata_valid = 0; ext_rdata = '0;
  end

  always @(posedge clk) begin
    now++;
    if (ext_rd_valid && ext_rd_ready && now > 2) begin
      due.push_back(now + LATENCY); dq.push_back(peek(ext_rd_addr)); n_reads++;
    end
    if (ext_wr_valid && ext_wr_ready && now > 2) begin
      mem[ext_wr_addr] = ext_wr_data; n_writes++;
    end
    if (due.size() > 0 && due[0] <= now) begin
      ext_rdata_valid <= 1; ext_rdata <= dq.pop_front(); void'(due.pop_front());
    end else begin
      ext_rdata_valid <= 0;
    end
    ext_rd_ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
    ext_wr_ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
  end
endmodule
