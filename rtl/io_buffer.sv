// io_buffer -- queues between the accelerator core and external DRAM.
//
// Three queues decouple the core from the memory's latency and back-pressure:
//   * read requests (address) from the core to the memory;
//   * read data from the memory to the core, returned in request order;
//   * writes (address and data) from the core to the memory.
// The memory's read-data port has no back-pressure, so the buffer only lets
// a read request out while the number of reads in flight plus the words
// already waiting is below the read-data queue depth; returned data can
// therefore always be stored. Words are 32 bits, addresses count words.
// From the paper: an IO buffer connecting the chip to external DRAM. This
// design's choices: everything else (queues, depth, credit scheme, widths).
// The assertion's `disable iff (!rst_n)` makes lint see rst_n used
// synchronously next to the asynchronous reset (SYNCASYNCNET); it is a
// checker, not logic, so the warning stands.
module io_buffer #(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  // core side
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_req_addr,
  output logic        rd_data_valid,
  input  logic        rd_data_ready,
  output logic [31:0] rd_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data,
  // external memory side
  output logic        ext_rd_valid,
  input  logic        ext_rd_ready,
  output logic [31:0] ext_rd_addr,
  input  logic        ext_rdata_valid,
  input  logic [31:0] ext_rdata,
  output logic        ext_wr_valid,
  input  logic        ext_wr_ready,
  output logic [31:0] ext_wr_addr,
  output logic [31:0] ext_wr_data
);

  // read requests
  logic        rq_valid, rq_ready;
  logic [31:0] rq_addr;
  logic [AW:0] rq_count, rd_count;
  logic [AW+1:0] in_flight;
  logic        credit;

  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_rq (
    .clk, .rst_n, .in_valid(rd_req_valid), .in_ready(rd_req_ready), .in_data(rd_req_addr),
    .out_valid(rq_valid), .out_ready(rq_ready), .out_data(rq_addr), .count(rq_count)
  );

  assign credit       = (in_flight + (AW+2)'(rd_count)) < (AW+2)'(DEPTH);
  assign ext_rd_valid = rq_valid && credit;
  assign ext_rd_addr  = rq_addr;
  assign rq_ready     = ext_rd_ready && credit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_flight <= '0;
    else        in_flight <= in_flight + (AW+2)'(ext_rd_valid && ext_rd_ready)
                                       - (AW+2)'(ext_rdata_valid);
  end

  // read data
  logic rd_in_ready;
  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_rd (
    .clk, .rst_n, .in_valid(ext_rdata_valid), .in_ready(rd_in_ready), .in_data(ext_rdata),
    .out_valid(rd_data_valid), .out_ready(rd_data_ready), .out_data(rd_data), .count(rd_count)
  );

  // writes
  logic [AW:0] wr_count;
  sync_fifo #(.WIDTH(64), .DEPTH(DEPTH)) u_wr (
    .clk, .rst_n, .in_valid(wr_valid), .in_ready(wr_ready), .in_data({wr_addr, wr_data}),
    .out_valid(ext_wr_valid), .out_ready(ext_wr_ready), .out_data({ext_wr_addr, ext_wr_data}),
    .count(wr_count)
  );

  // returned data always finds room (guaranteed by the credit check)
  assert property (@(posedge clk) disable iff (!rst_n) ext_rdata_valid |-> rd_in_ready);

endmodule
