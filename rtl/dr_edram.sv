// dr_edram -- behavioural model of the Decode-Refresh (DR) eDRAM macro.
//
// On-die dynamic memory for the KV-cache of the first tokens of every
// sequence. Its cells leak: a row not accessed for longer than the retention
// time loses its contents. The macro has no refresh controller at all;
// instead every access opens the row's wordline and fires its sense
// amplifiers, which rewrites (refreshes) the whole row. During decoding each
// stored token is read at every step, so as long as the token-to-token time
// is shorter than the retention time, no explicit refresh is ever needed.
//
// The cell array is a process-specific circuit; this model keeps its
// function: ROWS rows of COLS 16-bit words, one access per cycle (req, we,
// row, col, wdata), read data valid the next cycle (rvalid, rdata). Each row
// remembers the cycle of its last access. A read of a row whose age exceeds
// T_RET cycles returns zero with rerr set, and sets the sticky ret_fail;
// every access resets the row's age. refreshes counts row activations.
// Default size: 27648 rows x 512 bytes = 13.5 MiB (6 batches x 18 layers x
// 4 KV heads x {K,V} x 32 tokens, one 256-element head vector per row).
// T_RET is 64 ms at an assumed 100 MHz clock. Reset is synchronous.
// From the paper: 13.5 MB, 32 early tokens, refresh by access, no refresh
// management, 64 ms retention. This design's choices: organisation, element
// width, clock rate, the zero-on-loss read.
module dr_edram #(
  parameter int unsigned ROWS  = 27648,
  parameter int unsigned COLS  = 256,
  parameter longint unsigned T_RET = 64'd6_400_000,
  localparam int unsigned RAW  = $clog2(ROWS),
  localparam int unsigned CAW  = $clog2(COLS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req,
  input  logic           we,
  input  logic [RAW-1:0] row,
  input  logic [CAW-1:0] col,
  input  logic [15:0]    wdata,
  output logic           rvalid,
  output logic [15:0]    rdata,
  output logic           rerr,
  output logic           ret_fail,
  output logic [31:0]    refreshes
);

  logic [15:0]  mem  [ROWS][COLS];
  logic [63:0]  last [ROWS];
  logic [63:0]  now;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      now       <= '0;
      rvalid    <= 1'b0;
      rdata     <= '0;
      rerr      <= 1'b0;
      ret_fail  <= 1'b0;
      refreshes <= '0;
    end else begin
      now    <= now + 64'd1;
      rvalid <= req && !we;
      rerr   <= 1'b0;
      if (req) begin
        refreshes <= refreshes + 32'd1;
        if (we) begin
          mem[row][col] <= wdata;
        end else if (now - last[row] > T_RET) begin
          rdata    <= '0;
          rerr     <= 1'b1;
          ret_fail <= 1'b1;
        end else begin
          rdata <= mem[row][col];
        end
      end
    end
  end

  // Opening a row refreshes all of it; rows start as freshly written at reset.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) last[r] <= '0;
    end else if (req) begin
      last[row] <= now;
    end
  end

endmodule
