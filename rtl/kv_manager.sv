// kv_manager -- decode-refresh placement of the KV-cache.
//
// During decoding, the key/value vectors of token i are read at every later
// step, so early tokens are read most often. This unit keeps the first
// ONDIE_TOKENS tokens of each sequence in the on-die DR eDRAM and sends
// later tokens to external DRAM through the IO buffer; with 32 of 128 tokens
// on die, 43.6% of the KV reads of a sequence never leave the chip.
//
// Requests are single 16-bit elements addressed by kv_addr_t (batch, layer,
// KV head, K or V, token, element), one at a time: req_ready is high only
// when idle. On-die element: eDRAM row ((((batch*18+layer)*4+head)*2+kv)*32
// + token), column elem. External element: word EXT_BASE +
// (((((batch*18+layer)*4+head)*2+kv)*MAX_SEQ + token)*256 + elem), value in
// the low 16 bits. A read answers with a one-cycle rsp_valid pulse (rsp_err
// when the eDRAM row had expired); a write finishes when handed over.
// On-die reads take 2 cycles, external ones the memory latency plus 2.
//
// It counts on-die and external reads and writes, and watches the
// token-to-token time: decode_step marks the start of each decoding step,
// and tbt_violation is set (sticky) if two steps are more than T_RET cycles
// apart, since the eDRAM contents would then have decayed.
// From the paper: on-die storage of the early tokens, automatic refresh by
// the decode reads, the TBT < tREF requirement. This design's choices: the
// address maps, the one-request-at-a-time protocol and the counters.
module kv_manager
  import bitrom_pkg::*;
#(
  parameter int unsigned     ONDIE  = 32,
  parameter logic [31:0]     EXT_BASE = 32'h4000_0000,
  parameter longint unsigned T_RET  = 64'd6_400_000,
  localparam int unsigned    ERAW   = $clog2(N_BATCH * N_LAYERS * KV_HEADS * 2 * ONDIE)
) (
  input  logic             clk,
  input  logic             rst_n,
  // core side
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  kv_addr_t         req_addr,
  input  logic [15:0]      req_wdata,
  output logic             rsp_valid,
  output logic [15:0]      rsp_data,
  output logic             rsp_err,
  input  logic             decode_step,
  // DR eDRAM
  output logic             e_req,
  output logic             e_we,
  output logic [ERAW-1:0]  e_row,
  output logic [7:0]       e_col,
  output logic [15:0]      e_wdata,
  input  logic             e_rvalid,
  input  logic [15:0]      e_rdata,
  input  logic             e_rerr,
  // external memory via IO buffer
  output logic             x_rd_valid,
  input  logic             x_rd_ready,
  output logic [31:0]      x_rd_addr,
  input  logic             x_rdata_valid,
  output logic             x_rdata_ready,
  input  logic [31:0]      x_rdata,
  output logic             x_wr_valid,
  input  logic             x_wr_ready,
  output logic [31:0]      x_wr_addr,
  output logic [31:0]      x_wr_data,
  // statistics
  output logic [31:0]      ondie_reads,
  output logic [31:0]      ext_reads,
  output logic [31:0]      ondie_writes,
  output logic [31:0]      ext_writes,
  output logic             tbt_violation
);

  typedef enum logic [2:0] {K_IDLE, K_EWAIT, K_XRQ, K_XWAIT, K_XWR} kstate_t;
  kstate_t state;

  logic [15:0] d_q;

  function automatic logic [31:0] head_index(input kv_addr_t a);
    return ((32'(a.batch) * N_LAYERS + 32'(a.layer)) * KV_HEADS + 32'(a.head)) * 2 + 32'(a.kv);
  endfunction

  logic ondie;
  assign ondie = (32'(req_addr.token) < ONDIE);

  always_comb begin
    e_req   = (state == K_IDLE) && req_valid && ondie;
    e_we    = req_we;
    e_row   = ERAW'(head_index(req_addr) * ONDIE + 32'(req_addr.token));
    e_col   = req_addr.elem;
    e_wdata = req_wdata;
  end

  logic [31:0] x_addr_q;
  assign x_rd_valid    = (state == K_XRQ);
  assign x_rd_addr     = x_addr_q;
  assign x_rdata_ready = (state == K_XWAIT);
  assign x_wr_valid    = (state == K_XWR);
  assign x_wr_addr     = x_addr_q;
  assign x_wr_data     = {16'h0, d_q};
  assign req_ready     = (state == K_IDLE);

  logic [63:0] since_step;
  logic        stepped;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= K_IDLE;
      d_q           <= '0;
      x_addr_q      <= '0;
      rsp_valid     <= 1'b0;
      rsp_data      <= '0;
      rsp_err       <= 1'b0;
      ondie_reads   <= '0;
      ext_reads     <= '0;
      ondie_writes  <= '0;
      ext_writes    <= '0;
      since_step    <= '0;
      stepped       <= 1'b0;
      tbt_violation <= 1'b0;
    end else begin
      rsp_valid <= 1'b0;
      rsp_err   <= 1'b0;
      // token-between-token monitor
      if (decode_step) begin
        since_step <= '0;
        stepped    <= 1'b1;
      end else begin
        since_step <= since_step + 64'd1;
        if (stepped && since_step >= T_RET) tbt_violation <= 1'b1;
      end
      unique case (state)
        K_IDLE: if (req_valid) begin
          d_q      <= req_wdata;
          x_addr_q <= EXT_BASE + ((head_index(req_addr) * MAX_SEQ + 32'(req_addr.token))
                                  * HEAD_DIM + 32'(req_addr.elem));
          if (ondie) begin
            if (req_we) ondie_writes <= ondie_writes + 32'd1;
            else begin
              ondie_reads <= ondie_reads + 32'd1;
              state       <= K_EWAIT;
            end
          end else if (req_we) begin
            ext_writes <= ext_writes + 32'd1;
            state      <= K_XWR;
          end else begin
            ext_reads <= ext_reads + 32'd1;
            state     <= K_XRQ;
          end
        end
        K_EWAIT: if (e_rvalid) begin
          rsp_valid <= 1'b1;
          rsp_data  <= e_rdata;
          rsp_err   <= e_rerr;
          state     <= K_IDLE;
        end
        K_XRQ:   if (x_rd_ready) state <= K_XWAIT;
        K_XWAIT: if (x_rdata_valid) begin
          rsp_valid <= 1'b1;
          rsp_data  <= x_rdata[15:0];
          state     <= K_IDLE;
        end
        K_XWR:   if (x_wr_ready) state <= K_IDLE;
        default: state <= K_IDLE;
      endcase
    end
  end

endmodule
