// bitrom_top -- BitROM edge LLM accelerator.
//
// A compute-in-ROM accelerator for ternary-weight (1.58-bit) LLMs. Every
// linear-projection weight of the model is fixed at fabrication in the ROM
// arrays of the macros, so inference never reloads weights; only
// activations, small LoRA adapter weights and the late part of the
// KV-cache travel to and from external DRAM.
//
// Structure (defaults map Falcon3-1B, 18 Transformer layers):
//   NP (6) partitions x LPP (3) layers x MPL (15) macros of 2048 x 1024
//     bidirectional ROM cells (two ternary weights each), with a LoRA
//     adapter per layer (bitrom_partition, bitrom_macro, lora_adapter)
//   aux_arith  : requantization of macro results
//   dr_edram   : 13.5 MiB decode-refresh eDRAM for the first 32 tokens' KV
//   kv_manager : on-die / external placement of KV entries
//   io_buffer  : queues to external DRAM
//   bitrom_ctrl: command execution and the six-stage batch pipeline
//
// Interface: host commands (cmd_t) on cmd_valid/cmd_ready; 32-bit word
// external memory ports (read request, in-order read data without
// back-pressure, write); a KV read stream kv_out_*; status counters.
// One clock, active-low reset (asynchronous in the logic, synchronous in
// the eDRAM model).
// Lint reports rst_n as used both asynchronously and synchronously
// (SYNCASYNCNET): the synchronous uses are the eDRAM model's reset and the
// `disable iff (!rst_n)` of the assertions, neither of which is logic that
// clocks rst_n into the datapath, so the warning stands.
// From the paper: the block set and its connections (IO buffer, auxiliary
// arithmetic, DR eDRAM, macros with ROM array, TriMLA, adder tree and domain
// adapter, control logic), 6 partitions of 3 layers, 6 batches, 13.5 MB
// eDRAM for 32 tokens. This design's choices: the command interface and
// everything listed as such in the sub-blocks.
module bitrom_top
  import bitrom_pkg::*;
#(
  parameter int unsigned     NP    = 6,
  parameter int unsigned     LPP   = 3,
  parameter int unsigned     MPL   = 15,
  parameter int unsigned     ROWS  = 2048,
  parameter int unsigned     COLS  = 1024,
  parameter longint unsigned T_RET = 64'd6_400_000
) (
  input  logic        clk,
  input  logic        rst_n,
  // host commands
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd,
  // external DRAM
  output logic        ext_rd_valid,
  input  logic        ext_rd_ready,
  output logic [31:0] ext_rd_addr,
  input  logic        ext_rdata_valid,
  input  logic [31:0] ext_rdata,
  output logic        ext_wr_valid,
  input  logic        ext_wr_ready,
  output logic [31:0] ext_wr_addr,
  output logic [31:0] ext_wr_data,
  // KV-cache read stream
  output logic        kv_out_valid,
  output logic [15:0] kv_out_data,
  output logic        kv_out_err,
  // status
  output logic        busy,
  output logic [2:0]  slot,
  output logic [31:0] kv_ondie_reads,
  output logic [31:0] kv_ext_reads,
  output logic [31:0] kv_ondie_writes,
  output logic [31:0] kv_ext_writes,
  output logic        tbt_violation,
  output logic        edram_ret_fail,
  output logic [31:0] edram_refreshes,
  output logic [31:0] zero_skips,
  output logic [31:0] res_stalls,
  output logic        mla_overflow,
  output logic        quant_sat
);

  // ------------------------------------------------------------ control
  logic [1:0]         sel_layer;
  logic [3:0]         sel_macro;
  logic [NP-1:0]      act_we, run_start, down_start, up_start, w_valid;
  logic [10:0]        act_waddr;
  logic [31:0]        act_wdata, w_data;
  logic [13:0]        n_out;
  logic [3:0]         n_steps;
  logic [11:0]        row_base;
  act_mode_t          act_mode;
  logic               lora_en;
  logic [4:0]         lora_shift, h_shift;
  logic [11:0]        k_words;
  logic [NP-1:0]      p_res_valid, p_res_ready, p_w_ready, p_busy, p_ovf;
  logic signed [23:0] p_res_data [NP];
  logic [13:0]        p_res_idx  [NP];
  logic [31:0]        p_skips    [NP];

  logic               aux_in_valid, aux_in_ready, aux_out_valid, aux_out_ready;
  logic signed [23:0] aux_in_data;
  logic signed [15:0] aux_out_data;
  logic [7:0]         aux_scale;
  logic [4:0]         aux_shift;
  qmode_t             aux_mode;

  logic        c_rd_req_valid, c_rd_req_ready, c_rd_data_valid, c_rd_data_ready;
  logic        c_wr_valid, c_wr_ready;
  logic [31:0] c_rd_req_addr, c_wr_addr, c_wr_data;
  logic        io_rd_kv, io_wr_kv;

  logic        kv_req_valid, kv_req_ready, kv_req_we, kv_rsp_valid, kv_rsp_err, decode_step;
  kv_addr_t    kv_req_addr;
  logic [15:0] kv_req_wdata, kv_rsp_data;

  logic        io_rd_req_valid, io_rd_req_ready, io_rd_data_valid, io_rd_data_ready;
  logic        io_wr_valid, io_wr_ready;
  logic [31:0] io_rd_req_addr, io_rd_data, io_wr_addr, io_wr_data;

  logic        k_rd_valid, k_rdata_ready, k_wr_valid;
  logic [31:0] k_rd_addr, k_wr_addr, k_wr_data;

  bitrom_ctrl #(.NP(NP), .LPP(LPP), .NB(N_BATCH)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .sel_layer, .sel_macro, .act_we, .act_waddr, .act_wdata, .run_start, .n_out, .n_steps,
    .row_base, .act_mode, .lora_en, .lora_shift, .p_res_valid, .p_res_ready, .p_res_data,
    .p_res_idx, .down_start, .up_start, .k_words, .h_shift, .w_valid, .w_data, .p_w_ready,
    .p_busy,
    .aux_in_valid, .aux_in_ready, .aux_in_data, .aux_scale, .aux_shift, .aux_mode,
    .aux_out_valid, .aux_out_ready, .aux_out_data,
    .rd_req_valid(c_rd_req_valid), .rd_req_ready(c_rd_req_ready), .rd_req_addr(c_rd_req_addr),
    .rd_data_valid(c_rd_data_valid), .rd_data_ready(c_rd_data_ready), .rd_data(io_rd_data),
    .wr_valid(c_wr_valid), .wr_ready(c_wr_ready), .wr_addr(c_wr_addr), .wr_data(c_wr_data),
    .io_rd_kv, .io_wr_kv,
    .kv_req_valid, .kv_req_ready, .kv_req_we, .kv_req_addr, .kv_req_wdata,
    .kv_rsp_valid, .kv_rsp_data, .kv_rsp_err, .decode_step,
    .kv_out_valid, .kv_out_data, .kv_out_err,
    .busy, .slot, .res_stalls
  );

  // ------------------------------------------------------------ partitions
  for (genvar p = 0; p < NP; p++) begin : g_part
    bitrom_partition #(.LPP(LPP), .MPL(MPL), .ROWS(ROWS), .COLS(COLS)) u_part (
      .clk, .rst_n, .part_id(3'(p)), .sel_layer, .sel_macro,
      .act_we(act_we[p]), .act_waddr, .act_wdata,
      .run_start(run_start[p]), .n_out, .n_steps, .row_base, .act_mode, .lora_en, .lora_shift,
      .res_valid(p_res_valid[p]), .res_ready(p_res_ready[p]), .res_data(p_res_data[p]),
      .res_idx(p_res_idx[p]),
      .down_start(down_start[p]), .up_start(up_start[p]), .k_words, .h_shift,
      .w_valid(w_valid[p]), .w_data, .w_ready(p_w_ready[p]),
      .busy(p_busy[p]), .ovf(p_ovf[p]), .zero_skips(p_skips[p])
    );
  end

  always_comb begin
    zero_skips = '0;
    for (int p = 0; p < NP; p++) zero_skips = zero_skips + p_skips[p];
  end
  assign mla_overflow = |p_ovf;

  // ------------------------------------------------------------ aux arithmetic
  aux_arith u_aux (
    .clk, .rst_n, .in_valid(aux_in_valid), .in_ready(aux_in_ready), .in_data(aux_in_data),
    .scale(aux_scale), .shift(aux_shift), .mode(aux_mode),
    .out_valid(aux_out_valid), .out_ready(aux_out_ready), .out_data(aux_out_data), .sat(quant_sat)
  );

  // ------------------------------------------------------------ KV-cache
  localparam int unsigned ERAW = $clog2(EDRAM_ROWS);
  logic             e_req, e_we, e_rvalid, e_rerr;
  logic [ERAW-1:0]  e_row;
  logic [7:0]       e_col;
  logic [15:0]      e_wdata, e_rdata;

  kv_manager #(.ONDIE(ONDIE_TOKENS), .T_RET(T_RET)) u_kv (
    .clk, .rst_n,
    .req_valid(kv_req_valid), .req_ready(kv_req_ready), .req_we(kv_req_we),
    .req_addr(kv_req_addr), .req_wdata(kv_req_wdata),
    .rsp_valid(kv_rsp_valid), .rsp_data(kv_rsp_data), .rsp_err(kv_rsp_err), .decode_step,
    .e_req, .e_we, .e_row, .e_col, .e_wdata, .e_rvalid, .e_rdata, .e_rerr,
    .x_rd_valid(k_rd_valid), .x_rd_ready(io_rd_req_ready), .x_rd_addr(k_rd_addr),
    .x_rdata_valid(io_rd_data_valid), .x_rdata_ready(k_rdata_ready), .x_rdata(io_rd_data),
    .x_wr_valid(k_wr_valid), .x_wr_ready(io_wr_ready), .x_wr_addr(k_wr_addr),
    .x_wr_data(k_wr_data),
    .ondie_reads(kv_ondie_reads), .ext_reads(kv_ext_reads),
    .ondie_writes(kv_ondie_writes), .ext_writes(kv_ext_writes), .tbt_violation
  );

  dr_edram #(.ROWS(EDRAM_ROWS), .COLS(EDRAM_COLS), .T_RET(T_RET)) u_edram (
    .clk, .rst_n, .req(e_req), .we(e_we), .row(e_row), .col(e_col), .wdata(e_wdata),
    .rvalid(e_rvalid), .rdata(e_rdata), .rerr(e_rerr), .ret_fail(edram_ret_fail),
    .refreshes(edram_refreshes)
  );

  // ------------------------------------------------------------ IO buffer
  always_comb begin
    io_rd_req_valid  = io_rd_kv ? k_rd_valid    : c_rd_req_valid;
    io_rd_req_addr   = io_rd_kv ? k_rd_addr     : c_rd_req_addr;
    io_rd_data_ready = io_rd_kv ? k_rdata_ready : c_rd_data_ready;
    c_rd_req_ready   = !io_rd_kv && io_rd_req_ready;
    c_rd_data_valid  = !io_rd_kv && io_rd_data_valid;
    io_wr_valid      = io_wr_kv ? k_wr_valid    : c_wr_valid;
    io_wr_addr       = io_wr_kv ? k_wr_addr     : c_wr_addr;
    io_wr_data       = io_wr_kv ? k_wr_data     : c_wr_data;
    c_wr_ready       = !io_wr_kv && io_wr_ready;
  end

  io_buffer u_io (
    .clk, .rst_n,
    .rd_req_valid(io_rd_req_valid), .rd_req_ready(io_rd_req_ready), .rd_req_addr(io_rd_req_addr),
    .rd_data_valid(io_rd_data_valid), .rd_data_ready(io_rd_data_ready), .rd_data(io_rd_data),
    .wr_valid(io_wr_valid), .wr_ready(io_wr_ready), .wr_addr(io_wr_addr), .wr_data(io_wr_data),
    .ext_rd_valid, .ext_rd_ready, .ext_rd_addr, .ext_rdata_valid, .ext_rdata,
    .ext_wr_valid, .ext_wr_ready, .ext_wr_addr, .ext_wr_data
  );

endmodule
