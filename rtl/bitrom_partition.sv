// bitrom_partition -- one macro partition: LPP Transformer layers of macros.
//
// The chip is split into independent partitions that work in parallel, each
// on its own batch. A partition holds, for each of its LPP layers, MPL ROM
// macros (the layer's ternary projections) and one LoRA adapter. The
// controller addresses one layer and one macro at a time through a shared
// set of command signals:
//   * act_we writes an activation word to every macro and to the adapter of
//     layer sel_layer (all projections of a layer read the same input);
//   * run_start starts macro (sel_layer, sel_macro); its results come out on
//     res_*;
//   * down_start / up_start and the w_* weight stream drive the adapter of
//     sel_layer; the adapter's output goes to the running macro's LoRA input.
// Each macro's ROM contents are chosen by a seed built from part_id, layer
// and macro index. sel_layer and sel_macro must stay stable while a command
// runs. busy is high while any macro or adapter is busy; zero_skips and ovf
// collect the macros' counters and overflow flags.
// From the paper: partitions of 3 layers, the macros of a layer, one domain
// adapter per Transformer block. This design's choices: the macro count per
// layer (15, from the Falcon3-1B layer size), selection and seeds.
module bitrom_partition
  import bitrom_pkg::*;
#(
  parameter int unsigned LPP  = 3,
  parameter int unsigned MPL  = 15,
  parameter int unsigned ROWS = 2048,
  parameter int unsigned COLS = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [2:0]         part_id,
  input  logic [1:0]         sel_layer,
  input  logic [3:0]         sel_macro,
  // activations
  input  logic               act_we,
  input  logic [10:0]        act_waddr,
  input  logic [31:0]        act_wdata,
  // projection
  input  logic               run_start,
  input  logic [13:0]        n_out,
  input  logic [3:0]         n_steps,
  input  logic [11:0]        row_base,
  input  act_mode_t          act_mode,
  input  logic               lora_en,
  input  logic [4:0]         lora_shift,
  output logic               res_valid,
  input  logic               res_ready,
  output logic signed [23:0] res_data,
  output logic [13:0]        res_idx,
  // LoRA adapter
  input  logic               down_start,
  input  logic               up_start,
  input  logic [11:0]        k_words,
  input  logic [4:0]         h_shift,
  input  logic               w_valid,
  input  logic [31:0]        w_data,
  output logic               w_ready,
  // status
  output logic               busy,
  output logic               ovf,
  output logic [31:0]        zero_skips
);

  logic               m_res_valid [LPP][MPL];
  logic signed [23:0] m_res_data  [LPP][MPL];
  logic [13:0]        m_res_idx   [LPP][MPL];
  logic               m_lora_ready[LPP][MPL];
  logic               m_busy      [LPP][MPL];
  logic               m_ovf       [LPP][MPL];
  logic [31:0]        m_skips     [LPP][MPL];

  logic               a_w_ready [LPP];
  logic               a_y_valid [LPP];
  logic signed [31:0] a_y_data  [LPP];
  logic               a_busy    [LPP];
  logic               a_y_ready [LPP];

  for (genvar l = 0; l < LPP; l++) begin : g_layer
    logic lsel;
    assign lsel = (sel_layer == 2'(l));

    logic signed [7:0] h_unused [16];   // rank vector, observed only in tests

    lora_adapter u_lora (
      .clk, .rst_n,
      .x_we(act_we && lsel), .x_waddr(act_waddr), .x_wdata(act_wdata),
      .down_start(down_start && lsel), .k_words, .h_shift,
      .up_start(up_start && lsel), .n_out,
      .w_valid(w_valid && lsel), .w_data, .w_ready(a_w_ready[l]),
      .y_valid(a_y_valid[l]), .y_data(a_y_data[l]), .y_ready(a_y_ready[l]),
      .busy(a_busy[l]), .h(h_unused)
    );

    for (genvar m = 0; m < MPL; m++) begin : g_macro
      logic msel;
      assign msel = lsel && (sel_macro == 4'(m));

      bitrom_macro #(.ROWS(ROWS), .COLS(COLS)) u_macro (
        .clk, .rst_n,
        .seed({8'hB1, 5'(part_id), 3'(l), 4'(m), 12'h5A7}),
        .act_we(act_we && lsel), .act_waddr, .act_wdata,
        .start(run_start && msel), .n_out, .n_steps, .row_base, .act_mode,
        .lora_en, .lora_shift,
        .lora_valid(a_y_valid[l] && msel), .lora_data(a_y_data[l]),
        .lora_ready(m_lora_ready[l][m]),
        .res_valid(m_res_valid[l][m]), .res_ready(res_ready && msel),
        .res_data(m_res_data[l][m]), .res_idx(m_res_idx[l][m]),
        .busy(m_busy[l][m]), .ovf(m_ovf[l][m]), .zero_skips(m_skips[l][m])
      );
    end
  end

  always_comb begin
    res_valid  = 1'b0;
    res_data   = '0;
    res_idx    = '0;
    w_ready    = 1'b0;
    busy       = 1'b0;
    ovf        = 1'b0;
    zero_skips = '0;
    for (int l = 0; l < LPP; l++) begin
      a_y_ready[l] = 1'b0;
      busy = busy | a_busy[l];
      if (sel_layer == 2'(l)) w_ready = a_w_ready[l];
      for (int m = 0; m < MPL; m++) begin
        busy       = busy | m_busy[l][m];
        ovf        = ovf | m_ovf[l][m];
        zero_skips = zero_skips + m_skips[l][m];
        if (sel_layer == 2'(l) && sel_macro == 4'(m)) begin
          res_valid    = m_res_valid[l][m];
          res_data     = m_res_data[l][m];
          res_idx      = m_res_idx[l][m];
          a_y_ready[l] = m_lora_ready[l][m];
        end
      end
    end
  end

endmodule
