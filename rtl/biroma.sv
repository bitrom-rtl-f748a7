// biroma -- behavioural model of the Bidirectional ROM Array (BiROMA).
//
// The real array is a full-custom, mask-programmed one-transistor ROM: each
// cell sits between an even-side and an odd-side signal line, each side has
// three lines at 1/2 VDD (digit '0'), 1/4 VDD ('+1') and VSS ('-1'), and the
// lines a transistor touches encode two ternary weights, one read from each
// side. This model keeps the array's digital behaviour and its control pins,
// not its circuits.
//
// Read cycle (one wordline, one side):
//   * cycle 0: wl_en with wl_addr, the bitline side precharged (pre_e/pre_o)
//     and the other side supplied as source lines (sup_o/sup_e). The model
//     latches the row and the side on this clock edge.
//   * following cycles: a one-hot column select on the bitline side
//     (cs_e or cs_o) connects column c of every 8-column group to that
//     group's output, so bl[g] shows the weight at column g*8+c.
// bl[g] is BL_FLOAT when no valid read is set up. Contents come from
// bitrom_pkg::rom_weight(seed, row, column, side); seed is a port so that
// every macro shares one module while holding different weights.
//
// From the paper: 2048 rows x 1024 columns, two ternary weights per cell, 8
// columns per group, E/O symmetric bidirectional readout, the three line
// levels. This design's choices: the one-cycle wordline/precharge step, the
// column-select-per-cycle timing and the contents function.
module biroma
  import bitrom_pkg::*;
#(
  parameter int unsigned ROWS       = 2048,
  parameter int unsigned COLS       = 1024,
  parameter int unsigned GROUP_COLS = 8,
  localparam int unsigned GROUPS    = COLS / GROUP_COLS,
  localparam int unsigned RW        = $clog2(ROWS)
) (
  input  logic                  clk,
  input  logic [31:0]           seed,
  input  logic                  wl_en,
  input  logic [RW-1:0]         wl_addr,
  input  logic                  pre_e,
  input  logic                  pre_o,
  input  logic                  sup_e,
  input  logic                  sup_o,
  input  logic [GROUP_COLS-1:0] cs_e,
  input  logic [GROUP_COLS-1:0] cs_o,
  output bl_level_t             bl [GROUPS]
);

  logic [RW-1:0] row_q;
  side_t         side_q;
  logic          open_q;    // a row has been read onto the bitlines

  always_ff @(posedge clk) begin
    if (wl_en) begin
      row_q  <= wl_addr;
      // Bitlines on the odd side need the even side as source lines.
      if (pre_o && sup_e && !pre_e && !sup_o) begin
        side_q <= SIDE_O;
        open_q <= 1'b1;
      end else if (pre_e && sup_o && !pre_o && !sup_e) begin
        side_q <= SIDE_E;
        open_q <= 1'b1;
      end else begin
        open_q <= 1'b0;
      end
    end
  end


  logic [GROUP_COLS-1:0] cs_act;
  logic                  cs_ok;
  logic [$clog2(GROUP_COLS)-1:0] col_sel;

  always_comb begin
    cs_act  = (side_q == SIDE_O) ? cs_o : cs_e;
    cs_ok   = open_q && (cs_act != '0) && ((cs_act & (cs_act - 1'b1)) == '0) &&
              (((side_q == SIDE_O) ? cs_e : cs_o) == '0);
    col_sel = '0;
    for (int c = 0; c < GROUP_COLS; c++)
      if (cs_act[c]) col_sel = c[$clog2(GROUP_COLS)-1:0];
  end

  always_comb begin
    for (int g = 0; g < GROUPS; g++) begin
      tern_code_t w;
      logic [9:0] col;
      col = 10'(g * GROUP_COLS + int'(col_sel));
      w   = rom_weight(seed, 11'(row_q), col, side_q);
      if (!cs_ok)             bl[g] = BL_FLOAT;
      else if (w == TC_POS)   bl[g] = BL_QUARTER;
      else if (w == TC_NEG)   bl[g] = BL_VSS;
      else                    bl[g] = BL_HALF;
    end
  end

endmodule
