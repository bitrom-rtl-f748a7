// bitrom_macro -- one BitROM compute-in-ROM macro.
//
// A macro computes matrix-vector products y = W x with a ternary W that is
// fixed in its ROM array, using local-then-global accumulation: 128 Tri-Mode
// Local Accumulators (one per 8-column group) each add or subtract their own
// activations, weight by weight, skipping zero weights; only when a whole
// output channel is done does one shared adder tree sum the 128 partial
// sums.
//
// Weight layout. Output channel o with n_steps row reads uses the
// (wordline, side) pairs lin = o*n_steps + s, s = 0..n_steps-1, taken as
// wordline row_base + lin/2 and side E for even lin, O for odd lin. One such
// read gives 1024 weights: column g*8+c of read s multiplies activation
// k = s*1024 + g*8 + c. So an output channel covers K = 1024*n_steps inputs
// (2048 for n_steps = 2, 8192 for n_steps = 8).
//
// Activations are written 4 bytes at a time (act_waddr = k/4) into a buffer
// banked by group, so that every TriMLA reads its own activation each cycle.
// In ACT_A4 mode the low nibble of each byte is a signed 4-bit activation.
// In ACT_A8 mode each channel is run twice: first with the signed high
// nibbles, then with the unsigned low nibbles, and the global accumulator
// forms 16*first + second.
//
// Sequence per output channel (no stall):
//   per row read : 1 cycle wordline/precharge + 8 cycles column select
//   then         : 1 cycle adder tree -> global accumulator
//                  (repeat all row reads for the A8 low nibble)
//                  wait for the LoRA term if lora_en (lora_valid)
//                  1+ cycles result offered on res_valid/res_ready
// so an A4 channel takes 9*n_steps + 2 cycles, an A8 channel 18*n_steps + 3.
// The macro stalls while res_ready is low or the LoRA term is missing.
//
// Status: busy; ovf (some TriMLA wrapped in this command); zero_skips counts
// accumulator-cycles disabled by zero weights.
//
// From the paper: BiROMA size and grouping, comparator truth table, TriMLA
// modes and widths, one adder tree per macro, two-cycle handling of 8-bit
// activations with shift and accumulate, the LoRA adapter output entering
// the global sum. This design's choices: the weight layout, the cycle-level
// sequence, two passes (not two cycles per weight) for 8-bit activations,
// the handshakes and the status outputs.
module bitrom_macro
  import bitrom_pkg::*;
#(
  parameter int unsigned ROWS       = 2048,
  parameter int unsigned COLS       = 1024,
  parameter int unsigned GROUP_COLS = 8,
  parameter int unsigned MAX_STEPS  = 8,
  parameter int unsigned OUT_W      = 24,
  localparam int unsigned GROUPS    = COLS / GROUP_COLS,
  localparam int unsigned DEPTH     = MAX_STEPS * GROUP_COLS,
  localparam int unsigned AW        = $clog2(MAX_STEPS * COLS / 4),
  localparam int unsigned RW        = $clog2(ROWS),
  localparam int unsigned TREE_W    = 8 + $clog2(GROUPS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [31:0]             seed,
  // activation buffer write
  input  logic                    act_we,
  input  logic [AW-1:0]           act_waddr,
  input  logic [31:0]             act_wdata,
  // command
  input  logic                    start,
  input  logic [13:0]             n_out,
  input  logic [3:0]              n_steps,
  input  logic [11:0]             row_base,
  input  act_mode_t               act_mode,
  input  logic                    lora_en,
  input  logic [4:0]              lora_shift,
  // LoRA term of the current output channel
  input  logic                    lora_valid,
  input  logic signed [31:0]      lora_data,
  output logic                    lora_ready,
  // results
  output logic                    res_valid,
  input  logic                    res_ready,
  output logic signed [OUT_W-1:0] res_data,
  output logic [13:0]             res_idx,
  // status
  output logic                    busy,
  output logic                    ovf,
  output logic [31:0]             zero_skips
);

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_CS, S_SUM, S_LORA, S_OUT} state_t;
  state_t state;

  // configuration of the running command
  logic [13:0]  n_out_q;
  logic [3:0]   n_steps_q;
  logic [11:0]  row_base_q;
  act_mode_t    mode_q;
  logic         lora_en_q;
  logic [4:0]   lora_shift_q;

  logic [13:0]  out_idx;
  logic [3:0]   step;
  logic [$clog2(GROUP_COLS)-1:0] col;
  logic         pass;
  logic [17:0]  lin, lin_base;

  logic signed [OUT_W-1:0] gacc;

  // ------------------------------------------------------ activation buffer
  logic [7:0] abuf [GROUPS][DEPTH];

  always_ff @(posedge clk) begin
    if (act_we) begin
      int unsigned k0, g, loc;
      k0  = int'(act_waddr) * 4;
      g   = (k0 / GROUP_COLS) % GROUPS;
      loc = (k0 / COLS) * GROUP_COLS + (k0 % GROUP_COLS);
      for (int b = 0; b < 4; b++)
        abuf[g][loc + b] <= act_wdata[8*b +: 8];
    end
  end

  // ---------------------------------------------------------------- BiROMA
  logic                  wl_en, pre_e, pre_o, sup_e, sup_o;
  logic [RW-1:0]         wl_addr;
  logic [GROUP_COLS-1:0] cs_e, cs_o;
  bl_level_t             bl [GROUPS];
  side_t                 rd_side;

  always_comb begin
    rd_side = side_t'(lin[0]);
    wl_en   = (state == S_PRE);
    wl_addr = RW'(row_base_q + 12'(lin >> 1));
    pre_o   = wl_en && (rd_side == SIDE_O);
    sup_e   = wl_en && (rd_side == SIDE_O);
    pre_e   = wl_en && (rd_side == SIDE_E);
    sup_o   = wl_en && (rd_side == SIDE_E);
    cs_e    = '0;
    cs_o    = '0;
    if (state == S_CS) begin
      if (rd_side == SIDE_O) cs_o[col] = 1'b1;
      else                   cs_e[col] = 1'b1;
    end
  end

  biroma #(.ROWS(ROWS), .COLS(COLS), .GROUP_COLS(GROUP_COLS)) u_rom (
    .clk, .seed, .wl_en, .wl_addr, .pre_e, .pre_o, .sup_e, .sup_o,
    .cs_e, .cs_o, .bl
  );

  // ------------------------------------------------- comparators + TriMLAs
  logic comp_en, acc_clr, ia_signed;
  logic [$clog2(DEPTH)-1:0] rd_loc;

  always_comb begin
    comp_en   = (state == S_CS);
    acc_clr   = (state == S_CS) && (step == '0) && (col == '0);
    ia_signed = (mode_q == ACT_A4) || !pass;
    rd_loc    = ($clog2(DEPTH))'(int'(step) * GROUP_COLS + int'(col));
  end

  logic              msb [GROUPS];
  logic              lsb [GROUPS];
  logic signed [7:0] lacc [GROUPS];
  logic [GROUPS-1:0] g_ovf;

  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    logic [7:0] a;
    logic [3:0] ia;
    assign a  = abuf[g][rd_loc];
    assign ia = (mode_q == ACT_A8 && !pass) ? a[7:4] : a[3:0];

    tri_comparator u_cmp (.bl(bl[g]), .comp_en, .msb(msb[g]), .lsb(lsb[g]));

    trimla #(.IA_W(4), .ACC_W(8)) u_mla (
      .clk, .rst_n, .clr(acc_clr), .en(msb[g]), .add_n_sub(lsb[g]),
      .ia_signed, .ia, .acc(lacc[g]), .ovf(g_ovf[g])
    );
  end

  // ------------------------------------------------------------ adder tree
  logic signed [TREE_W-1:0] tree_sum;
  adder_tree #(.N(GROUPS), .IN_W(8)) u_tree (.in(lacc), .sum(tree_sum));

  // --------------------------------------------------------------- control
  logic last_col, last_step, last_out;
  assign last_col  = (col == $clog2(GROUP_COLS)'(GROUP_COLS - 1));
  assign last_step = (step == n_steps_q - 4'd1);
  assign last_out  = (out_idx == n_out_q - 14'd1);

  int unsigned skips_now;
  always_comb begin
    skips_now = 0;
    if (state == S_CS)
      for (int g = 0; g < GROUPS; g++)
        skips_now += (msb[g] ? 0 : 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      n_out_q      <= '0;
      n_steps_q    <= 4'd1;
      row_base_q   <= '0;
      mode_q       <= ACT_A4;
      lora_en_q    <= 1'b0;
      lora_shift_q <= '0;
      out_idx      <= '0;
      step         <= '0;
      col          <= '0;
      pass         <= 1'b0;
      lin          <= '0;
      lin_base     <= '0;
      gacc         <= '0;
      ovf          <= 1'b0;
      zero_skips   <= '0;
    end else begin
      zero_skips <= zero_skips + skips_now;
      unique case (state)
        S_IDLE: if (start) begin
          n_out_q      <= n_out;
          n_steps_q    <= n_steps;
          row_base_q   <= row_base;
          mode_q       <= act_mode;
          lora_en_q    <= lora_en;
          lora_shift_q <= lora_shift;
          out_idx      <= '0;
          step         <= '0;
          col          <= '0;
          pass         <= 1'b0;
          lin          <= '0;
          lin_base     <= '0;
          ovf          <= 1'b0;
          state        <= S_PRE;
        end
        S_PRE: begin
          col   <= '0;
          state <= S_CS;
        end
        S_CS: begin
          col <= col + 1'b1;
          if (last_col) begin
            lin <= lin + 18'd1;
            if (last_step) begin
              state <= S_SUM;
            end else begin
              step  <= step + 4'd1;
              state <= S_PRE;
            end
          end
        end
        S_SUM: begin
          ovf <= ovf | (|g_ovf);
          if (!pass) gacc <= OUT_W'(tree_sum);
          else       gacc <= (gacc <<< 4) + OUT_W'(tree_sum);
          if (mode_q == ACT_A8 && !pass) begin
            pass  <= 1'b1;
            step  <= '0;
            lin   <= lin_base;
            state <= S_PRE;
          end else begin
            state <= lora_en_q ? S_LORA : S_OUT;
          end
        end
        S_LORA: if (lora_valid) begin
          gacc  <= gacc + OUT_W'(lora_data >>> lora_shift_q);
          state <= S_OUT;
        end
        S_OUT: if (res_ready) begin
          if (last_out) begin
            state <= S_IDLE;
          end else begin
            out_idx  <= out_idx + 14'd1;
            step     <= '0;
            pass     <= 1'b0;
            lin_base <= lin;
            state    <= S_PRE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign lora_ready = (state == S_LORA);
  assign res_valid  = (state == S_OUT);
  assign res_data   = gacc;
  assign res_idx    = out_idx;
  assign busy       = (state != S_IDLE);

endmodule
