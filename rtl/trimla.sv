// trimla -- Tri-Mode Local Accumulator.
//
// One TriMLA serves one 8-column group of the ROM array. Each clock it takes
// the comparator bits of the weight on its bitline and a 4-bit input
// activation IA, and updates an 8-bit accumulator in one of three modes:
//   en (= MSB) low           : hold        (zero weight, skipped)
//   en high, add_n_sub high  : acc += IA    (weight +1)
//   en high, add_n_sub low   : acc -= IA    (weight -1)
// clr loads the accumulator with the result of this cycle's operation on
// zero, so a new channel can start without a dead cycle. ia_signed selects
// whether IA is a two's-complement nibble (4-bit activations and the high
// nibble of 8-bit ones) or an unsigned nibble (low nibble of 8-bit ones).
// The accumulator wraps at 8 bits; the paper reports that 8 bits do not
// overflow for its models. ovf is a sticky flag, cleared by clr, that says
// the wrap did happen, so a user can see when that assumption fails.
// Timing: acc is registered, valid the cycle after the last operation.
// From the paper: the three modes, MSB as enable, LSB as add/subtract,
// 4-bit IA, 8-bit output. This design's choices: clr, ia_signed, ovf.
module trimla #(
  parameter int unsigned IA_W  = 4,
  parameter int unsigned ACC_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    en,
  input  logic                    add_n_sub,
  input  logic                    ia_signed,
  input  logic [IA_W-1:0]         ia,
  output logic signed [ACC_W-1:0] acc,
  output logic                    ovf
);

  logic signed [IA_W:0]    operand;
  logic signed [ACC_W-1:0] base;
  logic signed [ACC_W:0]   wide;

  always_comb begin
    operand = ia_signed ? {ia[IA_W-1], ia} : {1'b0, ia};
    base    = clr ? '0 : acc;
    if (!en)            wide = {base[ACC_W-1], base};
    else if (add_n_sub) wide = {base[ACC_W-1], base} + (ACC_W+1)'(operand);
    else                wide = {base[ACC_W-1], base} - (ACC_W+1)'(operand);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      ovf <= 1'b0;
    end else begin
      acc <= wide[ACC_W-1:0];
      ovf <= (clr ? 1'b0 : ovf) | (wide[ACC_W] != wide[ACC_W-1]);
    end
  end

endmodule
