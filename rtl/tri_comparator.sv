// tri_comparator -- behavioural model of the TriMLA comparator pair.
//
// Two voltage comparators, with 1/8 VDD and 3/8 VDD references, sense the
// bitline of one 8-column group and produce the two mode bits of the
// Tri-Mode Local Accumulator: MSB (weight is non-zero, drives the
// accumulator enable) and LSB (add when 1, subtract when 0). The analog
// comparators are replaced by the readout truth table itself:
//   1/2 VDD (digit '0')  -> MSB/LSB = 0/0  skip
//   1/4 VDD (digit '+1') -> 1/1            add
//   VSS     (digit '-1') -> 1/0            subtract
// A floating (still precharged) bitline reads as 0/0. Outputs are
// combinational and gated by comp_en, the sampling strobe; with comp_en low
// both bits are 0, so a disabled comparator can never start an accumulation.
// The table is the paper's; the gating and the floating-line case are this
// design's choices.
module tri_comparator
  import bitrom_pkg::*;
(
  input  bl_level_t bl,
  input  logic      comp_en,
  output logic      msb,
  output logic      lsb
);

  always_comb begin
    unique case (bl)
      BL_QUARTER: {msb, lsb} = 2'b11;
      BL_VSS:     {msb, lsb} = 2'b10;
      default:    {msb, lsb} = 2'b00;
    endcase
    if (!comp_en) {msb, lsb} = 2'b00;
  end

endmodule
