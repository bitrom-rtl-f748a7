// aux_arith -- auxiliary arithmetic unit: requantization of macro results.
//
// The accelerator's auxiliary processor handles the non-linear and
// floating-point work of a Transformer layer: quantization, activation
// functions and softmax. This unit implements the quantization part: it
// turns a wide signed macro result into a 4-, 8- or 16-bit integer,
//   y = sat_mode( (x * scale + 2^(shift-1)) >>> shift ),
// i.e. multiply by an 8-bit unsigned scale, shift right with round-half-up,
// and saturate to the selected width (sat is set when that clipped). 4- and
// 8-bit results feed the next layer's activations, 16-bit results are KV
// elements. Activation functions and softmax are not built.
// Interface: one-entry pipeline with valid/ready on both sides; a result
// appears the cycle after the input is accepted, and the input is accepted
// whenever the output register is empty or being drained.
// From the paper: the unit's existence and its role (quantization, activation
// functions, softmax). This design's choices: the fixed-point formula,
// widths and handshake.
module aux_arith
  import bitrom_pkg::*;
#(
  parameter int unsigned IN_W = 24
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic signed [IN_W-1:0] in_data,
  input  logic [7:0]             scale,
  input  logic [4:0]             shift,
  input  qmode_t                 mode,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic signed [15:0]     out_data,
  output logic                   sat
);

  logic signed [IN_W+9:0] prod, rnd, shifted;
  logic signed [15:0]     q;
  logic                   clip;
  longint                 lo, hi;

  always_comb begin
    prod    = (IN_W+10)'(in_data) * $signed({2'b00, scale});
    rnd     = (shift == 0) ? '0 : (IN_W+10)'(1) <<< (shift - 5'd1);
    shifted = (prod + rnd) >>> shift;
    unique case (mode)
      Q_INT4:  begin lo = -8;     hi = 7;     end
      Q_INT8:  begin lo = -128;   hi = 127;   end
      default: begin lo = -32768; hi = 32767; end
    endcase
    clip = 1'b1;
    if (longint'(shifted) > hi)      q = 16'(hi);
    else if (longint'(shifted) < lo) q = 16'(lo);
    else begin
      q    = shifted[15:0];
      clip = 1'b0;
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      sat       <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= q;
        sat      <= clip;
      end
    end
  end

endmodule
