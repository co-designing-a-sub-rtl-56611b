// requant: dyadic requantization of a convolution accumulator to int8.
//
// Integer-only inference replaces the real rescale Sw*Sx/Sy by an integer
// multiplier S and a right shift n, so that q = (acc * S) / 2^n. This unit
// computes the product at full width, adds 2^(n-1) to round to nearest,
// shifts arithmetically and saturates to the int8 range. With relu set,
// negative results become 0. The multiply-and-shift form is the paper's;
// rounding, saturation, the ReLU option and the field widths are choices of
// this implementation.
//
// Purely combinational: result valid in the same cycle as the inputs.
module requant #(
  parameter int unsigned AW = 32,   // accumulator width
  parameter int unsigned SW = 16,   // scale width (unsigned)
  parameter int unsigned NW = 5     // shift width
) (
  input  logic signed [AW-1:0] acc,
  input  logic        [SW-1:0] scale,
  input  logic        [NW-1:0] shift,
  input  logic                 relu,
  output logic signed [7:0]    q
);
  localparam int unsigned PW = AW + SW + 1;

  logic signed [PW-1:0] prod, rnd, shifted;

  always_comb begin
    prod = PW'(acc) * $signed({1'b0, scale});
    rnd  = (shift == '0) ? '0 : (PW'(1) <<< (shift - NW'(1)));
    shifted = (prod + rnd) >>> shift;
    if (relu && shifted < 0)       q = 8'sd0;
    else if (shifted > 127)        q = 8'sd127;
    else if (shifted < -128)       q = -8'sd128;
    else                           q = shifted[7:0];
  end
endmodule
