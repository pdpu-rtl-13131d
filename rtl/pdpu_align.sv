// pdpu_align -- S3 alignment of one operand to the largest exponent.
//
// The significand mant_i (fixed point with 2 integer bits, value in [0,4)) is
// shifted right by shift_i = e_max - e_i. Only the top WM bits of the shifted
// value are kept: W_m, the aligned-mantissa width, is the knob the paper
// offers in place of a full quire. Bits shifted below those WM bits are simply
// dropped (no sticky bit; this truncation is this design's choice). The kept
// magnitude is then turned into two's complement according to sign_i, giving a
// WM+1 bit signed value with 2 integer bits and WM-2 fraction bits.
// Combinational.
module pdpu_align #(
  parameter int unsigned IN_W = 18,
  parameter int unsigned WM   = 14,
  parameter int unsigned SW   = 11
) (
  input  logic [IN_W-1:0]        mant_i,
  input  logic                   sign_i,
  input  logic [SW-1:0]          shift_i,
  output logic signed [WM:0]     aligned_o
);
  localparam int unsigned XW = IN_W + WM;

  logic [XW-1:0] ext, shifted;
  logic [WM-1:0] mag;

  assign ext       = {mant_i, {WM{1'b0}}};
  assign shifted   = ext >> shift_i;
  assign mag       = shifted[XW-1 -: WM];
  assign aligned_o = sign_i ? -signed'({1'b0, mag}) : signed'({1'b0, mag});
endmodule
