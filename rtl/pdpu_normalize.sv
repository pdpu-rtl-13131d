// pdpu_normalize -- S5: leading-zero normalisation and exponent adjustment.
//
// mag_i is the accumulated magnitude s_m, a fixed-point number with FRAC
// fraction bits and scale emax_i. A leading zero count L moves its leading one
// to the MSB; the final exponent is
//   f_e = e_max + (W - 1 - FRAC) - L
// and f_m (frac_o) holds the W-1 bits below the leading one. zero_o flags
// s_m = 0, in which case exp_o and frac_o carry no meaning. Combinational.
module pdpu_normalize
  import pdpu_pkg::*;
#(
  parameter int unsigned W    = 18,
  parameter int unsigned FRAC = 12,
  parameter int unsigned EW   = 10
) (
  input  logic [W-1:0]          mag_i,
  input  logic signed [EW-1:0]  emax_i,
  output logic                  zero_o,
  output logic signed [EW-1:0]  exp_o,
  output logic [W-2:0]          frac_o
);
  localparam int unsigned CW = cnt_w(W);

  logic [CW-1:0] lz;
  logic [W-1:0]  norm;

  lzc #(.W(W), .CW(CW)) u_lzc (.data_i(mag_i), .cnt_o(lz), .zero_o(zero_o));

  assign norm   = mag_i << lz;
  assign frac_o = norm[W-2:0];
  assign exp_o  = emax_i + EW'(W - 1 - FRAC) - EW'(lz);
endmodule
