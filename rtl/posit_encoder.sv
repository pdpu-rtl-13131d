// posit_encoder -- S6: rounds and packs sign, exponent and fraction into P(N,ES).
//
// The value (-1)^sign * 2^exp_i * 1.frac_i is written as a posit: k = exp_i >>
// ES (floor) sets the regime, the low ES bits of exp_i are the exponent field
// and frac_i follows. The regime is built by an arithmetic right shift of
// {1,0,exp,frac} by k for k >= 0 (k+1 ones, then a zero) or of {0,1,exp,frac}
// by -k-1 for k < 0 (-k zeros, then a one). The top N-1 bits are kept and the
// word is rounded to nearest, ties to even, on the guard bit and the OR of all
// lower bits. Magnitudes above maxpos give maxpos and below minpos give minpos,
// so a nonzero value never rounds to zero or NaR. A negative result is the
// two's complement of the magnitude word; zero_i gives 0 and nar_i 10...0.
// The paper says only that the encoder rounds and packs; rounding to nearest
// even with saturation is the posit standard's rule and this design's choice.
// Any ES is accepted; with ES = 0 the exponent field is empty.
// Combinational.
module posit_encoder
  import pdpu_pkg::*;
#(
  parameter int unsigned N  = DefNOut,
  parameter int unsigned ES = DefEsOut,
  parameter int unsigned EW = 10,
  parameter int unsigned FW = 17
) (
  input  logic                 sign_i,
  input  logic                 zero_i,
  input  logic                 nar_i,
  input  logic signed [EW-1:0] exp_i,
  input  logic [FW-1:0]        frac_i,
  output logic [N-1:0]         posit_o
);
  localparam int unsigned BW = ES + FW;        // exponent field + fraction
  localparam int unsigned XW = 2 + BW + N;     // room for the longest regime
  localparam int signed   KMAX = N - 2;
  localparam int unsigned EB = (ES == 0) ? 1 : ES;  // exponent slice, at least 1 bit wide

  logic signed [EW-1:0] k;
  logic signed [XW-1:0] x, xs;
  logic [N-2:0]         bits, rounded;
  logic                 guard, sticky, round_up;
  logic [N-1:0]         mag;
  logic [BW-1:0]        ef;                    // exponent field and fraction

  assign k = exp_i >>> ES;
  // with ES = 0 the cast drops the one-bit exponent slice again
  assign ef = BW'({exp_i[EB-1:0], frac_i});

  always_comb begin
    if (k >= 0) begin
      x  = signed'({2'b10, ef, {N{1'b0}}});
      xs = x >>> k;
    end else begin
      x  = signed'({2'b01, ef, {N{1'b0}}});
      xs = x >>> (-k - 1);
    end
    bits     = xs[XW-1 -: N-1];
    guard    = xs[XW-N];
    sticky   = |xs[XW-N-1:0];
    round_up = guard & (bits[0] | sticky);
    rounded  = bits + (N-1)'(round_up);
    if (int'(k) > KMAX)  mag = {1'b0, {(N-1){1'b1}}};             // maxpos
    else if (int'(k) < -KMAX) mag = {{(N-1){1'b0}}, 1'b1};             // minpos
    else                mag = {1'b0, rounded};
    if (nar_i)          posit_o = {1'b1, {(N-1){1'b0}}};
    else if (zero_i)    posit_o = '0;
    else                posit_o = sign_i ? (~mag + 1'b1) : mag;
  end
endmodule
