// posit_decoder -- splits a P(N,ES) posit into sign, scale and significand.
//
// A posit holds a sign bit, a regime run of m identical bits r closed by the
// opposite bit, ES exponent bits and the remaining fraction bits. The regime
// gives k = -m when r = 0 and k = m-1 when r = 1; the value is
// (-1)^s * 2^(k*2^ES + e) * 1.f. Negative words are two's-complemented first.
// 0...0 is zero and 10...0 is NaR (not a real).
//
// How it works: the magnitude's regime run is measured with a leading zero
// count of the bits xor-ed with r, then the word is shifted left past the run
// and its terminating bit; the top ES bits left are the exponent (zeros where a
// long regime pushed them out) and the rest is the fraction. This is the
// "leading zero count and dynamic shift" structure the paper names for its S1
// decoders; the exact circuit is this design's own.
//
// Interface: combinational. scale_o = k*2^ES + e (signed), mant_o = {1, f} with
// the hidden bit, or 0 for zero and NaR inputs. Any ES is accepted; with
// ES = 0 there is no exponent field and e is 0.
module posit_decoder
  import pdpu_pkg::*;
#(
  parameter int unsigned N  = DefNIn,
  parameter int unsigned ES = DefEsIn,
  parameter int unsigned MW = mant_w(N, ES),
  parameter int unsigned SW = scale_w(N, ES)
) (
  input  logic                 [N-1:0]  posit_i,
  output logic                          sign_o,
  output logic                          zero_o,
  output logic                          nar_o,
  output logic signed          [SW-1:0] scale_o,
  output logic                 [MW-1:0] mant_o
);
  localparam int unsigned RW = N - 1;          // bits after the sign
  localparam int unsigned FW = MW - 1;         // fraction bits
  localparam int unsigned CW = cnt_w(RW);
  localparam int unsigned EB = (ES == 0) ? 1 : ES;  // exponent field, at least 1 bit wide

  logic [N-1:0]  mag;
  logic [RW-1:0] body, runbits, shifted;
  logic          r;
  logic [CW-1:0] run;
  logic          run_zero;
  logic signed [SW-1:0] k;
  logic [EB-1:0] exp_bits;
  logic [FW-1:0] frac_bits;

  assign sign_o = posit_i[N-1];
  assign zero_o = (posit_i == '0);
  assign nar_o  = (posit_i == {1'b1, {(N-1){1'b0}}});

  assign mag     = sign_o ? (~posit_i + 1'b1) : posit_i;
  assign body    = mag[RW-1:0];
  assign r       = body[RW-1];
  assign runbits = r ? ~body : body;

  // m = number of leading bits equal to r
  lzc #(.W(RW), .CW(CW)) u_lzc (.data_i(runbits), .cnt_o(run), .zero_o(run_zero));

  always_comb begin
    k        = r ? SW'(signed'({1'b0, run}) - 1) : -SW'(signed'({1'b0, run}));
    // drop the run and its terminating bit
    shifted  = body << run;
    shifted  = shifted << 1;
    exp_bits = (ES == 0) ? '0 : shifted[RW-1 -: EB];
    frac_bits = shifted[RW-1-ES -: FW];
  end

  assign scale_o = (k <<< ES) + SW'(exp_bits);
  assign mant_o  = (zero_o || nar_o) ? '0 : {1'b1, frac_bits};

  // run_zero only occurs for the body 0..0 / 1..1 corner handled by zero/NaR
  // and by the saturated run count; it needs no further use here.
  logic unused_run_zero;
  assign unused_run_zero = run_zero;
endmodule
