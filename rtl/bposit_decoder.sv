// bposit_decoder: combinational decoder of one bounded-Posit word
// bPosit(N, ES, R) into sign, scale factor and normalised significand.
//
// A bounded posit limits the regime run to R bits: a run of m < R equal bits
// is closed by an opposite terminating bit (regime width m+1), a run of R bits
// needs no terminator (regime width R). The regime value is m-1 for a run of
// ones and -m for a run of zeros, so it lies in [-R, R-1].
//
// Following the paper, the word is not negated before decoding. The regime
// bits are compared with the first regime bit and turned into a one-hot run
// length with NOT/AND terms; the one-hot word drives the EXP_SIG multiplexer
// that left-aligns the exponent and fraction, and a priority encoder returns
// the run length. Regime polarity and exponent bits are XORed with the sign.
// For a negative word this gives the scale of the magnitude directly, and
// the significand is (2 - f) instead of (1 + f): when f is zero that is 2.0,
// which the carry output (exp_cin in the paper's figure) folds into the scale.
// The 2 - f subtraction and the carry are this design's reading of the
// two's-complement handling; the result is the exact magnitude.
//
// Interface: p is the posit word. sign/zero/nar flag the sign, the zero word
// and NaR (1000...0). sf is the signed power of two and mant the significand
// 1.f with its leading one at bit FW (FW = N-3-ES); mant is 0 for zero/NaR.
// Purely combinational.
module bposit_decoder #(
  parameter int N  = 32,
  parameter int ES = 2,
  parameter int R  = 5,
  parameter int SFW = euler_pkg::SFW,
  localparam int FW = N - 3 - ES
) (
  input  logic [N-1:0]          p,
  output logic                  sign,
  output logic                  zero,
  output logic                  nar,
  output logic signed [SFW-1:0] sf,
  output logic [FW:0]           mant
);

  logic          s;
  logic [R-1:0]  t;         // regime window, t[R-1] is the first regime bit
  logic [R-1:0]  d;         // d[i]: bit i of the window differs from the first
  logic [R:1]    one_hot;   // one_hot[m]: run length is m
  int            run;
  logic [N-2:0]  body;      // exponent and fraction, left aligned
  logic [FW-1:0] f;
  logic signed [SFW-1:0] regime, scale;
  logic [ES:0]   e;         // one spare bit so ES = 0 needs no special case
  logic          chck;

  assign s    = p[N-1];
  assign t    = p[N-2 -: R];
  assign chck = ~|p[N-2:0];

  always_comb begin
    // Run-length one-hot from NOT/AND terms.
    d = '0;
    for (int i = 0; i < R - 1; i++) d[i] = t[R-1] ^ t[R-2-i];
    for (int m = 1; m <= R; m++) begin
      one_hot[m] = 1'b1;
      for (int i = 0; i < m - 1; i++) one_hot[m] &= ~d[i];
      if (m < R) one_hot[m] &= d[m-1];
    end
    // Priority encoder for the run length and the EXP_SIG multiplexer.
    run  = R;
    body = '0;
    for (int m = R; m >= 1; m--) begin
      if (one_hot[m]) begin
        run  = m;
        body = p[N-2:0] << ((m < R) ? m + 1 : R);
      end
    end
    // Regime polarity corrected by the sign.
    regime = (t[R-1] ^ s) ? SFW'(run - 1) : -SFW'(run);
    e = '0;
    for (int i = 0; i < ES; i++) e[i] = body[N-1-ES+i] ^ s;
    f = body[N-2-ES -: FW];
    scale = (regime <<< ES) + SFW'(e);
    sign = s;
    zero = chck & ~s;
    nar  = chck & s;
    if (chck) begin
      sf   = '0;
      mant = '0;
    end else if (!s) begin
      sf   = scale;
      mant = {1'b1, f};
    end else if (f == '0) begin
      sf   = scale + SFW'(1);          // exp_cin: 2 - 0 = 2.0
      mant = {1'b1, {FW{1'b0}}};
    end else begin
      sf   = scale;
      mant = (FW+1)'((2 << FW) - {1'b0, f});
    end
  end

endmodule
