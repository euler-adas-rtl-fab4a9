// bposit_encoder: rounds a normalised magnitude and packs it into a bounded
// posit word bPosit(N, ES, R) (pipeline stages 5 and 6, rounding and output
// encoding).
//
// The scale factor sf splits into the regime r = floor(sf / 2^ES) and the
// exponent e = sf mod 2^ES. Because the regime is bounded, there are only 2R
// possible regime strings; the string for r is built directly (a run of r+1
// ones or -r zeros, closed by a terminator unless the run reaches R bits),
// and exponent and fraction are placed behind it by a shift of R minus the
// regime width: the paper's parallel candidate fields selected by a small
// multiplexer. The N-1 bits after the sign are rounded to nearest, ties to
// even, using the guard bit and a sticky OR of everything below. The paper
// specifies round-to-nearest-even with guard, round and sticky bits; the
// saturation rules below follow the Posit standard and are this design's
// reading of the paper's "Posit-2022 handling": magnitudes above maxpos give
// maxpos, non-zero magnitudes below minpos give minpos, so a non-zero value
// never rounds to zero or NaR. A negative result is the two's complement of
// the rounded word.
//
// Interface: sign, zero, nar flags; sf signed scale; mant the magnitude with
// its leading one at bit MW-1 (ignored when zero or nar). p is the posit
// word. Combinational.
module bposit_encoder #(
  parameter int N   = 32,
  parameter int ES  = 2,
  parameter int R   = 5,
  parameter int MW  = 128,
  parameter int SFW = euler_pkg::SFW,
  localparam int L  = R + ES + MW - 1
) (
  input  logic                  sign,
  input  logic                  zero,
  input  logic                  nar,
  input  logic signed [SFW-1:0] sf,
  input  logic [MW-1:0]         mant,
  output logic [N-1:0]          p
);

  logic signed [SFW-1:0] r;
  logic [ES:0]     e;          // one spare bit so ES = 0 needs no special case
  logic [R-1:0]    reg_field;
  int              reg_w, run;
  logic [L-1:0]    tail, full;
  logic [N-2:0]    pat, mag;
  logic            guard, sticky, up;

  always_comb begin
    r = sf >>> ES;
    e = '0;
    for (int i = 0; i < ES; i++) e[i] = sf[i];

    // Regime string, left aligned in an R-bit field.
    if (r >= 0) begin
      run       = int'(r) + 1;
      reg_field = ~((R'(1) << (R - ((run < R) ? run : R))) - R'(1));
    end else begin
      run       = -int'(r);
      reg_field = (run < R) ? (R'(1) << (R - 1 - run)) : '0;
    end
    reg_w = (run < R) ? run + 1 : R;

    // Regime, exponent and fraction as one string, then round to N-1 bits.
    tail = L'(mant[MW-2:0]);
    for (int i = 0; i < ES; i++) tail[MW-1+i] = e[i];
    full = {reg_field, {(L-R){1'b0}}} | (tail << (R - reg_w));
    pat    = full[L-1 -: N-1];
    guard  = full[L-N];
    sticky = |full[L-N-1:0];
    up     = guard & (sticky | pat[0]);
    mag    = (&pat) ? pat : pat + (N-1)'(up);
    if (mag == '0) mag = (N-1)'(1);

    // Clamp to the bounded dynamic range.
    if (r > SFW'(R - 1))    mag = '1;
    else if (r < -SFW'(R))  mag = (N-1)'(1);

    if (nar)       p = {1'b1, {(N-1){1'b0}}};
    else if (zero) p = '0;
    else           p = sign ? -{1'b0, mag} : {1'b0, mag};
  end

endmodule
