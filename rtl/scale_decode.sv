// scale_decode: unpacks one 12-bit per-block scale word.
//
// The word's format is SwExMy, chosen per layer at run time: w sign bits
// (0 or 1), x exponent bits, y mantissa bits and m = 12-w-x-y metabits.
// Bit placement follows the SOP convention: with w = 1 the sign is bit 11
// and all metabits sit at the LSB end (bits m-1..0); with w = 0 and m >= 1
// bit 11 is the first metabit and any others sit at bits m-2..0. The
// magnitude (exponent, then mantissa) fills the contiguous middle, so
// mantissa bits displaced by metabits are simply never read.
//
// meta[0] is the first metabit (the FMTa/FMTb codebook select): bit 11
// when unsigned, bit m-1 when signed. meta[1] is the next one, bit m-2.
// The exponent uses bias 2^(x-1)-1, an exponent field of 0 is subnormal
// (no hidden bit, exponent 1-bias) and no code is reserved for inf/NaN;
// these three points are this design's choices.
//
// Output: val.sig is the significand left-aligned to MAX_MAN fraction
// bits, so the scale equals (-1)^sign * sig * 2^(exp - MAX_MAN).
// fmt_err flags a format that does not fit the container.
// Purely combinational.
module scale_decode
  import sop_pkg::*;
(
  input  logic [SCALE_BITS-1:0] word,
  input  scale_fmt_t            fmt,
  output scale_val_t            val,
  output logic                  fmt_err
);

  always_comb begin
    int unsigned w, x, y, used, m, hi, bias;
    logic [SCALE_BITS-1:0] aligned, expf, manf;
    logic [SIG_BITS-1:0]   sig;
    logic                  hidden;

    w    = 32'(fmt.sign_en);
    x    = 32'(fmt.exp_bits);
    y    = 32'(fmt.man_bits);
    used = w + x + y;
    fmt_err = (x == 0) || (x > 8) || (y > MAX_MAN) || (used > SCALE_BITS);
    m    = fmt_err ? 0 : SCALE_BITS - used;
    if (x == 0) x = 1;
    if (y > MAX_MAN) y = MAX_MAN;

    // top bit of the magnitude field
    hi      = (w != 0 || m != 0) ? SCALE_BITS - 2 : SCALE_BITS - 1;
    aligned = word << (SCALE_BITS - 1 - hi);
    expf    = aligned >> (SCALE_BITS - x);
    manf    = (y == 0) ? '0 : (aligned << x) >> (SCALE_BITS - y);
    bias    = (1 << (x - 1)) - 1;

    hidden  = (expf != 0);
    sig     = SIG_BITS'(({{(SIG_BITS-1){1'b0}}, hidden} << y) | SIG_BITS'(manf)) << (MAX_MAN - y);

    val.sign = (w != 0) ? word[SCALE_BITS-1] : 1'b0;
    val.exp  = hidden ? EXP_BITS'(signed'(expf) - signed'(bias))
                      : EXP_BITS'(1 - signed'(bias));
    val.sig  = sig;
    val.meta[0] = (m == 0) ? 1'b0 : ((w != 0) ? word[m-1] : word[SCALE_BITS-1]);
    val.meta[1] = (m >= 2) ? word[m-2] : 1'b0;
  end

endmodule
