// scale_lane: one row (activation) or column (weight) scale lane of the
// SOP matrix unit.
//
// Per-block scales are loaded once per K-block, with the first operand
// beat of the block. The lane decodes the scale word (scale_decode), then
// removes the per-layer F_layer shift k* (the scale was multiplied by 2^k*
// before quantisation, so the stored exponent is reduced by k*) and folds
// in a constant exponent offset EXP_OFS, giving the binary exponent of
// one significand LSB. An EXP_OFS of -MAX_MAN makes the output the plain
// scale value; the weight lanes also add the output fraction width.
//
// Timing: on a beat with first = 1 the decoded word is visible
// combinationally on cur (so the weight LUT can use the block's metabit in
// the same cycle) and is captured in a register that serves the rest of
// the block. On a beat with last = 1 the current value is copied to
// retire, which holds it for the scale-and-accumulate step of the block
// that just ended while the next block starts.
module scale_lane
  import sop_pkg::*;
#(
  parameter int EXP_OFS = -int'(MAX_MAN)
)(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [SCALE_BITS-1:0]  word,
  input  scale_fmt_t             fmt,
  input  logic signed [7:0]      k_shift,  // per-layer F_layer shift k*
  input  logic                   beat,     // an operand beat is accepted
  input  logic                   first,    // ... and it is the block's first
  input  logic                   last,     // ... and it is the block's last
  output scale_lane_t            cur,      // scale of the block being issued
  output logic                   cur_meta, // its codebook-select metabit
  output scale_lane_t            retire,   // scale of the block being applied
  output logic                   fmt_err
);

  scale_val_t  dec;
  scale_lane_t dec_l, cur_q;
  logic        meta_q;

  scale_decode u_dec (.word(word), .fmt(fmt), .val(dec), .fmt_err(fmt_err));

  always_comb begin
    dec_l.sign = dec.sign;
    dec_l.sig  = dec.sig;
    dec_l.exp  = EXP_BITS'(dec.exp - EXP_BITS'(k_shift) + EXP_BITS'(EXP_OFS));
  end

  assign cur      = first ? dec_l : cur_q;
  assign cur_meta = first ? dec.meta[0] : meta_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_q  <= '0;
      meta_q <= 1'b0;
      retire <= '0;
    end else if (beat) begin
      if (first) begin
        cur_q  <= dec_l;
        meta_q <= dec.meta[0];
      end
      if (last) retire <= cur;
    end
  end

endmodule
