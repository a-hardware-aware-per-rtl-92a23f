// sop_pe: one output position (t, m) of the SOP matrix unit.
//
// Inner loop: every accepted operand beat adds the HIF shifted product of
// the lane's weight and the row's activation to the block accumulator,
//     iacc += (wtc5 * atc5) << (wsa + asa),
// with no scale involved. On the block's last beat (r = g-1) the finished
// sum moves to a hold register and the accumulator restarts at zero, so
// the next K-block streams in without a bubble.
//
// Block boundary: one cycle later (apply = 1) the held sum is multiplied
// by this position's element of the rank-1 scale tile, s_X[t,b] * s_W[m,b]
// (signs XORed, significands multiplied, exponents added), and added into
// the output accumulator Y. Y is a YW-bit two's complement fixed-point
// number; the scale lanes fold the output fraction width into their
// exponents, so the product is shifted by exp_row + exp_col, rounding
// toward minus infinity when the shift is to the right. A sparse
// correction term (sp_en, sp_val) can be added in the same cycle.
// Additions that leave the YW-bit range saturate and set the sticky ovf
// flag. clr zeroes the position at the start of a tile.
//
// The fixed-point output accumulator, its saturation and the one-cycle
// apply stage are this design's choices; the inner MAC and the rank-1
// scale-and-accumulate follow the SOP micro-kernel.
module sop_pe
  import sop_pkg::*;
#(
  parameter int unsigned G       = 16,  // block size g
  parameter int unsigned YW      = 64,  // output accumulator width
  parameter bit          EXT_ASA = 1'b0 // activation shifts 5..7 enabled
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              step,   // operand beat accepted
  input  logic              last,   // ... last beat of its K-block
  input  hif_t              w,
  input  hif_t              a,
  input  logic              apply,  // scale-and-accumulate the held block
  input  scale_lane_t       rs,     // row (activation) scale of that block
  input  scale_lane_t       cs,     // column (weight) scale of that block
  input  logic              sp_en,
  input  logic signed [YW-1:0] sp_val,
  output logic signed [YW-1:0] y,
  output logic              ovf
);

  localparam int unsigned SHMAX = EXT_ASA ? 10 : 7;        // wsa + asa
  localparam int unsigned PRW   = 10 + SHMAX;              // shifted product
  localparam int unsigned TW    = PRW + $clog2(G);         // block accumulator
  localparam int unsigned PW    = TW + 2*SIG_BITS + 1;     // scaled block sum
  localparam int unsigned WW    = YW + PW;

  logic signed [9:0]      prod;
  logic [3:0]             sh;
  logic signed [PRW-1:0]  p;
  logic signed [TW-1:0]   iacc, hold, iacc_nx;

  assign prod    = a.coef * w.coef;
  assign sh      = 4'(w.sa) + 4'(a.sa);
  assign p       = PRW'(prod) <<< sh;
  assign iacc_nx = iacc + TW'(p);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iacc <= '0;
      hold <= '0;
    end else if (clr) begin
      iacc <= '0;
      hold <= '0;
    end else if (step) begin
      if (last) begin
        hold <= iacc_nx;
        iacc <= '0;
      end else begin
        iacc <= iacc_nx;
      end
    end
  end

  // ---- rank-1 scale-and-accumulate ----
  logic [2*SIG_BITS-1:0]      sprod;
  logic signed [PW-1:0]       scaled;
  logic signed [EXP_BITS:0]   sexp;
  logic signed [WW-1:0]       wide;
  logic                       sh_ovf;

  assign sprod = rs.sig * cs.sig;
  assign sexp  = (EXP_BITS+1)'(rs.exp) + (EXP_BITS+1)'(cs.exp);

  always_comb begin
    logic signed [PW-1:0] mag;
    mag    = PW'(hold) * signed'({1'b0, sprod});
    scaled = (rs.sign ^ cs.sign) ? -mag : mag;
    sh_ovf = 1'b0;
    if (sexp >= 0) begin
      if (sexp > (EXP_BITS+1)'(YW)) begin
        wide   = '0;
        sh_ovf = (scaled != 0);
        if (scaled < 0) wide[WW-1] = 1'b1;   // most negative
        else if (scaled > 0) wide = {1'b0, {(WW-1){1'b1}}};
      end else begin
        wide = WW'(scaled) <<< sexp;
      end
    end else if (-sexp >= (EXP_BITS+1)'(PW)) begin
      wide = (scaled < 0) ? '1 : '0;
    end else begin
      wide = WW'(scaled) >>> (-sexp);
    end
  end

  // ---- output accumulator with saturation ----
  localparam logic signed [WW+1:0] YMAX = (WW+2)'({1'b0, {(YW-1){1'b1}}});
  localparam logic signed [WW+1:0] YMIN = -YMAX - 1;
  logic signed [WW+1:0] ysum;

  assign ysum = (WW+2)'(y)
              + (apply ? (WW+2)'(wide) : '0)
              + (sp_en ? (WW+2)'(sp_val) : '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y   <= '0;
      ovf <= 1'b0;
    end else if (clr) begin
      y   <= '0;
      ovf <= 1'b0;
    end else if (apply || sp_en) begin
      if (ysum > YMAX) begin
        y   <= YMAX[YW-1:0];
        ovf <= 1'b1;
      end else if (ysum < YMIN) begin
        y   <= YMIN[YW-1:0];
        ovf <= 1'b1;
      end else begin
        y   <= ysum[YW-1:0];
        ovf <= ovf | (apply & sh_ovf);
      end
    end
  end

endmodule
