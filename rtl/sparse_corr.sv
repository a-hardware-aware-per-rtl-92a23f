// sparse_corr: sparse correction unit for OPQ outliers and Wr residuals.
//
// Both corrections are lists of single weights, (k, m, v), whose
// contribution v * X[t,k] must be added to output column m for every
// token row t of the tile. OPQ entries carry the exact weight as BF16;
// Wr entries carry a quantised residual as E3M4 (bias 3, subnormals at
// exponent field 0). The unit walks the list in lock-step with the
// K traversal of the matrix unit: when the operand beat on the bus is
// step k, every entry with that k is applied using the same activation
// column X[:,k] = s_X[:,b] * Q_X[:,k] that the array consumes.
//
// Protocol: entries arrive in non-decreasing k order through a
// valid/ready port and n_entries (sampled at start) says how many belong
// to the tile. One entry is applied per cycle. The head entry sits in a
// register; the port's current word is the look-ahead. While the head
// matches the beat's k and another entry for the same k follows (or the
// look-ahead is not yet known), hold is raised and the beat waits on the
// bus, so a column with several entries costs one extra cycle each. An
// entry whose k has already passed is dropped and sets order_err.
//
// Output: one cycle after an entry fires, sp_en is high with the column
// index in sp_col and, per row, the product in Y's fixed-point format
// (YFRAC fraction bits, rounded toward minus infinity, saturated to YW
// bits). The entry layout and the stall-based schedule are this design's
// choices; the paper states only that the stream is applied lock-step
// with the matrix unit's issue traversal.
module sparse_corr
  import sop_pkg::*;
#(
  parameter int unsigned T_R   = 128,
  parameter int unsigned YW    = 64,
  parameter int          YFRAC = 24
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [15:0]          n_entries,
  // entry stream
  input  logic                 in_valid,
  output logic                 in_ready,
  input  sparse_entry_t        in_entry,
  // operand beat on the bus
  input  logic                 beat_valid,
  input  logic [15:0]          k_cur,
  input  hif_t                 act [T_R],
  input  scale_lane_t          xs  [T_R],
  output logic                 hold,
  // contribution to the array
  output logic                 sp_en,
  output logic [7:0]           sp_col,
  output logic signed [YW-1:0] sp_val [T_R],
  output logic                 order_err,
  output logic                 sat_err
);

  sparse_entry_t h;
  logic          h_valid;
  logic [15:0]   remaining;
  logic          more, match, late, fire;

  assign more     = (remaining != 16'd0);
  assign match    = h_valid && beat_valid && (h.k == k_cur);
  assign late     = h_valid && beat_valid && (h.k <  k_cur);
  assign fire     = match || late;
  assign in_ready = more && (!h_valid || fire);
  // hold the beat while an entry for this k may still follow
  assign hold = beat_valid && (
                  (match && more && (!in_valid || in_entry.k == k_cur)) ||
                  (late) ||
                  (!h_valid && more));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_valid   <= 1'b0;
      h         <= '0;
      remaining <= '0;
      order_err <= 1'b0;
    end else if (start) begin
      h_valid   <= 1'b0;
      remaining <= n_entries;
      order_err <= 1'b0;
    end else begin
      if (late) order_err <= 1'b1;
      if (in_valid && in_ready) begin
        h         <= in_entry;
        h_valid   <= 1'b1;
        remaining <= remaining - 16'd1;
      end else if (fire) begin
        h_valid   <= 1'b0;
      end
    end
  end

  // ---- value decode ----
  logic                      v_sign;
  logic [7:0]                v_sig;   // 1.7 significand
  logic signed [EXP_BITS-1:0] v_exp;  // exponent of one significand LSB

  always_comb begin
    if (!h.is_wr) begin                      // BF16: s eeeeeeee mmmmmmm
      v_sign = h.value[15];
      v_sig  = {(h.value[14:7] != 8'd0), h.value[6:0]};
      v_exp  = (h.value[14:7] != 8'd0) ? EXP_BITS'(int'(h.value[14:7]) - 127 - 7)
                                       : EXP_BITS'(-126 - 7);
    end else begin                           // E3M4: s eee mmmm
      v_sign = h.value[7];
      v_sig  = {(h.value[6:4] != 3'd0), h.value[3:0], 3'b000};
      v_exp  = (h.value[6:4] != 3'd0) ? EXP_BITS'(int'(h.value[6:4]) - 3 - 7)
                                      : EXP_BITS'(1 - 3 - 7);
    end
  end

  // ---- per-row product v * X[t,k] ----
  localparam int unsigned PW = 5 + SIG_BITS + 8 + 1;
  localparam int unsigned WW = YW + PW;
  logic signed [YW-1:0] prod_y [T_R];
  logic [T_R-1:0]       prod_sat;
  localparam logic signed [WW-1:0] WMAX = WW'({1'b0, {(YW-1){1'b1}}});
  localparam logic signed [WW-1:0] WMIN = -WMAX - 1;

  for (genvar t = 0; t < T_R; t++) begin : g_row
    always_comb begin
      logic signed [PW-1:0]       mag, val;
      logic signed [EXP_BITS+1:0] s;
      logic signed [WW-1:0]       wide;
      mag = PW'(act[t].coef) * signed'(PW'({1'b0, xs[t].sig})) * signed'(PW'({1'b0, v_sig}));
      val = (v_sign ^ xs[t].sign) ? -mag : mag;
      s   = (EXP_BITS+2)'(xs[t].exp) + (EXP_BITS+2)'(v_exp)
          + (EXP_BITS+2)'(act[t].sa) + (EXP_BITS+2)'(YFRAC);
      prod_sat[t] = 1'b0;
      if (s > signed'((EXP_BITS+2)'(YW))) begin
        wide = (val < 0) ? WMIN - 1 : (val > 0) ? WMAX + 1 : '0;
      end else if (s >= 0) begin
        wide = WW'(val) <<< s;
      end else if (-s >= signed'((EXP_BITS+2)'(PW))) begin
        wide = (val < 0) ? '1 : '0;
      end else begin
        wide = WW'(val) >>> (-s);
      end
      if (wide > WMAX) begin
        prod_sat[t] = 1'b1;
        wide = WMAX;
      end else if (wide < WMIN) begin
        prod_sat[t] = 1'b1;
        wide = WMIN;
      end
      prod_y[t] = wide[YW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_en   <= 1'b0;
      sp_col  <= '0;
      sat_err <= 1'b0;
      for (int t = 0; t < T_R; t++) sp_val[t] <= '0;
    end else begin
      sp_en <= match;
      if (start) sat_err <= 1'b0;
      else if (match && (prod_sat != '0)) sat_err <= 1'b1;
      if (match) begin
        sp_col <= h.col;
        for (int t = 0; t < T_R; t++) sp_val[t] <= prod_y[t];
      end
    end
  end

  // entries must arrive in K order
  a_order: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_ready && h_valid) |-> (in_entry.k >= h.k));

endmodule
