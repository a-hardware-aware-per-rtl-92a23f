// sop_top: the Scaled Outer Product (SOP) matrix unit.
//
// It computes one T_R x M_R output tile of a block-scaled GEMM
// Y = X W^T, where activations and weights share one scale per block of
// G consecutive elements along K:
//   for each K-block b:   t  = sum_r Q_X[:,bG+r] (outer) Q_W[:,bG+r]
//                         Y += t o (s_X[:,b] (outer) s_W[:,b])
// plus sparse OPQ/Wr corrections. The inner products stay in the
// quantised domain (5x5-bit multiplies with shifts); scales are applied
// once per K-block as a rank-1 tile.
//
// Structure: T_R x M_R sop_pe cells; one lut_pair per weight lane
// (column) that turns the lane's n-bit code into a HIF7 weight, choosing
// FMTa or FMTb by the block's metabit; a scale_lane per row and per
// column; the sparse_corr unit; and the sop_ctrl sequencer. Activations
// arrive already in HIF8 ({shift[2:0], coef[4:0]}); without EXT_ASA a
// shift above 4 is clamped to 4 and flagged in act_err.
//
// Use: load both codebooks of every lane through the LUT port (bcast
// writes all lanes at once), set the per-layer configuration, pulse
// start, then offer operand beats: each beat carries one K column
// (qx: T_R HIF8 activations, qw: M_R weight codes); the beat that starts a
// K-block also carries the block's scale words sx/sw. Sparse entries for
// the tile stream in through sp_*. When done is high, Y rows are read
// through rd_row/rd_y; Y is two's complement fixed point with YFRAC
// fraction bits. Configuration must stay stable while busy.
//
// Defaults follow the paper: a 128 x 128 unit, block size 16, 12-bit
// scale words, 32-entry LUTs. The output accumulator width, Y format,
// port protocols and the sparse entry layout are this design's choices.
module sop_top
  import sop_pkg::*;
#(
  parameter int unsigned T_R     = 128,  // tokens per tile (rows)
  parameter int unsigned M_R     = 128,  // output features per tile (columns)
  parameter int unsigned G       = 16,   // block size g
  parameter int unsigned YW      = 64,   // output accumulator width
  parameter int          YFRAC   = 24,   // fraction bits of Y
  parameter bit          EXT_ASA = 1'b0  // allow activation shifts 5..7
)(
  input  logic                  clk,
  input  logic                  rst_n,
  // per-layer configuration
  input  scale_fmt_t            fmt_x,
  input  scale_fmt_t            fmt_w,
  input  logic [2:0]            n_bits,
  input  logic                  w_direct, // weights arrive as HIF7, LUTs bypassed
  input  logic signed [7:0]     k_x,      // F_layer shift of the activation scales
  input  logic signed [7:0]     k_w,      // F_layer shift of the weight scales
  input  logic [15:0]           n_kblk,   // K-blocks in the tile
  input  logic [15:0]           n_sparse, // sparse entries in the tile
  // control
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  // codebook load
  input  logic                  lut_wr_en,
  input  logic                  lut_wr_bcast,
  input  logic [7:0]            lut_wr_lane,
  input  logic                  lut_wr_sel,
  input  logic [CODE_BITS-1:0]  lut_wr_addr,
  input  logic [HIF_BITS-1:0]   lut_wr_data,
  // operand beats
  input  logic                  beat_valid,
  output logic                  beat_ready,
  input  logic [HIF_BITS-1:0]   qx [T_R],
  input  logic [HIF_BITS-1:0]   qw [M_R],
  input  logic [SCALE_BITS-1:0] sx [T_R],
  input  logic [SCALE_BITS-1:0] sw [M_R],
  // sparse correction entries
  input  logic                  sp_valid,
  output logic                  sp_ready,
  input  sparse_entry_t         sp_entry,
  // output readout
  input  logic [$clog2(T_R)-1:0] rd_row,
  output logic signed [YW-1:0]  rd_y [M_R],
  // status
  output logic                  ovf,
  output logic                  act_err,
  output logic                  fmt_err,
  output logic                  sp_order_err,
  output logic                  sp_sat_err,
  output logic [31:0]           cyc_count,
  output logic [31:0]           hold_count
);

  // ---------------- sequencer ----------------
  logic        step, first, last, apply, clr, hold, run;
  logic [15:0] k_cur;

  sop_ctrl #(.G(G)) u_ctrl (
    .clk, .rst_n, .start, .n_kblk, .beat_valid, .hold,
    .beat_ready, .step, .first, .last, .k_cur, .apply, .clr, .run,
    .busy, .done, .cyc_count, .hold_count
  );

  // ---------------- activation rows ----------------
  hif_t         act  [T_R];
  scale_lane_t  xs_cur [T_R], xs_ret [T_R];
  logic [T_R-1:0] x_fmt_err, x_range;
  logic [T_R-1:0] x_meta_unused;

  for (genvar t = 0; t < T_R; t++) begin : g_row
    always_comb begin
      act[t].coef = signed'(qx[t][4:0]);
      act[t].sa   = qx[t][7:5];
      x_range[t]  = 1'b0;
      if (!EXT_ASA && qx[t][7:5] > 3'd4) begin
        act[t].sa  = 3'd4;
        x_range[t] = 1'b1;
      end
    end

    scale_lane #(.EXP_OFS(-int'(MAX_MAN))) u_xs (
      .clk, .rst_n, .word(sx[t]), .fmt(fmt_x), .k_shift(k_x),
      .beat(step), .first, .last,
      .cur(xs_cur[t]), .cur_meta(x_meta_unused[t]), .retire(xs_ret[t]),
      .fmt_err(x_fmt_err[t])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   act_err <= 1'b0;
    else if (clr) act_err <= 1'b0;
    else if (step && (x_range != '0)) act_err <= 1'b1;
  end

  // ---------------- weight columns ----------------
  hif_t         wgt [M_R];
  scale_lane_t  ws_cur [M_R], ws_ret [M_R];
  logic [M_R-1:0] w_meta, w_fmt_err;

  for (genvar j = 0; j < M_R; j++) begin : g_col
    scale_lane #(.EXP_OFS(YFRAC - int'(MAX_MAN))) u_ws (
      .clk, .rst_n, .word(sw[j]), .fmt(fmt_w), .k_shift(k_w),
      .beat(step), .first, .last,
      .cur(ws_cur[j]), .cur_meta(w_meta[j]), .retire(ws_ret[j]),
      .fmt_err(w_fmt_err[j])
    );

    lut_pair u_lut (
      .clk,
      .wr_en(lut_wr_en && (lut_wr_bcast || lut_wr_lane == 8'(j))),
      .wr_sel(lut_wr_sel), .wr_addr(lut_wr_addr), .wr_data(lut_wr_data),
      .n_bits, .direct(w_direct), .code(qw[j]), .sel(w_meta[j]), .w_hif(wgt[j])
    );
  end

  assign fmt_err = (x_fmt_err != '0) || (w_fmt_err != '0);

  // ---------------- sparse corrections ----------------
  logic                 sp_en;
  logic [7:0]           sp_col;
  logic signed [YW-1:0] sp_val [T_R];

  sparse_corr #(.T_R(T_R), .YW(YW), .YFRAC(YFRAC)) u_sparse (
    .clk, .rst_n, .start(clr), .n_entries(n_sparse),
    .in_valid(sp_valid), .in_ready(sp_ready), .in_entry(sp_entry),
    .beat_valid(beat_valid && run), .k_cur,
    .act, .xs(xs_cur), .hold,
    .sp_en, .sp_col, .sp_val, .order_err(sp_order_err), .sat_err(sp_sat_err)
  );

  // ---------------- PE array ----------------
  logic signed [YW-1:0] y [T_R][M_R];
  logic [M_R-1:0]       pe_ovf [T_R];

  for (genvar t = 0; t < T_R; t++) begin : g_pr
    for (genvar j = 0; j < M_R; j++) begin : g_pc
      sop_pe #(.G(G), .YW(YW), .EXT_ASA(EXT_ASA)) u_pe (
        .clk, .rst_n, .clr, .step, .last,
        .w(wgt[j]), .a(act[t]),
        .apply, .rs(xs_ret[t]), .cs(ws_ret[j]),
        .sp_en(sp_en && (sp_col == 8'(j))), .sp_val(sp_val[t]),
        .y(y[t][j]), .ovf(pe_ovf[t][j])
      );
    end
  end

  always_comb begin
    ovf = 1'b0;
    for (int t = 0; t < T_R; t++) ovf |= |pe_ovf[t];
  end

  always_comb begin
    for (int j = 0; j < M_R; j++) rd_y[j] = y[rd_row][j];
  end

endmodule
