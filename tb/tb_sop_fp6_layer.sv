// tb_sop_fp6_layer: runs the FP6 weight deployment (E2M3 weights with
// UE4M4 block scales, g = 16) through the SOP matrix unit over the long K
// of real transformer layers.
//
// Weights are drawn as random E2M3 values (sign, 2-bit exponent with bias
// 1, 3-bit mantissa, subnormal at exponent 0). Each is presented to the
// unit in direct mode as the HIF7 byte of 8 x its value: subnormals become
// coefficient m with shift 0, normals coefficient 8+m with shift e-1. The
// factor 8 is removed again by the weight-side per-layer exponent shift
// (k_w = 3). Both operands use 8-bit UE4M4 scales (bias 7, subnormal at
// exponent 0) padded into the 12-bit word as {u, eeee, mmmm, uuu}. The
// metabits are random and must not matter in direct mode.
//
// The reference works from the E2M3 and UE4M4 fields alone: it sums
// value8 * coef * 2^shift per block, multiplies by both scale
// significands and rounds toward minus infinity into Y's fixed point,
// block by block. Two tiles are run, with K = 4096 and K = 14336 (the
// hidden and FFN widths of 7B/8B-class models). Each checks every Y
// element, the stall-free cycle count n_kblk*G + 1 and that no flag is
// raised. The test also counts direct-mode tiles, subnormal weights,
// subnormal scales and set metabits, and fails if any of these never
// occurred. The tile is 4 x 4 to keep the run short; the block size is
// the default 16.
module tb_sop_fp6_layer;
  import sop_pkg::*;
  import sop_ref_pkg::*;

  localparam int T_R = 4, M_R = 4, G = 16, YW = 64, YFRAC = 24;
  `include "sop_top_tb_body.svh"

  sop_top #(.T_R(T_R), .M_R(M_R), .G(G), .YW(YW), .YFRAC(YFRAC)) dut (.*);

  int n_tiles = 0, n_wsub = 0, n_ssub = 0, n_setmeta = 0;

  // UE4M4 scale in a 12-bit word: {u, eeee, mmmm, uuu}
  function automatic logic [11:0] enc_ue4m4(input int e, input int m, input int u);
    return {1'(u), 4'(e), 4'(m), 3'(u * 5)};
  endfunction
  function automatic int ue4m4_sig(input int e, input int m);
    return (e == 0) ? m : (16 + m);
  endfunction
  function automatic int ue4m4_lsb_exp(input int e);
    return ((e == 0) ? 1 : e) - 7 - 4;
  endfunction

  task automatic run_fp6(input int nb);
    int sx_e [T_R], sx_m [T_R], sw_e [M_R], sw_m [M_R];
    big_t tacc [T_R][M_R];
    int ax_c [T_R], ax_sh [T_R];
    int w8 [M_R];
    logic [HIF_BITS-1:0] qx_k [][T_R];
    logic [HIF_BITS-1:0] qw_k [][M_R];
    logic [11:0] sx_k [][T_R];
    logic [11:0] sw_k [][M_R];

    fmt_x = FMT_UE4M4; fmt_w = FMT_UE4M4;
    w_direct = 1'b1; n_bits = 3'd5; k_x = 8'sd0; k_w = 8'sd3; n_kblk = 16'(nb); n_sparse = '0;
    qx_k = new[nb * G]; qw_k = new[nb * G]; sx_k = new[nb * G]; sw_k = new[nb * G];
    for (int t = 0; t < T_R; t++) for (int j = 0; j < M_R; j++) y_ref[t][j] = 0;

    for (int b = 0; b < nb; b++) begin
      for (int t = 0; t < T_R; t++) begin
        sx_e[t] = $urandom_range(0, 9); sx_m[t] = $urandom_range(15);
        if (sx_e[t] == 0) n_ssub++;
      end
      for (int j = 0; j < M_R; j++) begin
        sw_e[j] = $urandom_range(0, 9); sw_m[j] = $urandom_range(15);
        if (sw_e[j] == 0) n_ssub++;
      end
      for (int t = 0; t < T_R; t++) for (int j = 0; j < M_R; j++) tacc[t][j] = 0;
      for (int r = 0; r < G; r++) begin
        int kk = b * G + r;
        for (int t = 0; t < T_R; t++) begin
          int u;
          ax_c[t] = int'($urandom_range(31)) - 16; ax_sh[t] = $urandom_range(4);
          qx_k[kk][t] = {3'(ax_sh[t]), 5'(ax_c[t])};
          u = $urandom_range(1);
          if (u != 0) n_setmeta++;
          sx_k[kk][t] = (r == 0) ? enc_ue4m4(sx_e[t], sx_m[t], u) : 12'($urandom);
        end
        for (int j = 0; j < M_R; j++) begin
          int s, e, m, u, mag;
          s = $urandom_range(1); e = $urandom_range(3); m = $urandom_range(7);
          mag = (e == 0) ? m : ((8 + m) << (e - 1));
          if (e == 0) n_wsub++;
          w8[j] = (s != 0) ? -mag : mag;
          qw_k[kk][j] = (e == 0) ? {3'd0, 5'((s != 0) ? -m : m)}
                                 : {1'b0, 2'(e - 1), 5'((s != 0) ? -(8 + m) : (8 + m))};
          u = $urandom_range(1);
          if (u != 0) n_setmeta++;
          sw_k[kk][j] = (r == 0) ? enc_ue4m4(sw_e[j], sw_m[j], u) : 12'($urandom);
          for (int t = 0; t < T_R; t++)
            tacc[t][j] += hif_int(ax_c[t] * w8[j], ax_sh[t]);
        end
      end
      for (int t = 0; t < T_R; t++)
        for (int j = 0; j < M_R; j++)
          y_ref[t][j] += pow2_mul(tacc[t][j] * big_t'(ue4m4_sig(sx_e[t], sx_m[t]))
                                             * big_t'(ue4m4_sig(sw_e[j], sw_m[j])),
                                  ue4m4_lsb_exp(sx_e[t]) + ue4m4_lsb_exp(sw_e[j]) - 3 + YFRAC);
    end

    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int kk = 0; kk < nb * G; kk++) begin
      beat_valid = 1;
      qx = qx_k[kk]; qw = qw_k[kk]; sx = sx_k[kk]; sw = sw_k[kk];
      forever begin
        @(posedge clk);
        if (beat_ready) break;
      end
      #1;
    end
    beat_valid = 0;
    while (!done) @(negedge clk);
    n_tiles++;
    check(cyc_count == 32'(nb * G + 1), $sformatf("K = %0d cycle count %0d", nb * G, cyc_count));
    check(!ovf && !act_err && !fmt_err && !sp_order_err && !sp_sat_err, "no flag raised");
    for (int t = 0; t < T_R; t++) begin
      rd_row = ($clog2(T_R))'(t);
      #1;
      for (int j = 0; j < M_R; j++)
        check(rd_y[j] == sat(y_ref[t][j], YW)[YW-1:0],
              $sformatf("K=%0d Y[%0d][%0d] got %0d expected %0d", nb * G, t, j, rd_y[j], sat(y_ref[t][j], YW)));
    end
  endtask

  initial begin
    for (int t = 0; t < T_R; t++) begin qx[t] = '0; sx[t] = '0; end
    for (int j = 0; j < M_R; j++) begin qw[j] = '0; sw[j] = '0; end
    sp_entry = '0; rd_row = '0;
    fmt_x = FMT_UE4M4; fmt_w = FMT_UE4M4; n_bits = 3'd5;
    k_x = '0; k_w = '0; n_kblk = '0; n_sparse = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run_fp6(4096 / G);
    run_fp6(14336 / G);
    $display("mechanisms: tiles=%0d subnormal_weights=%0d subnormal_scales=%0d set_metabits=%0d",
             n_tiles, n_wsub, n_ssub, n_setmeta);
    check(n_tiles == 2, "both direct-mode tiles completed");
    check(n_wsub > 0, "subnormal E2M3 weights");
    check(n_ssub > 0, "subnormal UE4M4 scales");
    check(n_setmeta > 0, "metabits set in direct mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
