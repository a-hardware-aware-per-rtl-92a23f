// Shared body of the sop_top testbenches: signals, reference model,
// stimulus and checks. The including module defines T_R, M_R, G, YW,
// YFRAC and NTILES and instantiates sop_top with .* connections.

  logic clk = 0, rst_n = 0;
  scale_fmt_t fmt_x, fmt_w;
  logic [2:0] n_bits;
  logic w_direct = 0;
  logic signed [7:0] k_x, k_w;
  logic [15:0] n_kblk, n_sparse;
  logic start = 0, busy, done;
  logic lut_wr_en = 0, lut_wr_bcast = 0, lut_wr_sel = 0;
  logic [7:0] lut_wr_lane = 0, lut_wr_data = 0;
  logic [CODE_BITS-1:0] lut_wr_addr = 0;
  logic beat_valid = 0, beat_ready;
  logic [HIF_BITS-1:0] qx [T_R];
  logic [HIF_BITS-1:0] qw [M_R];
  logic [SCALE_BITS-1:0] sx [T_R];
  logic [SCALE_BITS-1:0] sw [M_R];
  logic sp_valid = 0, sp_ready;
  sparse_entry_t sp_entry;
  logic [$clog2(T_R)-1:0] rd_row;
  logic signed [YW-1:0] rd_y [M_R];
  logic ovf, act_err, fmt_err, sp_order_err, sp_sat_err;
  logic [31:0] cyc_count, hold_count;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_meta1 = 0, n_meta0 = 0, n_negscale = 0, n_opq = 0, n_wr = 0, n_hold = 0;
  int n_ovf = 0, n_clamp = 0, n_direct = 0, n_code4 = 0, n_code5 = 0, n_fshift = 0, n_lane_wr = 0;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // reference state
  logic [7:0] lut [M_R][2][32];
  big_t       y_ref [T_R][M_R];

  task automatic lut_write(input bit bc, input int lane, input int sel, input int addr, input logic [7:0] d);
    @(negedge clk);
    lut_wr_en = 1; lut_wr_bcast = bc; lut_wr_lane = 8'(lane);
    lut_wr_sel = 1'(sel); lut_wr_addr = 5'(addr); lut_wr_data = d;
    for (int j = 0; j < M_R; j++) if (bc || j == lane) lut[j][sel][addr] = d;
    @(negedge clk) lut_wr_en = 0;
  endtask

  // one tile: random operands, compare all of Y
  task automatic run_tile(input int nb, input int code_bits, input bit big_scales,
                          input bit wild_act, input int nsp);
    int sx_s [T_R], sx_e [T_R], sx_m [T_R];
    int sw_s [M_R], sw_e [M_R], sw_m [M_R], sw_u [M_R];
    big_t tacc [T_R][M_R];
    int ax_c [T_R], ax_sh [T_R];
    sparse_entry_t ents [$];
    int kx, kw, idx;
    logic [HIF_BITS-1:0] qx_k [][T_R];
    logic [HIF_BITS-1:0] qw_k [][M_R];
    logic [11:0] sx_k [][T_R];
    logic [11:0] sw_k [][M_R];
    bit clean;

    kx = $urandom_range(4) - 2; kw = $urandom_range(6) - 1;
    if (kx != 0 || kw != 0) n_fshift++;
    w_direct = (code_bits == 8);
    if (code_bits == 4) n_code4++; else if (code_bits == 5) n_code5++; else n_direct++;
    fmt_x = FMT_S1E5M5; fmt_w = FMT_S1E5M5;
    n_bits = (code_bits == 8) ? 3'd5 : 3'(code_bits); k_x = 8'(kx); k_w = 8'(kw); n_kblk = 16'(nb);
    qx_k = new[nb * G]; qw_k = new[nb * G]; sx_k = new[nb * G]; sw_k = new[nb * G];
    for (int t = 0; t < T_R; t++) for (int j = 0; j < M_R; j++) y_ref[t][j] = 0;

    // operands and the dense part of the reference
    for (int b = 0; b < nb; b++) begin
      for (int t = 0; t < T_R; t++) begin
        sx_s[t] = $urandom_range(1); sx_m[t] = $urandom_range(31);
        sx_e[t] = big_scales ? 31 : $urandom_range(8, 18);
      end
      for (int j = 0; j < M_R; j++) begin
        sw_s[j] = $urandom_range(1); sw_m[j] = $urandom_range(31); sw_u[j] = $urandom_range(1);
        sw_e[j] = big_scales ? 31 : $urandom_range(4, 14);
        if (sw_u[j] != 0) n_meta1++; else n_meta0++;
      end
      for (int t = 0; t < T_R; t++) for (int j = 0; j < M_R; j++) tacc[t][j] = 0;
      for (int r = 0; r < G; r++) begin
        int kk = b * G + r;
        for (int t = 0; t < T_R; t++) begin
          int c, sh;
          c  = big_scales ? 15 : int'($urandom_range(31)) - 16;
          sh = wild_act ? $urandom_range(7) : (big_scales ? 4 : $urandom_range(4));
          qx_k[kk][t] = {3'(sh), 5'(c)};
          ax_c[t] = c; ax_sh[t] = (sh > 4) ? 4 : sh;
          if (sh > 4) n_clamp++;
          sx_k[kk][t] = (r == 0) ? enc_s1e5m5(sx_s[t], sx_e[t], sx_m[t], 0) : 12'($urandom);
        end
        for (int j = 0; j < M_R; j++) begin
          int code, a;
          logic [7:0] ent;
          code = $urandom_range(255);
          qw_k[kk][j] = 8'(code);
          a = (code_bits == 5) ? (code & 31) : (code & 15);
          ent = (code_bits == 8) ? 8'(code) : lut[j][sw_u[j]][a];
          sw_k[kk][j] = (r == 0) ? enc_s1e5m5(sw_s[j], sw_e[j], sw_m[j], sw_u[j]) : 12'($urandom);
          for (int t = 0; t < T_R; t++)
            tacc[t][j] += hif_int(ax_c[t] * int'(signed'(ent[4:0])), ax_sh[t] + int'(ent[6:5]));
        end
        // sparse entries at this k
        if (nsp > 0 && $urandom_range(2) == 0) begin
          int cnt = $urandom_range(1, 3);
          for (int i = 0; i < cnt; i++) begin
            sparse_entry_t en;
            big_t sig, xv; int ve, sgn;
            en.k = 16'(kk); en.col = 8'($urandom_range(M_R - 1)); en.is_wr = 1'($urandom);
            if (en.is_wr) begin
              en.value = {8'h00, 1'($urandom), 3'($urandom), 4'($urandom)};
              sig = (en.value[6:4] == 0) ? big_t'(en.value[3:0]) : big_t'(16 + int'(en.value[3:0]));
              ve  = ((en.value[6:4] == 0) ? 1 : int'(en.value[6:4])) - 3 - 4;
              sgn = en.value[7];
              n_wr++;
            end else begin
              en.value = {1'($urandom), 8'($urandom_range(115, 130)), 7'($urandom)};
              sig = big_t'(128 + int'(en.value[6:0]));
              ve  = int'(en.value[14:7]) - 127 - 7;
              sgn = en.value[15];
              n_opq++;
            end
            ents.push_back(en);
            for (int t = 0; t < T_R; t++) begin
              xv = big_t'(ax_c[t]) * big_t'(s1e5m5_sig(sx_e[t], sx_m[t])) * sig
                 * (((sgn ^ sx_s[t]) != 0) ? -1 : 1);
              y_ref[t][en.col] += pow2_mul(xv, ax_sh[t] + s1e5m5_lsb_exp(sx_e[t]) - kx + ve + YFRAC);
            end
          end
        end
      end
      for (int t = 0; t < T_R; t++)
        for (int j = 0; j < M_R; j++) begin
          big_t p;
          p = tacc[t][j] * big_t'(s1e5m5_sig(sx_e[t], sx_m[t])) * big_t'(s1e5m5_sig(sw_e[j], sw_m[j]));
          if ((sx_s[t] ^ sw_s[j]) != 0) begin p = -p; n_negscale++; end
          y_ref[t][j] += pow2_mul(p, s1e5m5_lsb_exp(sx_e[t]) - kx + s1e5m5_lsb_exp(sw_e[j]) - kw + YFRAC);
        end
    end

    // run the tile
    n_sparse = 16'(ents.size());
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    idx = 0;
    fork
      begin
        while (idx < ents.size()) begin
          sp_valid = 1; sp_entry = ents[idx];
          @(posedge clk);
          if (sp_ready) idx++;
          #1;
        end
        sp_valid = 0;
      end
      begin
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
      end
    join
    while (!done) @(negedge clk);
    n_hold += int'(hold_count);
    if (ents.size() == 0) check(cyc_count == 32'(nb * G + 1), "tile cycle count without stalls");

    clean = 1;
    for (int t = 0; t < T_R; t++) for (int j = 0; j < M_R; j++)
      if (!in_range(y_ref[t][j], YW)) clean = 0;
    if (big_scales) begin
      check(ovf, "overflow flagged");
      if (ovf) n_ovf++;
    end else begin
      check(!ovf && clean, "no overflow");
    end
    check(act_err == wild_act, "activation range flag");
    check(!fmt_err && !sp_order_err, "no format or order error");
    for (int t = 0; t < T_R; t++) begin
      rd_row = ($clog2(T_R))'(t);
      #1;
      for (int j = 0; j < M_R; j++) begin
        check(rd_y[j] == sat(y_ref[t][j], YW)[YW-1:0],
              $sformatf("Y[%0d][%0d] got %0d expected %0d", t, j, rd_y[j], sat(y_ref[t][j], YW)));
      end
    end
  endtask

  task automatic report();
    $display("mechanisms: meta0=%0d meta1=%0d negscale=%0d opq=%0d wr=%0d hold=%0d ovf=%0d clamp=%0d direct=%0d code4=%0d code5=%0d fshift=%0d lane_wr=%0d",
             n_meta0, n_meta1, n_negscale, n_opq, n_wr, n_hold, n_ovf, n_clamp, n_direct, n_code4, n_code5, n_fshift, n_lane_wr);
    check(n_meta0 > 0 && n_meta1 > 0, "both codebooks of the pair used");
    check(n_negscale > 0, "negative scale product (polarity flip)");
    check(n_opq > 0, "OPQ outlier entries");
    check(n_wr > 0, "Wr residual entries");
    check(n_hold > 0, "sparse stall");
    check(n_code4 > 0 && n_code5 > 0, "n = 4 and n = 5 codes");
    check(n_direct > 0, "direct HIF7 weights (LUT bypass)");
    check(n_fshift > 0, "F_layer shift");
    check(n_lane_wr > 0, "per-lane LUT write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  task automatic load_luts();
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < 32; a++)
        lut_write(1'b1, 0, s, a, {1'b0, 2'($urandom), 5'($urandom)});
    // one lane gets its own entries
    for (int a = 0; a < 4; a++) begin
      lut_write(1'b0, M_R - 1, 1, a, {1'b0, 2'($urandom), 5'($urandom)});
      n_lane_wr++;
    end
  endtask
