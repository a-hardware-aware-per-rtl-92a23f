// tb_sop_top: end-to-end test of the SOP matrix unit at reduced size
// (4 x 3 tile, block size 4).
//
// It loads random HIF7 codebook pairs (broadcast, then a few per-lane
// overwrites), runs several tiles with random S1E5M5 scales (both signs,
// both metabits), random HIF8 activations and n = 4 or 5 bit weight codes,
// nonzero F_layer shifts and random OPQ (BF16) and Wr (E3M4) entries, and
// compares every Y element read back with an exact integer model of the
// block-scaled GEMM, and a tile with HIF7 weights bypassing the LUTs.
// It also runs a tile whose result must saturate and a
// tile with out-of-range activation shifts (clamped to 4), checks the
// cycle count of a tile without stalls (n_kblk*G + 1), and counts how
// often each mechanism occurred: a mechanism that never occurred is a
// failure.
module tb_sop_top;
  import sop_pkg::*;
  import sop_ref_pkg::*;

  localparam int T_R = 4, M_R = 3, G = 4, YW = 64, YFRAC = 24;
  localparam int NTILES = 8;
  `include "sop_top_tb_body.svh"

  sop_top #(.T_R(T_R), .M_R(M_R), .G(G), .YW(YW), .YFRAC(YFRAC)) dut (.*);

  initial begin
    for (int t = 0; t < T_R; t++) begin qx[t] = '0; sx[t] = '0; end
    for (int j = 0; j < M_R; j++) begin qw[j] = '0; sw[j] = '0; end
    sp_entry = '0; rd_row = '0;
    fmt_x = FMT_S1E5M5; fmt_w = FMT_S1E5M5; n_bits = 3'd4;
    k_x = '0; k_w = '0; n_kblk = '0; n_sparse = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    load_luts();
    run_tile(3, 4, 1'b0, 1'b0, 0);      // no sparse entries: cycle count
    for (int i = 0; i < NTILES; i++)
      run_tile($urandom_range(1, 4), (i % 2 == 0) ? 5 : 4, 1'b0, 1'b0, 1);
    run_tile(2, 5, 1'b0, 1'b1, 1);      // activation shifts above 4
    run_tile(2, 8, 1'b0, 1'b0, 1);      // direct HIF7 weights
    run_tile(1, 5, 1'b1, 1'b0, 0);      // saturating result
    report();
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
