// tb_sparse_corr: self-checking test of the OPQ/Wr sparse correction unit.
//
// Builds a random sorted list of sparse entries over a 48-step K range
// (0 to 3 entries per step, BF16 and E3M4 values mixed) and walks the K
// steps like the sequencer does: a beat advances only when hold is low.
// Each sp_en pulse is matched, in order, against the next entry: its
// column and, for all 4 rows, v * coef * 2^sh * s_X rounded down to Y's
// fixed point. With the entry port always valid, the number of held
// cycles must equal the number of entries beyond the first at each k;
// a second pass with random gaps on the port checks values only.
module tb_sparse_corr;
  import sop_pkg::*;
  import sop_ref_pkg::*;

  localparam int T_R = 4, YW = 64, YFRAC = 24, K = 48;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] n_entries;
  logic in_valid = 0, in_ready;
  sparse_entry_t in_entry;
  logic beat_valid = 0, hold;
  logic [15:0] k_cur;
  hif_t act [T_R];
  scale_lane_t xs [T_R];
  logic sp_en, order_err, sat_err;
  logic [7:0] sp_col;
  logic signed [YW-1:0] sp_val [T_R];
  int checks = 0, failures = 0;

  sparse_corr #(.T_R(T_R), .YW(YW), .YFRAC(YFRAC)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  sparse_entry_t ents [$];
  hif_t          act_k [K][T_R];
  scale_lane_t   xs_k  [K][T_R];
  int            got, holds;

  function automatic big_t expect_val(sparse_entry_t en, int t);
    big_t sig; int ve, s;
    hif_t a; scale_lane_t x;
    a = act_k[en.k][t]; x = xs_k[en.k][t];
    if (!en.is_wr) begin
      int e = int'(en.value[14:7]);
      sig = (e == 0) ? big_t'(en.value[6:0]) : big_t'(128 + int'(en.value[6:0]));
      ve  = ((e == 0) ? 1 : e) - 127 - 7;
      s   = en.value[15];
    end else begin
      int e = int'(en.value[6:4]);
      sig = (e == 0) ? big_t'(en.value[3:0]) : big_t'(16 + int'(en.value[3:0]));
      ve  = ((e == 0) ? 1 : e) - 3 - 4;
      s   = en.value[7];
    end
    return sat(pow2_mul(big_t'(int'(a.coef)) * big_t'(x.sig) * sig * ((s ^ int'(x.sign)) ? -1 : 1),
                        int'(a.sa) + int'(x.exp) + ve + YFRAC), YW);
  endfunction

  // monitor: every sp_en pulse must be the next entry
  always @(posedge clk) begin
    if (rst_n && sp_en) begin
      if (got < ents.size()) begin
        check(sp_col == ents[got].col, "column");
        for (int t = 0; t < T_R; t++)
          check(sp_val[t] == expect_val(ents[got], t)[YW-1:0], "value");
      end else check(0, "extra sp_en");
      got++;
    end
  end

  task automatic run_pass(input bit gaps);
    int idx = 0, extra = 0;
    // build the entry list
    ents.delete();
    for (int k = 0; k < K; k++) begin
      int c = $urandom_range(3) == 0 ? $urandom_range(1, 3) : 0;
      if (c > 1) extra += c - 1;
      for (int i = 0; i < c; i++) begin
        sparse_entry_t en;
        en.k = 16'(k); en.col = 8'($urandom_range(7)); en.is_wr = 1'($urandom);
        en.value = en.is_wr ? {8'h00, 1'($urandom), 3'($urandom), 4'($urandom)}
                            : {1'($urandom), 8'($urandom_range(112, 134)), 7'($urandom)};
        ents.push_back(en);
      end
      for (int t = 0; t < T_R; t++) begin
        act_k[k][t].coef = 5'($urandom); act_k[k][t].sa = 3'($urandom_range(4));
        xs_k[k][t].sign = 1'($urandom); xs_k[k][t].sig = 9'($urandom_range(256, 511));
        xs_k[k][t].exp = 10'($urandom_range(0, 8) - 16);
      end
    end
    got = 0; holds = 0;
    @(negedge clk);
    n_entries = 16'(ents.size()); start = 1;
    @(negedge clk) start = 0;
    fork
      begin : feeder
        while (idx < ents.size()) begin
          in_valid = gaps ? ($urandom_range(2) != 0) : 1'b1;
          in_entry = ents[idx];
          @(posedge clk);
          if (in_valid && in_ready) idx++;
          #1;
        end
        in_valid = 0;
      end
      begin : beats
        repeat (2) @(negedge clk);   // let the head entry load
        for (int k = 0; k < K; k++) begin
          beat_valid = 1; k_cur = 16'(k);
          act = act_k[k]; xs = xs_k[k];
          forever begin
            @(posedge clk);
            if (!hold) break;
            holds++;
          end
          #1;
        end
        beat_valid = 0;
      end
    join
    repeat (3) @(negedge clk);
    check(got == ents.size(), "every entry applied once");
    if (!gaps) check(holds == extra, $sformatf("hold cycles %0d expected %0d", holds, extra));
    check(!order_err, "no order error");
  endtask

  initial begin
    n_entries = '0; in_entry = '0; k_cur = '0;
    for (int t = 0; t < T_R; t++) begin act[t] = '0; xs[t] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run_pass(1'b0);
    run_pass(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
