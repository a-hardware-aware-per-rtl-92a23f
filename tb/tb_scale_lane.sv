// tb_scale_lane: self-checking test of a row/column scale lane.
//
// Runs K-blocks of 4 beats. On each block's first beat it offers a random
// S1E5M5 word and checks that cur shows the decoded scale (significand,
// sign and LSB exponent minus the F_layer shift plus the lane offset) and
// its metabit in the same cycle; on later beats, with the word input
// scrambled, cur must still hold the block's scale; after the block's last
// beat retire must hold it while the next block is already current.
module tb_scale_lane;
  import sop_pkg::*;
  import sop_ref_pkg::*;

  localparam int OFS = 16;
  logic clk = 0, rst_n = 0, beat = 0, first = 0, last = 0;
  logic [11:0] word;
  scale_fmt_t fmt = FMT_S1E5M5;
  logic signed [7:0] k_shift;
  scale_lane_t cur, retire;
  logic cur_meta, fmt_err;
  int checks = 0, failures = 0;

  scale_lane #(.EXP_OFS(OFS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s cur=%p retire=%p", what, cur, retire);
    end
  endtask

  initial begin
    int s, e, m, mu, prev_sig, prev_exp, prev_s;
    word = '0; k_shift = 8'sd3;
    prev_sig = -1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      s = $urandom_range(1); e = $urandom_range(31); m = $urandom_range(31); mu = $urandom_range(1);
      k_shift = 8'($urandom_range(8)) - 8'sd4;
      for (int r = 0; r < 4; r++) begin
        @(negedge clk);
        beat = 1; first = (r == 0); last = (r == 3);
        word = (r == 0) ? enc_s1e5m5(s, e, m, mu) : 12'($urandom);
        #1;
        check(int'(cur.sig) == (s1e5m5_sig(e, m) << 3), "cur sig");
        check(int'(cur.exp) == s1e5m5_lsb_exp(e) + 5 - int'(k_shift) + OFS, "cur exp");
        check(cur.sign == 1'(s) && cur_meta == 1'(mu), "cur sign/meta");
        if (r == 0 && prev_sig >= 0)
          check(int'(retire.sig) == prev_sig && int'(retire.exp) == prev_exp && retire.sign == 1'(prev_s),
                "retire holds previous block");
      end
      prev_sig = s1e5m5_sig(e, m) << 3;
      prev_exp = s1e5m5_lsb_exp(e) + 5 - int'(k_shift) + OFS;
      prev_s   = s;
      @(negedge clk);
      beat = 0; first = 0; last = 0; word = 12'($urandom);
      #1 check(int'(retire.sig) == prev_sig && int'(retire.exp) == prev_exp, "retire after last beat");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
