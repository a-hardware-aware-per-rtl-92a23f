// tb_sop_ctrl: self-checking test of the SOP tile sequencer.
//
// Runs tiles of n_kblk K-blocks of G = 4 beats with random gaps in
// beat_valid and random holds from the sparse unit. At every accepted beat
// it checks k_cur, first and last against its own count; it checks that
// apply follows each block's last beat by exactly one cycle, that done
// rises two cycles after the last beat, that a tile without gaps or holds
// takes n_kblk*G + 1 busy cycles, and that hold_count counts the held
// cycles. A tile with n_kblk = 0 must finish at once.
module tb_sop_ctrl;
  localparam int G = 4;
  logic clk = 0, rst_n = 0, start = 0, beat_valid = 0, hold = 0;
  logic [15:0] n_kblk;
  logic beat_ready, step, first, last, apply, clr, run, busy, done;
  logic [15:0] k_cur;
  logic [31:0] cyc_count, hold_count;
  int checks = 0, failures = 0;

  sop_ctrl #(.G(G)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s k=%0d", what, k_cur);
    end
  endtask

  task automatic run_tile(input int nb, input bit noisy);
    int k = 0, holds = 0, last_cyc = 0, cyc = 0;
    bit apply_due = 0;
    @(negedge clk);
    n_kblk = 16'(nb); start = 1;
    #1 check(clr, "clr on start");
    @(negedge clk) start = 0;
    while (k < nb * G) begin
      beat_valid = noisy ? ($urandom_range(3) != 0) : 1'b1;
      hold       = noisy ? ($urandom_range(4) == 0) : 1'b0;
      #1;
      check(apply == apply_due, "apply one cycle after last beat");
      apply_due = 0;
      if (beat_valid && hold) holds++;
      check(step == (beat_valid && !hold), "step = valid and not held");
      if (step) begin
        check(k_cur == 16'(k), "k_cur");
        check(first == (k % G == 0), "first");
        check(last == (k % G == G - 1), "last");
        apply_due = last;
        k++;
      end
      cyc++;
      @(negedge clk);
    end
    beat_valid = 0; hold = 0;
    #1 check(apply == apply_due, "final apply");
    check(busy && !done, "draining");
    @(negedge clk);
    #1 check(done && !busy, "done two cycles after the last beat");
    check(hold_count == 32'(holds), "hold count");
    if (!noisy) check(cyc_count == 32'(nb * G + 1), "busy cycles without stalls");
  endtask

  initial begin
    n_kblk = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run_tile(3, 1'b0);
    run_tile(5, 1'b1);
    run_tile(1, 1'b1);
    // an empty tile finishes immediately
    @(negedge clk) n_kblk = 16'd0; start = 1;
    @(negedge clk) start = 0;
    #1 check(done, "empty tile done");
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
