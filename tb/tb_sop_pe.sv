// tb_sop_pe: self-checking test of one SOP output position.
//
// Streams random HIF7 weights and HIF8 activations for several K-blocks
// of G = 4 beats (with idle cycles between beats), applies random scales
// at each block boundary and random sparse terms, and compares Y after
// every update with an exact integer model: the block sum of
// (coef_w*coef_a) << (sh_w+sh_a), times both significands, times
// 2^(exp_r+exp_c) rounded toward minus infinity. It checks that Y
// changes exactly one cycle after apply, that a new tile starts from zero
// after clr, and that an out-of-range result saturates and sets ovf.
module tb_sop_pe;
  import sop_pkg::*;
  import sop_ref_pkg::*;

  localparam int G = 4, YW = 64;
  logic clk = 0, rst_n = 0, clr = 0, step = 0, last = 0, apply = 0, sp_en = 0;
  hif_t w, a;
  scale_lane_t rs, cs;
  logic signed [YW-1:0] sp_val, y;
  logic ovf;
  int checks = 0, failures = 0;
  big_t y_ref, t_ref, hold_ref;

  sop_pe #(.G(G), .YW(YW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s y=%0d ref=%0d", what, y, y_ref);
    end
  endtask

  task automatic tick(); @(posedge clk); #1; endtask

  initial begin
    w = '0; a = '0; rs = '0; cs = '0; sp_val = '0;
    repeat (2) tick();
    rst_n = 1;
    for (int tile = 0; tile < 3; tile++) begin
      clr = 1; tick(); clr = 0;
      y_ref = 0;
      check(y == 0, "clear");
      for (int b = 0; b < 6; b++) begin
        t_ref = 0;
        for (int r = 0; r < G; r++) begin
          // random idle cycles between beats
          while ($urandom_range(3) == 0) begin
            step = 0; tick();
          end
          step = 1; last = (r == G - 1);
          w.coef = 5'($urandom); w.sa = 3'($urandom_range(3));
          a.coef = 5'($urandom); a.sa = 3'($urandom_range(4));
          t_ref += hif_int(int'(w.coef) * int'(a.coef), int'(w.sa) + int'(a.sa));
          tick();
        end
        step = 0; last = 0;
        hold_ref = t_ref;
        // block boundary: scale and accumulate in the next cycle
        apply = 1;
        rs.sign = 1'($urandom); rs.sig = 9'($urandom_range(256, 511)); rs.exp = 10'($urandom_range(0, 20) - 16);
        cs.sign = 1'($urandom); cs.sig = 9'($urandom_range(256, 511)); cs.exp = 10'($urandom_range(0, 20) - 10);
        sp_en = ($urandom_range(1) == 1);
        sp_val = 64'($urandom) - 64'(32'h8000_0000);
        check(y == y_ref[YW-1:0], "Y unchanged before apply");
        tick();
        apply = 0;
        y_ref += pow2_mul(hold_ref * big_t'(rs.sig) * big_t'(cs.sig) * ((rs.sign ^ cs.sign) ? -1 : 1),
                          int'(rs.exp) + int'(cs.exp));
        if (sp_en) y_ref += big_t'(sp_val);
        sp_en = 0;
        check(y == y_ref[YW-1:0], "Y after apply");
        check(!ovf, "no overflow");
      end
    end
    // saturation: a huge exponent overflows Y
    clr = 1; tick(); clr = 0;
    for (int r = 0; r < G; r++) begin
      step = 1; last = (r == G - 1);
      w.coef = 5'd15; w.sa = 3'd3; a.coef = 5'd15; a.sa = 3'd4;
      tick();
    end
    step = 0; last = 0;
    apply = 1; rs = '{sign: 1'b0, sig: 9'd511, exp: 10'sd20}; cs = '{sign: 1'b0, sig: 9'd511, exp: 10'sd20};
    tick(); apply = 0;
    check(ovf, "ovf set");
    check(y == {1'b0, {(YW-1){1'b1}}}, "saturated to max");
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
