// tb_scale_decode: self-checking test of the SwExMy scale-word decoder.
//
// For several container layouts (S1E5M5, E5M6, S0E6M5, S1E5M4, S0E5M5,
// UE4M4 and UE8M0 padded into 12 bits) it draws random sign, exponent,
// mantissa and metabit fields, places them in a word by the SOP bit
// placement rule, and checks the decoded value (as a real number), sign
// and codebook-select metabits against the fields it started from.
module tb_scale_decode;
  import sop_pkg::*;

  logic [11:0] word;
  scale_fmt_t  fmt;
  scale_val_t  val;
  logic        fmt_err;
  int checks = 0, failures = 0;

  scale_decode dut (.word, .fmt, .val, .fmt_err);

  function automatic real pow2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s word=%03h fmt=%p val=%p", what, word, fmt, val);
    end
  endtask

  initial begin
    int fw [7] = '{1, 1, 0, 1, 0, 0, 0};
    int fx [7] = '{5, 5, 6, 5, 5, 4, 8};
    int fy [7] = '{5, 6, 5, 4, 5, 4, 0};
    for (int f = 0; f < 7; f++) begin
      for (int n = 0; n < 400; n++) begin
        int w = fw[f], x = fx[f], y = fy[f];
        int m = 12 - w - x - y;
        int s, e, mt, bias, pos;
        logic [3:0] metas;
        real expect_v, got_v;
        s     = (w != 0) ? $urandom_range(1) : 0;
        e     = $urandom_range((1 << x) - 1);
        mt    = (y > 0) ? $urandom_range((1 << y) - 1) : 0;
        metas = 4'($urandom);
        word  = '0;
        // bit placement
        pos = 11;
        if (w != 0) begin word[11] = 1'(s); pos = 10; end
        else if (m >= 1) begin word[11] = metas[0]; pos = 10; end
        for (int i = x - 1; i >= 0; i--) begin word[pos] = 1'(e >> i); pos--; end
        for (int i = y - 1; i >= 0; i--) begin word[pos] = 1'(mt >> i); pos--; end
        if (w != 0) begin
          for (int i = 0; i < m; i++) word[m-1-i] = metas[i];
        end else begin
          for (int i = 1; i < m; i++) word[m-1-i] = metas[i];
        end
        fmt = '{sign_en: 1'(w), exp_bits: 4'(x), man_bits: 4'(y)};
        #1;
        bias = (1 << (x - 1)) - 1;
        if (e == 0) expect_v = $itor(mt) * pow2(1 - bias - y);
        else        expect_v = (1.0 + $itor(mt) * pow2(-y)) * pow2(e - bias);
        got_v = $itor(val.sig) * pow2(int'(val.exp) - int'(MAX_MAN));
        check(got_v == expect_v, "magnitude");
        check(val.sign == 1'(s), "sign");
        check(!fmt_err, "fmt_err");
        if (m >= 1) check(val.meta[0] == metas[0], "meta0");
        else        check(val.meta[0] == 1'b0, "meta0 absent");
        if (m >= 2) check(val.meta[1] == metas[1], "meta1");
      end
    end
    // a format that does not fit the container is flagged
    fmt = '{sign_en: 1'b1, exp_bits: 4'd6, man_bits: 4'd7};
    #1 check(fmt_err, "oversize format flagged");
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
