// tb_lut_pair: self-checking test of a weight lane's codebook pair.
//
// Fills both 32-entry LUTs with random HIF7 entries through the write
// port, then reads random codes with random metabits at n = 5 and n = 4
// (where the code's top bit must be ignored), and in direct mode, and checks the HIF7
// coefficient and shift against a copy of what was written.
module tb_lut_pair;
  import sop_pkg::*;

  logic clk = 0, wr_en = 0, wr_sel = 0, sel = 0;
  logic [4:0] wr_addr = 0;
  logic [7:0] code = 0;
  logic direct = 0;
  logic [7:0] wr_data = 0;
  logic [2:0] n_bits = 3'd5;
  hif_t w_hif;
  logic [7:0] model [2][32];
  int checks = 0, failures = 0;

  lut_pair dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s code=%0d sel=%0d got=%p", what, code, sel, w_hif);
    end
  endtask

  initial begin
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < 32; i++) begin
        @(negedge clk);
        wr_en = 1; wr_sel = 1'(s); wr_addr = 5'(i); wr_data = 8'($urandom) & 8'h7f;
        model[s][i] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 400; n++) begin
      int a;
      n_bits = (n < 200) ? 3'd5 : 3'd4;
      code = 8'($urandom); sel = 1'($urandom); direct = (n % 5 == 0);
      #1;
      a = (n_bits == 3'd5) ? int'(code[4:0]) : int'(code[3:0]);
      if (direct) begin
        check(w_hif.coef == signed'(code[4:0]) && w_hif.sa == {1'b0, code[6:5]}, "direct HIF7");
      end else begin
        check(w_hif.coef == signed'(model[sel][a][4:0]), "coef");
        check(w_hif.sa == {1'b0, model[sel][a][6:5]}, "shift");
      end
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
