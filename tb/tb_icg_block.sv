// tb_icg_block: self-checking test of one 8-bit chaotic iteration step.
//
// For NEG every (x, s) pair is checked (65536 cases); for F1 a random
// sample plus the corner strategies s = 0 (state kept) and s = 0xFF
// (whole bloc replaced by F1(x)). Expected values come from the
// component-by-component reference in tb_ref_pkg.
module tb_icg_block;
  import ciprng_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [7:0] x, s, xn_neg, xn_f1;

  icg_block #(.FUNC(FUNC_NEG)) dut_neg (.x(x), .s(s), .x_next(xn_neg));
  icg_block #(.FUNC(FUNC_F1))  dut_f1  (.x(x), .s(s), .x_next(xn_f1));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        x = 8'(i); s = 8'(j);
        #1;
        check(xn_neg == ref_icg(FUNC_NEG, x, s),
              $sformatf("NEG x=%0d s=%0d got %0d", i, j, xn_neg));
      end
      s = 8'h00; #1;
      check(xn_f1 == x, $sformatf("F1 s=0 x=%0d got %0d", i, xn_f1));
      s = 8'hFF; #1;
      check(xn_f1 == ref_f(FUNC_F1, x), $sformatf("F1 s=FF x=%0d got %0d", i, xn_f1));
    end
    repeat (20000) begin
      x = 8'($urandom); s = 8'($urandom);
      #1;
      check(xn_f1 == ref_icg(FUNC_F1, x, s),
            $sformatf("F1 x=%0d s=%0d got %0d", x, s, xn_f1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
