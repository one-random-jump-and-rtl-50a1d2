// tb_bool_func: self-checking test of bool_func for both functions.
//
// NEG is checked exhaustively against ~x. F1 is checked three ways that do
// not rely on the RTL's table: a set of entries copied by hand from the
// published table, the rule that every F1(x) is ~x with exactly one bit
// flipped back, and the rule that those flipped bits, followed from x = 0,
// walk one Hamiltonian cycle through all 256 vertices of the 8-cube using
// each of the 8 dimensions 32 times (the "balanced" cycle).
module tb_bool_func;
  import ciprng_pkg::*;

  int checks = 0, failures = 0;

  logic [7:0] x, f_neg, f_f1;

  bool_func #(.FUNC(FUNC_NEG)) dut_neg (.x(x), .fx(f_neg));
  bool_func #(.FUNC(FUNC_F1))  dut_f1  (.x(x), .fx(f_f1));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  // Hand-copied entries of F1: index, value
  int kat [16][2] = '{'{0, 223}, '{1, 190}, '{5, 234}, '{7, 252}, '{31, 160},
                      '{63, 224}, '{64, 63}, '{100, 219}, '{127, 192},
                      '{128, 255}, '{150, 97}, '{200, 119}, '{240, 143},
                      '{250, 7}, '{254, 0}, '{255, 128}};

  logic [7:0] table_f1 [256];

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      x = 8'(i);
      #1;
      check(f_neg == ~x, $sformatf("NEG(%0d)=%0d", i, f_neg));
      table_f1[i] = f_f1;
      check($countones(f_f1 ^ ~x) == 1,
            $sformatf("F1(%0d)=%0d is not ~x with one bit back", i, f_f1));
    end
    foreach (kat[k])
      check(table_f1[kat[k][0]] == 8'(kat[k][1]),
            $sformatf("F1(%0d)=%0d expected %0d", kat[k][0], table_f1[kat[k][0]], kat[k][1]));
    begin
      automatic bit [255:0] seen = '0;
      automatic int dim_count [8] = '{default: 0};
      automatic logic [7:0] v = 8'd0;
      logic [7:0] e;
      for (int step = 0; step < 256; step++) begin
        check(!seen[v], $sformatf("cycle revisits %0d at step %0d", v, step));
        seen[v] = 1'b1;
        e = table_f1[v] ^ ~v;
        for (int d = 0; d < 8; d++) if (e[d]) dim_count[d]++;
        v = v ^ e;
      end
      check(v == 8'd0, "cycle does not close at 0");
      check(&seen, "cycle does not visit all vertices");
      for (int d = 0; d < 8; d++)
        check(dim_count[d] == 32, $sformatf("dimension %0d used %0d times", d, dim_count[d]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
