// tb_perm_rxs: self-checking test of the random-xorshift permutation.
//
// Both multipliers used by the generator (95 and 811) are checked: a few
// hand-computed vectors, every shift amount (all 16 top nibbles) and
// random words, against the reference in tb_ref_pkg. A bijection check on
// a small window confirms that distinct inputs give distinct outputs.
module tb_perm_rxs;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [31:0] in32, out95, out811;

  perm_rxs #(.B(32'd95))  dut95  (.in32(in32), .out32(out95));
  perm_rxs #(.B(32'd811)) dut811 (.in32(in32), .out32(out811));

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
    // Hand-worked vectors:
    //  in=0           -> 0
    //  in=1           -> word1 = 1, word2 = 95, out = 95
    //  in=0x0040_0000 -> shift 4: word1 = 0x0044_0000, word2 = 0x193C_0000
    in32 = 32'd0; #1;
    check(out95 == 32'd0 && out811 == 32'd0, "perm(0) != 0");
    in32 = 32'd1; #1;
    check(out95 == 32'd95, $sformatf("perm95(1)=%0d", out95));
    check(out811 == 32'd811, $sformatf("perm811(1)=%0d", out811));
    in32 = 32'h0040_0000; #1;   // shift 4: word1 = 0x0044_0000; *95 = 0x193C_0000
    check(out95 == (32'h193C_0000 ^ (32'h193C_0000 >> 22)),
          $sformatf("perm95(0x00400000)=%h", out95));
    for (int n = 0; n < 16; n++) begin
      repeat (64) begin
        in32 = {4'(n), 28'($urandom)};
        #1;
        check(out95 == ref_perm(in32, 95), $sformatf("b=95 in=%h got %h", in32, out95));
        check(out811 == ref_perm(in32, 811), $sformatf("b=811 in=%h got %h", in32, out811));
      end
    end
    repeat (5000) begin
      in32 = $urandom;
      #1;
      check(out95 == ref_perm(in32, 95), $sformatf("b=95 in=%h got %h", in32, out95));
      check(out811 == ref_perm(in32, 811), $sformatf("b=811 in=%h got %h", in32, out811));
    end
    begin
      bit seen [logic [31:0]];
      automatic bit dup = 0;
      for (int i = 0; i < 4096; i++) begin
        in32 = 32'hF000_0000 + 32'(i);
        #1;
        if (seen.exists(out95)) dup = 1;
        seen[out95] = 1;
      end
      check(!dup, "two inputs map to one output");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
