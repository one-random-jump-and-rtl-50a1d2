// tb_lfsr113: self-checking test of the lfsr113 strategy generator.
//
// Drives the generator through reset, reseeding (including invalid seeds),
// stalls and long runs via tb_strategy_gen, which compares every output
// word with the reference model.
module tb_lfsr113;
  import ciprng_pkg::*;

  logic         clk = 1'b0;
  logic         rst_n, load, en;
  logic [127:0] seed;
  logic [31:0]  out;
  int           checks, failures;
  bit           done;

  always #5 clk = ~clk;

  lfsr113 dut (.clk, .rst_n, .load, .seed, .en, .out);

  tb_strategy_gen #(.KIND(STRAT_LFSR113), .RESET_SEED({4{32'd987654321}})) u_drv (
    .clk, .rst_n, .load, .seed, .en, .out, .checks, .failures, .done
  );

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
