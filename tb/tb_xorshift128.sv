// tb_xorshift128: self-checking test of the xorshift128 strategy generator.
//
// Drives the generator through reset, reseeding (including invalid seeds),
// stalls and long runs via tb_strategy_gen, which compares every output
// word with the reference model.
// Also checks Marsaglia's published first output, 3701687786, for the
// default seed.
module tb_xorshift128;
  import ciprng_pkg::*;

  logic         clk = 1'b0;
  logic         rst_n, load, en;
  logic [127:0] seed;
  logic [31:0]  out;
  int           checks, failures;
  bit           done;

  always #5 clk = ~clk;

  xorshift128 dut (.clk, .rst_n, .load, .seed, .en, .out);

  tb_strategy_gen #(.KIND(STRAT_XORSHIFT128), .RESET_SEED({32'd88675123, 32'd521288629, 32'd362436069, 32'd123456789}), .KAT_SEED({32'd88675123, 32'd521288629, 32'd362436069, 32'd123456789}), .KAT_OUT(32'd3701687786), .HAS_KAT(1'b1)) u_drv (
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
