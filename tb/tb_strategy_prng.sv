// tb_strategy_prng: self-checking test of the strategy selector.
//
// Builds strategy_prng once per generator choice and runs each through
// tb_strategy_gen, which compares every strategy word with the reference
// model of the selected generator, so a wrong selection is caught too.
module tb_strategy_prng;
  import ciprng_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         rst_n [3], load [3], en [3];
  logic [127:0] seed [3];
  logic [31:0]  s [3];
  int           checks [3], failures [3];
  bit           done [3];

  strategy_prng #(.STRATEGY(STRAT_TAUS88)) dut0 (
    .clk, .rst_n(rst_n[0]), .load(load[0]), .seed(seed[0]), .en(en[0]), .s(s[0]));
  strategy_prng #(.STRATEGY(STRAT_LFSR113)) dut1 (
    .clk, .rst_n(rst_n[1]), .load(load[1]), .seed(seed[1]), .en(en[1]), .s(s[1]));
  strategy_prng dut2 (
    .clk, .rst_n(rst_n[2]), .load(load[2]), .seed(seed[2]), .en(en[2]), .s(s[2]));

  tb_strategy_gen #(.KIND(STRAT_TAUS88), .RESET_SEED({32'd0, {3{32'd12345}}})) drv0 (
    .clk, .rst_n(rst_n[0]), .load(load[0]), .seed(seed[0]), .en(en[0]), .out(s[0]),
    .checks(checks[0]), .failures(failures[0]), .done(done[0]));
  tb_strategy_gen #(.KIND(STRAT_LFSR113), .RESET_SEED({4{32'd987654321}})) drv1 (
    .clk, .rst_n(rst_n[1]), .load(load[1]), .seed(seed[1]), .en(en[1]), .out(s[1]),
    .checks(checks[1]), .failures(failures[1]), .done(done[1]));
  tb_strategy_gen #(.KIND(STRAT_XORSHIFT128),
                    .RESET_SEED({32'd88675123, 32'd521288629, 32'd362436069, 32'd123456789})) drv2 (
    .clk, .rst_n(rst_n[2]), .load(load[2]), .seed(seed[2]), .en(en[2]), .out(s[2]),
    .checks(checks[2]), .failures(failures[2]), .done(done[2]));

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d",
             checks[0] + checks[1] + checks[2], failures[0] + failures[1] + failures[2] + 1);
    $finish;
  end

  initial begin
    wait (done[0] && done[1] && done[2]);
    $display("TB_RESULT checks=%0d failures=%0d",
             checks[0] + checks[1] + checks[2], failures[0] + failures[1] + failures[2]);
    $finish;
  end
endmodule
