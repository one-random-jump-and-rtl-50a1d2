// tb_strategy_gen: shared self-checking test of one strategy generator.
//
// Used by tb_taus88, tb_lfsr113, tb_xorshift128 and tb_strategy_prng.
// Checks, against the reference model in tb_ref_pkg: the sequence after
// reset, after several random seeds (including seeds below the generator's
// minimums, which must be made valid), that out holds while en is low, and
// that out changes one clock after en. A known first output can be given
// for a fixed seed.
module tb_strategy_gen
  import ciprng_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter strategy_e    KIND       = STRAT_XORSHIFT128,
  parameter logic [127:0] RESET_SEED = '0,
  parameter logic [127:0] KAT_SEED   = '0,
  parameter int unsigned  KAT_OUT    = 0,
  parameter bit           HAS_KAT    = 1'b0
) (
  input  logic        clk,
  output logic        rst_n,
  output logic        load,
  output logic [127:0] seed,
  output logic        en,
  input  logic [31:0] out,
  output int          checks,
  output int          failures,
  output bit          done
);

  strat_state_t ref_st;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %s", KIND.name(), msg);
    end
  endtask

  // Runs n steps with en high, checking each output word
  task automatic run(int n);
    int unsigned exp;
    for (int i = 0; i < n; i++) begin
      en = 1'b1;
      @(posedge clk); #1;
      exp = strat_step(ref_st);
      check(out == exp, $sformatf("step %0d got %h expected %h", i, out, exp));
    end
    en = 1'b0;
  endtask

  task automatic do_load(logic [127:0] sd);
    load = 1'b1; seed = sd; en = 1'b1;
    @(posedge clk); #1;
    load = 1'b0; en = 1'b0;
    ref_st = strat_seed(KIND, sd);
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    rst_n = 1'b0; load = 1'b0; en = 1'b0; seed = '0;
    @(posedge clk); #1;
    rst_n = 1'b1;
    ref_st = strat_seed(KIND, RESET_SEED);
    run(200);
    if (HAS_KAT) begin
      do_load(KAT_SEED);
      run(1);
      check(out == KAT_OUT, $sformatf("known answer got %0d expected %0d", out, KAT_OUT));
    end
    // stall: out must hold while en is low, then continue in sequence
    begin
      logic [31:0] held;
      held = out;
      repeat (5) begin
        @(posedge clk); #1;
        check(out == held, "out changed while en low");
      end
    end
    run(50);
    for (int k = 0; k < 20; k++) begin
      logic [127:0] sd;
      sd = {$urandom, $urandom, $urandom, $urandom};
      if (k == 0) sd = '0;
      if (k == 1) sd = {32'd5, 32'd3, 32'd1, 32'd0};
      do_load(sd);
      check(out == 32'd0, "out not cleared by load");
      run(300);
    end
    done = 1;
  end
endmodule
