// tb_ciprng_configs: the six evaluated combinations of iterated function
// and strategy generator, each built as its own ciprng_top:
//   NEG with Taus88, LFSR113, xorshift128 (multiplier 95)
//   F1  with Taus88, LFSR113, xorshift128 (multiplier 811)
// Each runs at full rate from a random seed; every output word is compared
// with the reference model, and the throughput (one 32-bit word per clock)
// and latency (three edges) are checked. As a coarse sanity check of
// output quality, each output bit must be set in 50 % +- 1.5 % of
// the words (a bound far wider than random fluctuation over 20,000 words).
module tb_ciprng_configs;
  import ciprng_pkg::*;
  import tb_ref_pkg::*;

  localparam int NW = 20000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         rst_n = 1'b0, load = 1'b0, en = 1'b0;
  logic [31:0]  seed_x;
  logic [127:0] seed_s;
  logic [31:0]  out [6];
  logic         out_valid [6];

  localparam func_e     CF [6] = '{FUNC_NEG, FUNC_NEG, FUNC_NEG, FUNC_F1, FUNC_F1, FUNC_F1};
  localparam strategy_e CS [6] = '{STRAT_TAUS88, STRAT_LFSR113, STRAT_XORSHIFT128,
                                   STRAT_TAUS88, STRAT_LFSR113, STRAT_XORSHIFT128};
  localparam int unsigned CB [6] = '{95, 95, 95, 811, 811, 811};

  for (genvar c = 0; c < 6; c++) begin : g_cfg
    ciprng_top #(.FUNC(CF[c]), .STRATEGY(CS[c]), .B(CB[c])) dut (
      .clk, .rst_n, .load, .seed_x, .seed_s, .en,
      .out(out[c]), .out_valid(out_valid[c])
    );
  end

  int checks = 0, failures = 0;
  gen_state_t model [6];
  int words [6] = '{default: 0};
  int ones [6][32];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  always @(posedge clk) begin
    #2;
    if (rst_n && !load) begin
      for (int c = 0; c < 6; c++) begin
        if (out_valid[c]) begin
          int unsigned exp;
          exp = gen_next(model[c]);
          check(out[c] == exp, $sformatf("cfg %0d word %0d got %h expected %h",
                                         c, words[c], out[c], exp));
          for (int b = 0; b < 32; b++) ones[c][b] += int'(out[c][b]);
          words[c]++;
        end
      end
    end
  end

  initial begin
    repeat (NW + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int edges;
    foreach (ones[c, b]) ones[c][b] = 0;
    seed_x = $urandom;
    seed_s = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    for (int c = 0; c < 6; c++) model[c] = gen_seed(CF[c], CS[c], CB[c], seed_x, seed_s);
    en = 1'b1;
    edges = 1;
    @(negedge clk);
    while (!out_valid[0] && edges < 10) begin
      @(negedge clk);
      edges++;
    end
    check(edges == 3, $sformatf("latency %0d edges", edges));
    repeat (NW - 1) @(negedge clk);
    for (int c = 0; c < 6; c++) begin
      check(words[c] == NW, $sformatf("cfg %0d: %0d words in %0d cycles", c, words[c], NW));
      for (int b = 0; b < 32; b++)
        check(ones[c][b] > NW * 485 / 1000 && ones[c][b] < NW * 515 / 1000,
              $sformatf("cfg %0d bit %0d set in %0d of %0d words", c, b, ones[c][b], words[c]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
