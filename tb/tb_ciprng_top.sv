// tb_ciprng_top: end-to-end test of the generator at its default build
// (negation function, xorshift128 strategy, multiplier 95).
//
// A cycle-accurate reference model (tb_ref_pkg::gen_next) predicts every
// output word. The test drives and counts each mechanism of the design:
//   reset      outputs after reset come from the built-in seeds
//   load       reseeding with random seeds, also while words are in flight
//   latency    the first word appears three clock edges after en
//   streaming  with en held high a new word leaves every clock
//   stall      en dropped at random: no word is lost or repeated
// It fails if any mechanism was never exercised. About 48,000 words are
// checked.
module tb_ciprng_top;
  import ciprng_pkg::*;
  import tb_ref_pkg::*;

  localparam logic [127:0] XS_RESET_SEED =
    {32'd88675123, 32'd521288629, 32'd362436069, 32'd123456789};

  logic         clk = 1'b0;
  logic         rst_n, load, en;
  logic [31:0]  seed_x;
  logic [127:0] seed_s;
  logic [31:0]  out;
  logic         out_valid;

  always #5 clk = ~clk;

  ciprng_top dut (
    .clk, .rst_n, .load, .seed_x, .seed_s, .en, .out, .out_valid
  );

  int checks = 0, failures = 0;
  int n_reset = 0, n_load = 0, n_latency = 0, n_stream = 0, n_stall = 0;
  gen_state_t model;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  // Scoreboard: every valid output must be the model's next word
  int words = 0;
  always @(posedge clk) begin
    #2;
    if (rst_n && !load && out_valid) begin
      int unsigned exp;
      exp = gen_next(model);
      check(out == exp, $sformatf("word %0d got %h expected %h", words, out, exp));
      words++;
    end
  end

  // Streaming: count runs of consecutive valid words at full rate
  int run_len = 0;
  always @(posedge clk) begin
    #3;
    if (out_valid) run_len++;
    else begin
      if (run_len >= 16) n_stream++;
      run_len = 0;
    end
  end

  task automatic do_load(logic [31:0] sx, logic [127:0] ss);
    @(negedge clk);
    load = 1'b1; seed_x = sx; seed_s = ss; en = 1'b1;
    @(negedge clk);
    load = 1'b0;
    model = gen_seed(FUNC_NEG, STRAT_XORSHIFT128, 95, sx, ss);
    n_load++;
  endtask

  // Starts from an empty pipeline and measures the latency of one word
  task automatic measure_latency();
    int edges;
    en = 1'b0;
    repeat (4) @(negedge clk);
    en = 1'b1;
    @(negedge clk);
    en = 1'b0;
    edges = 1;
    while (!out_valid && edges < 10) begin
      @(negedge clk);
      edges++;
    end
    check(edges == 3, $sformatf("latency %0d edges, expected 3", edges));
    n_latency++;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; load = 1'b0; en = 1'b0; seed_x = '0; seed_s = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    model = gen_seed(FUNC_NEG, STRAT_XORSHIFT128, 95, 32'd0, XS_RESET_SEED);
    n_reset++;
    measure_latency();
    // full-rate stream: 2000 words in 2000 cycles
    begin
      int w0, c0;
      en = 1'b1;
      repeat (3) @(negedge clk);
      w0 = words;
      c0 = 0;
      repeat (2000) begin
        @(negedge clk);
        c0++;
      end
      check(words - w0 == c0, $sformatf("%0d words in %0d cycles", words - w0, c0));
    end
    for (int k = 0; k < 30; k++) begin
      do_load($urandom, {$urandom, $urandom, $urandom, $urandom});
      measure_latency();
      // random stalls
      for (int c = 0; c < 2000; c++) begin
        @(negedge clk);
        en = ($urandom_range(0, 3) != 0);
        if (!en) n_stall++;
      end
      en = 1'b1;
      repeat (20) @(negedge clk);
      // reseed while words are in flight
      if (k % 10 == 9) begin
        do_load($urandom, {$urandom, $urandom, $urandom, $urandom});
        repeat (50) @(negedge clk);
      end
    end
    en = 1'b0;
    // reset in the middle of the run
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    model = gen_seed(FUNC_NEG, STRAT_XORSHIFT128, 95, 32'd0, XS_RESET_SEED);
    n_reset++;
    en = 1'b1;
    repeat (500) @(negedge clk);
    en = 1'b0;
    repeat (5) @(negedge clk);
    check(!out_valid, "out_valid high with en low");
    $display("mechanisms: reset=%0d load=%0d latency=%0d stream=%0d stall=%0d words=%0d",
             n_reset, n_load, n_latency, n_stream, n_stall, words);
    check(n_reset > 0 && n_load > 0 && n_latency > 0 && n_stream > 0 && n_stall > 0,
          "a mechanism was never exercised");
    check(words > 40000, $sformatf("only %0d words checked", words));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
