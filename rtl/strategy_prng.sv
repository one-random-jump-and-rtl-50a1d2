// strategy_prng: the embedded PRNG that feeds the strategy s^t to the
// chaotic iterations, one 32-bit word per enabled cycle.
//
// A compile-time parameter builds one of the three generators used with
// the design: Taus88, LFSR113 or xorshift128 (the default, the best
// combination reported). The strategy word is registered inside the chosen
// generator. Selecting one generator per build, rather than a run-time
// multiplexer, is this design's choice: each combination is a separate
// implementation.
//
// Interface: load/seed reseed the generator (seed layout depends on the
// generator, 32 bits per state word from bit 0 up); en advances it; s is
// the registered strategy word, valid one cycle after en.
module strategy_prng
  import ciprng_pkg::*;
#(
  parameter strategy_e STRATEGY = STRAT_XORSHIFT128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [127:0] seed,
  input  logic         en,
  output logic [31:0]  s
);

  generate
    if (STRATEGY == STRAT_TAUS88) begin : g_taus88
      taus88 u_gen (.clk, .rst_n, .load, .seed, .en, .out(s));
    end else if (STRATEGY == STRAT_LFSR113) begin : g_lfsr113
      lfsr113 u_gen (.clk, .rst_n, .load, .seed, .en, .out(s));
    end else begin : g_xorshift128
      xorshift128 u_gen (.clk, .rst_n, .load, .seed, .en, .out(s));
    end
  endgenerate

endmodule
