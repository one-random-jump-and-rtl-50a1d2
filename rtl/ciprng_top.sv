// ciprng_top: chaotic-iteration pseudorandom number generator.
//
// A 32-bit internal state x is split into four 8-bit blocs A..D (A is the
// most significant byte). Every step an embedded PRNG, the strategy,
// delivers a 32-bit word s split the same way. Each bloc runs one
// generalized chaotic iteration in parallel: the components selected by its
// strategy byte take the value of f(x_l), the others are kept. The four
// new blocs form the new state x^{t+1}, which is fed back as the next
// state, and a random-xorshift permutation of x^{t+1} is the output.
// The structure, the block sizes, the functions NEG and F1, the three
// strategy generators and the permutation with its multipliers follow the
// published design. The pipeline registers, the seed/load and en
// interface and the valid flag are this design's own.
//
// Pipeline (three registers, one new word per cycle):
//   stage 1  strategy register s      (inside strategy_prng), written on en
//   stage 2  state register x         written with x^{t+1} when s is new
//   stage 3  output register out      written with perm(x^{t+1})
// A word started by en in cycle k is on out, with out_valid high, after the
// clock edge of cycle k+2 (three edges). With en held high out carries a
// new word every cycle, i.e. 32 bits per clock. en low stalls the
// generator: nothing in flight is lost and no strategy word is skipped.
//
// Interface: synchronous active-low reset rst_n; load (priority over en)
// writes seed_x to x, seeds the strategy with seed_s and empties the
// pipeline.
module ciprng_top
  import ciprng_pkg::*;
#(
  parameter int unsigned N        = 32,
  parameter int unsigned NBLOC    = 4,
  parameter func_e       FUNC     = FUNC_NEG,
  parameter strategy_e   STRATEGY = STRAT_XORSHIFT128,
  parameter logic [31:0] B        = B_NEG
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [N-1:0] seed_x,
  input  logic [127:0] seed_s,
  input  logic         en,
  output logic [N-1:0] out,
  output logic         out_valid
);

  localparam int unsigned BW = N / NBLOC;

  // The ICG blocks and the permutation are 8-bit and 32-bit respectively.
  initial begin
    assert (BW == 8 && N == 32)
      else $error("ciprng_top: N must be 32 and NBLOC 4 (8-bit blocs)");
  end

  logic [N-1:0] s;        // strategy s^t, registered in strategy_prng
  logic         s_new;    // s holds a word not yet used
  logic [N-1:0] x;        // internal state x^t
  logic [N-1:0] x_next;   // x^{t+1}
  logic         x_new;    // x was just updated
  logic [N-1:0] perm_out;

  strategy_prng #(.STRATEGY(STRATEGY)) u_strategy (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (load),
    .seed  (seed_s),
    .en    (en),
    .s     (s)
  );

  // Four parallel ICG blocs; bloc A is the top byte.
  for (genvar l = 0; l < NBLOC; l++) begin : g_bloc
    icg_block #(.FUNC(FUNC)) u_icg (
      .x      (x[l*BW +: BW]),
      .s      (s[l*BW +: BW]),
      .x_next (x_next[l*BW +: BW])
    );
  end

  // The output is the permutation of the new state, taken from the state
  // register once it holds x^{t+1}.
  perm_rxs #(.B(B)) u_perm (
    .in32  (x),
    .out32 (perm_out)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_new     <= 1'b0;
      x_new     <= 1'b0;
      x         <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else if (load) begin
      s_new     <= 1'b0;
      x_new     <= 1'b0;
      x         <= seed_x;
      out_valid <= 1'b0;
    end else begin
      s_new     <= en;
      x_new     <= s_new;
      if (s_new) x <= x_next;
      out_valid <= x_new;
      if (x_new) out <= perm_out;
    end
  end

endmodule
