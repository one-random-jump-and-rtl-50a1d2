// icg_block: one 8-bit generalized chaotic iteration (ICG) step.
//
// The strategy byte s is a set of components, bit i of s standing for
// component i. Each component named in s takes the value of the same
// component of f(x); every other component keeps its value:
//     x_next[i] = s[i] ? f(x)[i] : x[i]
// The rule is the general formulation of chaotic iterations used by the
// generator. The mapping from set elements to bit positions (element i+1
// <-> bit i) is this design's choice.
//
// Interface: x and s (8 bits each) in, x_next (8 bits) out. Combinational.
module icg_block
  import ciprng_pkg::*;
#(
  parameter func_e FUNC = FUNC_NEG
) (
  input  logic [7:0] x,
  input  logic [7:0] s,
  output logic [7:0] x_next
);

  logic [7:0] fx;

  bool_func #(.FUNC(FUNC)) u_f (
    .x  (x),
    .fx (fx)
  );

  always_comb begin
    x_next = (s & fx) | (~s & x);
  end

endmodule
