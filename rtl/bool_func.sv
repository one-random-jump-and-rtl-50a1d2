// bool_func: the 8-bit Boolean function f iterated by each ICG block.
//
// FUNC_NEG gives f(x) = ~x (vectorial negation). FUNC_F1 gives the F1
// function, looked up in the 256-entry table of ciprng_pkg. Both are
// purely combinational. The two functions and the F1 values follow the
// published design; building F1 as a constant lookup table is this
// design's choice (a synthesizer turns it into LUT logic).
//
// Interface: x (8 bits) in, fx = f(x) (8 bits) out. No clock.
module bool_func
  import ciprng_pkg::*;
#(
  parameter func_e FUNC = FUNC_NEG
) (
  input  logic [7:0] x,
  output logic [7:0] fx
);

  always_comb begin
    if (FUNC == FUNC_F1) fx = F1_TABLE[x];
    else                 fx = ~x;
  end

endmodule
