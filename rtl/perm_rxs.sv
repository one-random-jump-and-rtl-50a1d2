// perm_rxs: random xorshift permutation applied to the 32-bit state.
//
//     word1 = (in32 >> ((in32 >> 28) + 4)) ^ in32   // random right xorshift
//     word2 = word1 * B                             // low 32 bits kept
//     out32 = (word2 >> 22) ^ word2                 // fixed right xorshift
//
// The random shift moves the state right by 4 to 19 bits, chosen by its own
// top nibble. Each step is a bijection on 32-bit words when B is odd, so the
// whole map permutes the state space. The three steps and the multipliers
// (95 with NEG, 811 with F1) follow the published design; keeping the
// product modulo 2^32 is read from the algorithm's 32-bit words. The
// published prose describes the multiplication modulo 2^31 - 1 and the
// first step as touching "17 to 28" low bits; the algorithm itself, which
// is followed here, multiplies 32-bit words and shifts by 4 to 19 bits.
//
// Interface: in32 in, out32 out, combinational. B is the multiplier.
module perm_rxs #(
  parameter logic [31:0] B = 32'd95
) (
  input  logic [31:0] in32,
  output logic [31:0] out32
);

  logic [4:0]  shamt;
  logic [31:0] word1, word2;

  always_comb begin
    shamt = {1'b0, in32[31:28]} + 5'd4;
    word1 = (in32 >> shamt) ^ in32;
    word2 = word1 * B;
    out32 = (word2 >> 22) ^ word2;
  end

endmodule
