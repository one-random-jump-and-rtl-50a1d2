// lfsr113: L'Ecuyer's four-component combined Tausworthe generator
// LFSR113, one of the three embedded PRNGs that can supply the strategy.
//
// Four 32-bit components z1..z4 each advance by
//     b  = ((z << q) ^ z) >> s;   z = ((z & m) << r) ^ b
// with (q,s,r,m) = (6,13,18,~1), (2,27,2,~7), (13,21,7,~15),
// (3,12,13,~127); the output is z1 ^ z2 ^ z3 ^ z4. The recurrence is the
// standard LFSR113, which the published design names without detailing.
//
// Interface and timing: on load the components take the four seed words
// (z1 in seed[31:0]); a component below its minimum (2, 8, 16, 128) gets
// one bit set to make it valid. Each cycle with en high the state advances
// and out is registered with the new combined word. Reset loads a fixed
// valid seed. load has priority over en.
module lfsr113 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [127:0] seed,
  input  logic         en,
  output logic [31:0]  out
);

  logic [31:0] z1, z2, z3, z4;
  logic [31:0] n1, n2, n3, n4;

  always_comb begin
    n1 = ((z1 & 32'hFFFF_FFFE) << 18) ^ (((z1 << 6)  ^ z1) >> 13);
    n2 = ((z2 & 32'hFFFF_FFF8) << 2)  ^ (((z2 << 2)  ^ z2) >> 27);
    n3 = ((z3 & 32'hFFFF_FFF0) << 7)  ^ (((z3 << 13) ^ z3) >> 21);
    n4 = ((z4 & 32'hFFFF_FF80) << 13) ^ (((z4 << 3)  ^ z4) >> 12);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      z1  <= 32'd987654321;
      z2  <= 32'd987654321;
      z3  <= 32'd987654321;
      z4  <= 32'd987654321;
      out <= '0;
    end else if (load) begin
      z1  <= (seed[31:0]   < 32'd2)   ? (seed[31:0]   | 32'h2)  : seed[31:0];
      z2  <= (seed[63:32]  < 32'd8)   ? (seed[63:32]  | 32'h8)  : seed[63:32];
      z3  <= (seed[95:64]  < 32'd16)  ? (seed[95:64]  | 32'h10) : seed[95:64];
      z4  <= (seed[127:96] < 32'd128) ? (seed[127:96] | 32'h80) : seed[127:96];
      out <= '0;
    end else if (en) begin
      z1  <= n1;
      z2  <= n2;
      z3  <= n3;
      z4  <= n4;
      out <= n1 ^ n2 ^ n3 ^ n4;
    end
  end

endmodule
