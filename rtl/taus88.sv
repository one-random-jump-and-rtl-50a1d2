// taus88: L'Ecuyer's combined Tausworthe generator Taus88, one of the
// three embedded PRNGs that can supply the strategy.
//
// Three 32-bit components z1..z3 each advance by
//     b  = ((z << q) ^ z) >> s;   z = ((z & m) << r) ^ b
// with (q,s,r,m) = (13,19,12,~1), (2,25,4,~7), (3,11,17,~15); the output is
// z1 ^ z2 ^ z3. The recurrence is the standard Taus88, not detailed in the
// published design, which only names the generator.
//
// Interface and timing: on load the components take seed[31:0],
// seed[63:32], seed[95:64]. seed[127:96] is unused: the port is 128 bits
// wide so that all three generators share one interface. A component below
// its minimum (2, 8, 16) gets one bit set to make it valid. Each cycle with en high the state advances
// and out is registered with the new z1^z2^z3, so out changes one cycle
// after en. Reset loads a fixed valid seed. load has priority over en.
module taus88 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [127:0] seed,
  input  logic         en,
  output logic [31:0]  out
);

  logic [31:0] z1, z2, z3;
  logic [31:0] n1, n2, n3;

  always_comb begin
    n1 = ((z1 & 32'hFFFF_FFFE) << 12) ^ (((z1 << 13) ^ z1) >> 19);
    n2 = ((z2 & 32'hFFFF_FFF8) << 4)  ^ (((z2 << 2)  ^ z2) >> 25);
    n3 = ((z3 & 32'hFFFF_FFF0) << 17) ^ (((z3 << 3)  ^ z3) >> 11);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      z1  <= 32'd12345;
      z2  <= 32'd12345;
      z3  <= 32'd12345;
      out <= '0;
    end else if (load) begin
      z1  <= (seed[31:0]   < 32'd2)  ? (seed[31:0]   | 32'h2)  : seed[31:0];
      z2  <= (seed[63:32]  < 32'd8)  ? (seed[63:32]  | 32'h8)  : seed[63:32];
      z3  <= (seed[95:64]  < 32'd16) ? (seed[95:64]  | 32'h10) : seed[95:64];
      out <= '0;
    end else if (en) begin
      z1  <= n1;
      z2  <= n2;
      z3  <= n3;
      out <= n1 ^ n2 ^ n3;
    end
  end

endmodule
