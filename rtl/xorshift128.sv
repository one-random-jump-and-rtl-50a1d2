// xorshift128: Marsaglia's 32-bit xorshift128 generator, one of the three
// embedded PRNGs that can supply the strategy.
//
// State is four 32-bit words (x, y, z, w). One step:
//     t = x ^ (x << 11);  x = y;  y = z;  z = w;
//     w = w ^ (w >> 19) ^ t ^ (t >> 8);   output w
// This is the standard recurrence; the published design names the
// generator but does not detail it.
//
// Interface and timing: on load, x = seed[31:0], y = seed[63:32],
// z = seed[95:64], w = seed[127:96]; an all-zero seed (the one fixed point)
// is replaced by a fixed nonzero one. Each cycle with en high the state
// advances and out is registered with the new w. Reset loads Marsaglia's
// default seed. load has priority over en.
module xorshift128 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [127:0] seed,
  input  logic         en,
  output logic [31:0]  out
);

  localparam logic [127:0] DEFAULT_SEED = {32'd88675123, 32'd521288629,
                                           32'd362436069, 32'd123456789};

  logic [31:0] x, y, z, w;
  logic [31:0] t, w_next;

  always_comb begin
    t      = x ^ (x << 11);
    w_next = w ^ (w >> 19) ^ t ^ (t >> 8);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {w, z, y, x} <= DEFAULT_SEED;
      out          <= '0;
    end else if (load) begin
      {w, z, y, x} <= (seed == '0) ? DEFAULT_SEED : seed;
      out          <= '0;
    end else if (en) begin
      x   <= y;
      y   <= z;
      z   <= w;
      w   <= w_next;
      out <= w_next;
    end
  end

endmodule
