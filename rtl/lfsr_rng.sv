// lfsr_rng: bank of NOUT independent xorshift32 generators.
//
// The genetic algorithm needs many random words per clock (one per gene for
// mutation, one per roulette wheel, one for the crossover point). Each output
// word comes from its own 32-bit xorshift register (shifts 13, 17, 5), seeded
// from SEED and its index so that no two streams start equal and none is zero.
// All generators advance together on a clock where en is high; rnd is the
// registered state, so a word is valid the cycle after reset and changes the
// cycle after each en. The paper only says values are produced at random; the
// generator type is this design's choice.
module lfsr_rng #(
  parameter int          NOUT = 4,
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  output logic [NOUT-1:0][31:0]  rnd
);

  function automatic logic [31:0] xs32(input logic [31:0] s);
    logic [31:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  function automatic logic [31:0] seed_of(input int i);
    logic [31:0] s;
    s = SEED ^ (32'h9E37_79B9 * (i + 1));
    s = xs32(s);
    return (s == 32'd0) ? 32'h0000_0001 : s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NOUT; i++) rnd[i] <= seed_of(i);
    end else if (en) begin
      for (int i = 0; i < NOUT; i++) rnd[i] <= xs32(rnd[i]);
    end
  end

endmodule
