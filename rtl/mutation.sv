// mutation: per-gene random replacement within bounds.
//
// Gene g uses random word rnd[g]: if force is high, or its low byte is below
// thresh (probability thresh/256), the gene is replaced by
//     lo[g] + ((rnd[g][31:14] * (hi[g] - lo[g])) >> 18),
// a uniform value in [lo[g], hi[g]); otherwise it passes unchanged. With force
// high the block draws a whole random chromosome, which is how the initial
// population is produced. Bounds keep every setting inside the range where
// the equivalent model is valid. Signed Q6.12 genes; lo <= hi is assumed.
// Purely combinational.
module mutation #(
  parameter int NGENE = 15,
  parameter int GW    = 18
) (
  input  logic [NGENE-1:0][GW-1:0] in_chrom,
  input  logic [NGENE-1:0][31:0]   rnd,
  input  logic [NGENE-1:0][GW-1:0] lo,
  input  logic [NGENE-1:0][GW-1:0] hi,
  input  logic [7:0]               thresh,
  input  logic                     force_all,
  output logic [NGENE-1:0][GW-1:0] out_chrom,
  output logic [NGENE-1:0]         mutated
);

  always_comb begin
    for (int g = 0; g < NGENE; g++) begin
      logic [GW:0]      span;
      logic [2*GW+1:0]  scaled;
      logic [GW-1:0]    offs;
      span   = (GW+1)'($signed(hi[g]) - $signed(lo[g]));
      scaled = (2*GW+2)'(rnd[g][31:14]) * (2*GW+2)'(span);
      offs   = scaled[2*GW-1:GW];
      mutated[g]   = force_all || (rnd[g][7:0] < thresh);
      out_chrom[g] = mutated[g] ? GW'(lo[g] + offs) : in_chrom[g];
    end
  end

endmodule
