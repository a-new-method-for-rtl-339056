// crossover: single-point crossover of two chromosomes.
//
// Genes [0, point) of child ca come from parent pa and genes [point, NGENE)
// from pb; child cb gets the opposite halves. point = 0 or >= NGENE copies the
// parents unchanged. Cutting only at gene boundaries keeps every gene a valid
// setting. Purely combinational.
module crossover #(
  parameter int NGENE = 15,
  parameter int GW    = 18
) (
  input  logic [NGENE-1:0][GW-1:0]   pa,
  input  logic [NGENE-1:0][GW-1:0]   pb,
  input  logic [$clog2(NGENE+1)-1:0] point,
  output logic [NGENE-1:0][GW-1:0]   ca,
  output logic [NGENE-1:0][GW-1:0]   cb
);

  always_comb begin
    for (int g = 0; g < NGENE; g++) begin
      if (g < int'(point)) begin
        ca[g] = pa[g];
        cb[g] = pb[g];
      end else begin
        ca[g] = pb[g];
        cb[g] = pa[g];
      end
    end
  end

endmodule
