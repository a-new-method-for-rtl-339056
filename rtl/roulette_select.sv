// roulette_select: roulette-wheel choice of one individual.
//
// Each individual owns a slice of a wheel as wide as its score; cum holds the
// inclusive running sums of the scores, so cum[POP-1] is the wheel's size.
// A random word picks the point r = (rnd * total) >> 32 in [0, total), and the
// chosen index is the number of entries whose running sum does not exceed r,
// i.e. the slice that contains r. Scoring (worst objective minus own objective,
// so limit violators own no slice) is done by the caller. If every score is
// zero the low bits of rnd pick uniformly. Purely combinational.
module roulette_select #(
  parameter int POP   = 32,
  parameter int CUM_W = 32
) (
  input  logic [POP-1:0][CUM_W-1:0] cum,
  input  logic [31:0]               rnd,
  output logic [$clog2(POP)-1:0]    idx
);

  localparam int IW = $clog2(POP);

  logic [CUM_W+31:0] prod;
  logic [CUM_W-1:0]  r;
  logic [IW:0]       cnt;

  always_comb begin
    prod = (CUM_W+32)'(rnd) * (CUM_W+32)'(cum[POP-1]);
    r    = prod[CUM_W+31:32];
    cnt  = '0;
    for (int i = 0; i < POP; i++)
      if (cum[i] <= r) cnt = cnt + 1'b1;
    if (cum[POP-1] == '0) idx = rnd[IW-1:0];
    else                  idx = cnt[IW-1:0];
  end

endmodule
