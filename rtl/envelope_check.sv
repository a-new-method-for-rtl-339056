// envelope_check: beam-envelope limit test for one beam state.
//
// The optimiser rejects candidate settings whose beam envelope grows beyond a
// limit anywhere in the lattice. The envelope is sqrt(beta * emittance); the
// emittance is not part of the model state, so the limit is applied to the
// beta functions directly, which avoids a square root. viol is high when
// beta_x > bmax_x, beta_y > bmax_y or beta_z > bmax_z (signed Q6.12 compare).
// Purely combinational.
module envelope_check
  import cr_pkg::*;
(
  input  state_t state,
  input  fx_t    bmax_x,
  input  fx_t    bmax_y,
  input  fx_t    bmax_z,
  output logic   viol
);

  always_comb begin
    viol = ($signed(state[S_BX]) > bmax_x) ||
           ($signed(state[S_BY]) > bmax_y) ||
           ($signed(state[S_BZ]) > bmax_z);
  end

endmodule
