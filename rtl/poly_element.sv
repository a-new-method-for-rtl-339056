// poly_element: polynomial equivalent model of one lattice period.
//
// Each of the ten output state variables (energy, alpha/beta/gamma in x, y, z)
// is a linear combination of basis functions of the inputs,
//     y_k = sum_{j<NTERM} W[k][j] * phi_j ,   phi_j = v[a_j] * v[b_j],
// where v is the input vector {1.0, entrance state, phase, field, solenoid}.
// Choosing a_j = b_j = 0 gives the constant term w0, b_j = 0 a linear term, and
// other pairs the quadratic terms, so any polynomial of degree two with at most
// NTERM terms can be loaded. The weight form follows the linear basis-function
// model of the paper; restricting the basis to products of two inputs is this
// design's choice. Weights and term selects are written through cfg (regions
// R_WEIGHT and R_BASIS, elem == ELEM_ID) and reset to zero.
//
// Pipeline, one beam state accepted per clock, ELEM_LAT = 4 cycles:
//   1: basis products phi_j (rescaled to Q6.12, saturated)
//   2: weighted terms W*phi (full precision)
//   3: four partial sums of four terms per output
//   4: final sum, rescale, saturate; envelope limit test on the result
// tag and the violation flag travel with the data; out_viol is the incoming
// flag ORed with this element's envelope test.
module poly_element
  import cr_pkg::*;
#(
  parameter int ELEM_ID = 0,
  parameter int TAG_W   = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg,
  input  fx_t              bmax_x,
  input  fx_t              bmax_y,
  input  fx_t              bmax_z,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  logic             in_viol,
  input  state_t           in_state,
  input  setting_t         in_set,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output logic             out_viol,
  output state_t           out_state
);

  localparam int PW = 2 * DW;          // product width
  localparam int SW = PW + 4;          // sum of 16 products

  // Coefficient store
  logic [DW-1:0] w   [NSTATE][NTERM];
  logic [3:0]    sa  [NTERM];
  logic [3:0]    sb  [NTERM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NSTATE; k++)
        for (int j = 0; j < NTERM; j++) w[k][j] <= '0;
      for (int j = 0; j < NTERM; j++) begin
        sa[j] <= '0;
        sb[j] <= '0;
      end
    end else if (cfg.en && cfg.elem == 5'(ELEM_ID)) begin
      if (cfg.region == R_WEIGHT && int'(cfg.idx[7:4]) < NSTATE)
        w[cfg.idx[7:4]][cfg.idx[3:0]] <= cfg.data;
      if (cfg.region == R_BASIS) begin
        sa[cfg.idx[3:0]] <= cfg.data[3:0];
        sb[cfg.idx[3:0]] <= cfg.data[7:4];
      end
    end
  end

  // Input vector
  logic [NVAR-1:0][DW-1:0] v;
  always_comb begin
    v[V_ONE] = DW'(1 << FRAC);
    for (int i = 0; i < NSTATE; i++) v[1+i] = in_state[i];
    v[V_PHI] = in_set.phi;
    v[V_V]   = in_set.v;
    v[V_B]   = in_set.b;
  end

  function automatic logic [DW-1:0] pick(input logic [NVAR-1:0][DW-1:0] vv, input logic [3:0] s);
    return (int'(s) < NVAR) ? vv[s] : '0;
  endfunction

  // Stage 1: basis products
  logic [NTERM-1:0][DW-1:0] phi_q;
  logic             v1, viol1;
  logic [TAG_W-1:0] tag1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phi_q <= '0; v1 <= 1'b0; tag1 <= '0; viol1 <= 1'b0;
    end else begin
      for (int j = 0; j < NTERM; j++) begin
        logic signed [PW-1:0] p;
        p = $signed(pick(v, sa[j])) * $signed(pick(v, sb[j]));
        phi_q[j] <= sat_fx(64'(p >>> FRAC));
      end
      v1 <= in_valid; tag1 <= in_tag; viol1 <= in_viol;
    end
  end

  // Stage 2: weighted terms
  logic signed [PW-1:0] term_q [NSTATE][NTERM];
  logic             v2, viol2;
  logic [TAG_W-1:0] tag2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NSTATE; k++)
        for (int j = 0; j < NTERM; j++) term_q[k][j] <= '0;
      v2 <= 1'b0; tag2 <= '0; viol2 <= 1'b0;
    end else begin
      for (int k = 0; k < NSTATE; k++)
        for (int j = 0; j < NTERM; j++)
          term_q[k][j] <= $signed(w[k][j]) * $signed(phi_q[j]);
      v2 <= v1; tag2 <= tag1; viol2 <= viol1;
    end
  end

  // Stage 3: partial sums of four
  localparam int NGRP = NTERM / 4;
  logic signed [SW-1:0] psum_q [NSTATE][NGRP];
  logic             v3, viol3;
  logic [TAG_W-1:0] tag3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NSTATE; k++)
        for (int g = 0; g < NGRP; g++) psum_q[k][g] <= '0;
      v3 <= 1'b0; tag3 <= '0; viol3 <= 1'b0;
    end else begin
      for (int k = 0; k < NSTATE; k++)
        for (int g = 0; g < NGRP; g++)
          psum_q[k][g] <= SW'(term_q[k][4*g]) + SW'(term_q[k][4*g+1]) +
                          SW'(term_q[k][4*g+2]) + SW'(term_q[k][4*g+3]);
      v3 <= v2; tag3 <= tag2; viol3 <= viol2;
    end
  end

  // Stage 4: final sum, rescale, saturate, envelope test
  state_t res;
  logic   env_viol;
  always_comb begin
    for (int k = 0; k < NSTATE; k++) begin
      logic signed [SW-1:0] s;
      s = '0;
      for (int g = 0; g < NGRP; g++) s += psum_q[k][g];
      res[k] = sat_fx(64'(s >>> FRAC));
    end
  end

  envelope_check u_env (
    .state (res),
    .bmax_x(bmax_x),
    .bmax_y(bmax_y),
    .bmax_z(bmax_z),
    .viol  (env_viol)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_state <= '0; out_valid <= 1'b0; out_tag <= '0; out_viol <= 1'b0;
    end else begin
      out_state <= res;
      out_valid <= v3;
      out_tag   <= tag3;
      out_viol  <= viol3 | env_viol;
    end
  end

endmodule
