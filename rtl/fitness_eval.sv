// fitness_eval: objective function of the compensation search.
//
// For the beam state at the matching point it forms the relative error of each
// fitted quantity against its nominal value (energy, alpha and beta in x, y,
// z), e_k = (y_k - n_k) * (1/n_k), and returns sqrt(sum_k e_k^2), the square
// root of the quadratic sum of relative errors. The reciprocals 1/n_k come
// precomputed from the settings store, so no divider is needed. A candidate
// that broke an envelope limit (in_viol) gets the worst value FIT_MAX.
//
// Formats: inputs Q6.12; e_k saturated to Q6.12; result unsigned Q8.12 in
// FIT_W = 20 bits. Pipeline: difference, scaling, squaring, sum (4 cycles),
// then a 20-stage square root: LATENCY = 24 cycles, one result per clock.
// Leaving the beam phase out of the objective is this design's choice (the
// model state has no phase).
module fitness_eval
  import cr_pkg::*;
#(
  parameter int TAG_W = 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic                    in_viol,
  input  state_t                  in_state,
  input  state_t                  tgt_state,
  input  logic [NFIT-1:0][DW-1:0] tgt_inv,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output logic [FIT_W-1:0]        fit
);

  localparam int SQ_W    = 2 * DW;
  localparam int SUM_W   = 2 * FIT_W;   // 40-bit radicand, Q16.24
  localparam int SB_W    = TAG_W + 2;

  typedef struct packed {
    logic             valid;
    logic             viol;
    logic [TAG_W-1:0] tag;
  } sb_t;

  sb_t sb0, sb1, sb2, sb3, sb4, sb_o;

  assign sb0 = '{valid: in_valid, viol: in_viol, tag: in_tag};

  logic signed [DW:0]    d_q  [NFIT];
  logic [DW-1:0]         e_q  [NFIT];
  logic [SQ_W-1:0]       sq_q [NFIT];
  logic [SUM_W-1:0]      sum_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NFIT; k++) begin
        d_q[k] <= '0; e_q[k] <= '0; sq_q[k] <= '0;
      end
      sum_q <= '0;
      sb1 <= '0; sb2 <= '0; sb3 <= '0; sb4 <= '0;
    end else begin
      // 1: difference to nominal
      for (int k = 0; k < NFIT; k++)
        d_q[k] <= (DW+1)'($signed(in_state[fit_pos(k)])) - (DW+1)'($signed(tgt_state[fit_pos(k)]));
      // 2: relative error
      for (int k = 0; k < NFIT; k++) begin
        logic signed [2*DW:0] p;
        p = d_q[k] * $signed(tgt_inv[k]);
        e_q[k] <= sat_fx(64'(p >>> FRAC));
      end
      // 3: square
      for (int k = 0; k < NFIT; k++)
        sq_q[k] <= SQ_W'($signed(e_q[k]) * $signed(e_q[k]));
      // 4: sum
      begin
        logic [SUM_W-1:0] s;
        s = '0;
        for (int k = 0; k < NFIT; k++) s += SUM_W'(sq_q[k]);
        sum_q <= s;
      end
      sb1 <= sb0; sb2 <= sb1; sb3 <= sb2; sb4 <= sb3;
    end
  end

  logic [FIT_W-1:0] root;

  isqrt_pipe #(.IN_W(SUM_W), .SB_W(SB_W)) u_sqrt (
    .clk   (clk),
    .rst_n (rst_n),
    .x     (sum_q),
    .sb_in (sb4),
    .root  (root),
    .sb_out(sb_o)
  );

  assign out_valid = sb_o.valid;
  assign out_tag   = sb_o.tag;
  assign fit       = sb_o.viol ? '1 : root;

endmodule
