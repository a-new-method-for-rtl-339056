// isqrt_pipe: pipelined integer square root, root = floor(sqrt(x)).
//
// One result bit per stage, most significant first: stage i tries setting bit
// i of the partial root and keeps it if the square still does not exceed x.
// OUT_W = IN_W/2 stages, so the latency is OUT_W cycles and a new operand is
// accepted every clock. A sideband word (valid, tag, flags) travels with each
// operand and leaves with its root.
module isqrt_pipe #(
  parameter int IN_W = 40,
  parameter int SB_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [IN_W-1:0]   x,
  input  logic [SB_W-1:0]   sb_in,
  output logic [IN_W/2-1:0] root,
  output logic [SB_W-1:0]   sb_out
);

  localparam int OUT_W = IN_W / 2;

  logic [OUT_W:0][IN_W-1:0]  xs;
  logic [OUT_W:0][OUT_W-1:0] rs;
  logic [OUT_W:0][SB_W-1:0]  sbs;

  assign xs[0]  = x;
  assign rs[0]  = '0;
  assign sbs[0] = sb_in;

  for (genvar s = 0; s < OUT_W; s++) begin : g_st
    localparam int BIT = OUT_W - 1 - s;
    logic [OUT_W-1:0] trial;
    logic [IN_W-1:0]  sq;
    always_comb begin
      trial = rs[s] | (OUT_W'(1) << BIT);
      sq    = IN_W'(trial) * IN_W'(trial);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[s+1] <= '0; rs[s+1] <= '0; sbs[s+1] <= '0;
      end else begin
        xs[s+1]  <= xs[s];
        rs[s+1]  <= (sq <= xs[s]) ? trial : rs[s];
        sbs[s+1] <= sbs[s];
      end
    end
  end

  assign root   = rs[OUT_W];
  assign sb_out = sbs[OUT_W];

endmodule
