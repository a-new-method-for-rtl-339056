// delay_line: W-bit shift register of DEPTH stages.
//
// Used to keep data that belongs to one beam evaluation (element settings,
// tags) in step with the lattice-model pipeline. q equals d from DEPTH clocks
// earlier; with DEPTH = 0 it is a wire. Stages reset to zero. The original
// control FPGA shows delay blocks between its settings store, model and
// optimiser; their depth is fixed here by the instantiating block.
module delay_line #(
  parameter int W     = 8,
  parameter int DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_sr
    logic [DEPTH-1:0][W-1:0] sr;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) sr <= '0;
      else begin
        sr[0] <= d;
        for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[DEPTH-1];
  end

endmodule
