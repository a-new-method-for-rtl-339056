// lattice_model: equivalent model of the whole lattice as a pipeline.
//
// N_ELEM poly_element stages are chained, one per lattice period; the exit
// state of one is the entrance state of the next. An evaluation starts with
// in_valid and carries a tag; the settings of element k enter through a
// delay line of k*ELEM_LAT cycles so that they meet the beam state of their own
// evaluation. A new evaluation can start every clock, so once the pipeline is
// full one candidate lattice is finished per clock.
//
// Timing: the state after element k (tap k) appears (k+1)*ELEM_LAT cycles after
// in_valid, with tap_valid[k] and tap_tag[k]. tap_viol[k] is set if an
// envelope limit was exceeded at element k or earlier. With the default 14
// elements the lattice exit appears after 56 cycles (280 ns at 200 MHz).
module lattice_model
  import cr_pkg::*;
#(
  parameter int N_ELEM_P = N_ELEM,
  parameter int TAG_W    = 6
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  cfg_wr_t                        cfg,
  input  fx_t                            bmax_x,
  input  fx_t                            bmax_y,
  input  fx_t                            bmax_z,
  input  logic                           in_valid,
  input  logic [TAG_W-1:0]               in_tag,
  input  state_t                         entrance,
  input  setting_t [N_ELEM_P-1:0]        in_set,
  output logic     [N_ELEM_P-1:0]        tap_valid,
  output logic     [N_ELEM_P-1:0][TAG_W-1:0] tap_tag,
  output logic     [N_ELEM_P-1:0]        tap_viol,
  output state_t   [N_ELEM_P-1:0]        tap_state
);

  for (genvar k = 0; k < N_ELEM_P; k++) begin : g_elem
    setting_t         set_d;
    logic             v_in, viol_in;
    logic [TAG_W-1:0] tag_in;
    state_t           st_in;

    delay_line #(.W($bits(setting_t)), .DEPTH(k * ELEM_LAT)) u_dly (
      .clk(clk), .rst_n(rst_n), .d(in_set[k]), .q(set_d)
    );

    if (k == 0) begin : g_first
      assign v_in    = in_valid;
      assign tag_in  = in_tag;
      assign viol_in = 1'b0;
      assign st_in   = entrance;
    end else begin : g_next
      assign v_in    = tap_valid[k-1];
      assign tag_in  = tap_tag[k-1];
      assign viol_in = tap_viol[k-1];
      assign st_in   = tap_state[k-1];
    end

    poly_element #(.ELEM_ID(k), .TAG_W(TAG_W)) u_el (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg      (cfg),
      .bmax_x   (bmax_x),
      .bmax_y   (bmax_y),
      .bmax_z   (bmax_z),
      .in_valid (v_in),
      .in_tag   (tag_in),
      .in_viol  (viol_in),
      .in_state (st_in),
      .in_set   (set_d),
      .out_valid(tap_valid[k]),
      .out_tag  (tap_tag[k]),
      .out_viol (tap_viol[k]),
      .out_state(tap_state[k])
    );
  end

endmodule
