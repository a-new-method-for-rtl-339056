// nominal_settings: register store of the control processor.
//
// Holds what the optimiser compares against and what normal operation applies:
//   - nominal setting (phase, cavity field, solenoid field) of every element;
//   - nominal beam state (energy and Twiss) after every element;
//   - reciprocals of the nominal fitted quantities after every element, so a
//     relative error is a multiplication rather than a division;
//   - the beam state at the lattice entrance;
//   - lower and upper bound of every gene (zone position x setting kind);
//   - beta limits, fitness target, generation limit and mutation threshold.
// Keeping settings and nominal Twiss per component follows the original
// design; the reciprocals, bounds and register map are this design's own.
// Writes take effect on the clock edge where cfg.en is high. Reads are
// combinational; tgt_state/tgt_inv are those of element match_idx.
module nominal_settings
  import cr_pkg::*;
#(
  parameter int N_ELEM_P = N_ELEM
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_wr_t                   cfg,
  input  logic [4:0]                match_idx,
  output setting_t [N_ELEM_P-1:0]   nom_set,
  output state_t                    entrance,
  output state_t                    tgt_state,
  output logic [NFIT-1:0][DW-1:0]   tgt_inv,
  output logic [NGENE-1:0][DW-1:0]  gene_lo,
  output logic [NGENE-1:0][DW-1:0]  gene_hi,
  output fx_t                       bmax_x,
  output fx_t                       bmax_y,
  output fx_t                       bmax_z,
  output logic [FIT_W-1:0]          fit_target,
  output logic [15:0]               max_gen,
  output logic [7:0]                mut_thresh
);

  state_t                  nom_state [N_ELEM_P];
  logic [NFIT-1:0][DW-1:0] inv       [N_ELEM_P];

  localparam int EIW = $clog2(N_ELEM_P);
  wire [EIW-1:0] ei = EIW'(cfg.elem);
  wire [EIW-1:0] mi = EIW'(match_idx);
  wire in_lat  = int'(cfg.elem) < N_ELEM_P;
  wire in_zone = int'(cfg.elem) < ZONE_LEN && int'(cfg.idx) < NSET;
  wire [7:0] gidx = 8'(cfg.elem) * 8'(NSET) + cfg.idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nom_set    <= '0;
      entrance   <= '0;
      gene_lo    <= '0;
      gene_hi    <= '0;
      for (int e = 0; e < N_ELEM_P; e++) begin
        nom_state[e] <= '0;
        inv[e]       <= '0;
      end
      bmax_x     <= '1 >> 1;   // largest positive: no limit
      bmax_y     <= '1 >> 1;
      bmax_z     <= '1 >> 1;
      fit_target <= '0;
      max_gen    <= 16'd100;
      mut_thresh <= 8'd8;
    end else if (cfg.en) begin
      unique case (cfg.region)
        R_NOM_SET: if (in_lat) begin
          case (cfg.idx)
            8'd0: nom_set[cfg.elem].phi <= cfg.data;
            8'd1: nom_set[cfg.elem].v   <= cfg.data;
            8'd2: nom_set[cfg.elem].b   <= cfg.data;
            default: ;
          endcase
        end
        R_NOM_STATE: if (in_lat && int'(cfg.idx) < NSTATE) nom_state[ei][cfg.idx] <= cfg.data;
        R_INV:       if (in_lat && int'(cfg.idx) < NFIT)   inv[ei][cfg.idx]       <= cfg.data;
        R_ENTRANCE:  if (int'(cfg.idx) < NSTATE) entrance[cfg.idx] <= cfg.data;
        R_GENE_LO:   if (in_zone) gene_lo[gidx] <= cfg.data;
        R_GENE_HI:   if (in_zone) gene_hi[gidx] <= cfg.data;
        R_MISC: begin
          case (cfg.idx)
            8'd0: bmax_x     <= cfg.data;
            8'd1: bmax_y     <= cfg.data;
            8'd2: bmax_z     <= cfg.data;
            8'd3: fit_target <= FIT_W'(cfg.data);
            8'd4: max_gen    <= cfg.data[15:0];
            8'd5: mut_thresh <= cfg.data[7:0];
            default: ;
          endcase
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    tgt_state = '0;
    tgt_inv   = '0;
    if (int'(match_idx) < N_ELEM_P) begin
      tgt_state = nom_state[mi];
      tgt_inv   = inv[mi];
    end
  end

endmodule
