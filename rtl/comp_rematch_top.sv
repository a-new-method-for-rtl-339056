// comp_rematch_top: control processor for on-line compensation and rematch
// of a failed accelerating cavity.
//
// In normal operation the nominal settings (phase, cavity field, solenoid
// field of every period) are driven to the per-cavity controllers. When a
// cavity failure is reported (fail_valid, fail_idx) the processor fixes a
// compensation zone of ZONE_LEN periods around the failed one (fail_idx-2 ..
// fail_idx+2, clamped to the lattice), and the matching point after the last
// period of the zone. The genetic-algorithm engine then searches settings for
// the zone: each candidate is decoded into a full lattice setting (failed
// cavity at zero field), run through the pipelined polynomial lattice model,
// and scored by the relative error of energy and Twiss at the matching point
// against their nominal values. When the search ends the best settings are
// driven out (mode COMPENSATED) until restore returns to nominal.
// ev_mutate / ev_improve pulse when the search mutates a child or improves
// its best individual.
// mon_req runs one model pass on the settings currently driven and reports
// the beam state after every element (mon_valid, mon_state, mon_viol).
//
// Configuration (model weights, nominal values, bounds, limits) is written
// through cfg, one 18-bit register per clock. Timing: one candidate enters the
// model per clock; a candidate's objective returns 4*(match+1) + 24 cycles
// after issue. The structure (nominal-settings store, lattice model, search
// algorithm, delays, per-cavity controllers outside) follows the original
// control FPGA; register map, zone rule and mode handling are this design's.
module comp_rematch_top
  import cr_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  cfg_wr_t                    cfg,
  input  logic                       fail_valid,
  input  logic [4:0]                 fail_idx,
  input  logic                       restore,
  input  logic                       mon_req,
  output setting_t [N_ELEM-1:0]      cav_set,
  output logic [1:0]                 mode,
  output logic                       ga_done,
  output logic                       hit_target,
  output logic [FIT_W-1:0]           best_fit,
  output logic [15:0]                gen_count,
  output logic                       ev_mutate,
  output logic                       ev_improve,
  output logic                       mon_valid,
  output logic                       mon_viol,
  output state_t [N_ELEM-1:0]        mon_state
);

  localparam int IW    = $clog2(POP);
  localparam int TAG_W = IW + 1;          // MSB set: monitor pass
  localparam logic [1:0] M_NORMAL = 2'd0, M_OPT = 2'd1, M_COMP = 2'd2;

  // ---------------- settings store ----------------
  setting_t [N_ELEM-1:0]   nom_set;
  state_t                  entrance, tgt_state;
  logic [NFIT-1:0][DW-1:0] tgt_inv;
  logic [NGENE-1:0][DW-1:0] gene_lo, gene_hi;
  fx_t                     bmax_x, bmax_y, bmax_z;
  logic [FIT_W-1:0]        fit_target;
  logic [15:0]             max_gen;
  logic [7:0]              mut_thresh;
  logic [4:0]              zone_first, match_idx, fail_r;
  logic                    failed;

  nominal_settings u_nom (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .match_idx(match_idx),
    .nom_set(nom_set), .entrance(entrance), .tgt_state(tgt_state), .tgt_inv(tgt_inv),
    .gene_lo(gene_lo), .gene_hi(gene_hi), .bmax_x(bmax_x), .bmax_y(bmax_y), .bmax_z(bmax_z),
    .fit_target(fit_target), .max_gen(max_gen), .mut_thresh(mut_thresh)
  );

  // ---------------- failure handling and mode ----------------
  logic ga_start, ga_busy;
  logic ga_iss_valid;
  logic [IW-1:0] ga_iss_idx;
  chrom_t ga_iss_chrom, best_chrom;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode       <= M_NORMAL;
      failed     <= 1'b0;
      fail_r     <= '0;
      zone_first <= '0;
      match_idx  <= 5'(ZONE_LEN - 1);
      ga_start   <= 1'b0;
    end else begin
      ga_start <= 1'b0;
      if (fail_valid && mode != M_OPT && int'(fail_idx) < N_ELEM) begin
        failed   <= 1'b1;
        fail_r   <= fail_idx;
        if (int'(fail_idx) < 2) begin
          zone_first <= '0;
          match_idx  <= 5'(ZONE_LEN - 1);
        end else if (int'(fail_idx) > N_ELEM - ZONE_LEN + 2) begin
          zone_first <= 5'(N_ELEM - ZONE_LEN);
          match_idx  <= 5'(N_ELEM - 1);
        end else begin
          zone_first <= fail_idx - 5'd2;
          match_idx  <= fail_idx + 5'd2;
        end
        mode     <= M_OPT;
        ga_start <= 1'b1;
      end else if (mode == M_OPT && ga_done && !ga_start) begin
        mode <= M_COMP;
      end else if (restore && mode != M_OPT) begin
        mode   <= M_NORMAL;
        failed <= 1'b0;
      end
    end
  end

  // Settings driven to the cavities
  chrom_decode u_dec_out (
    .nom_set(nom_set), .chrom(best_chrom), .use_chrom(mode == M_COMP),
    .zone_first(zone_first), .fail_valid(mode == M_COMP), .fail_idx(fail_r),
    .set_out(cav_set)
  );

  // Settings of the candidate being issued
  setting_t [N_ELEM-1:0] cand_set;
  chrom_decode u_dec_cand (
    .nom_set(nom_set), .chrom(ga_iss_chrom), .use_chrom(1'b1),
    .zone_first(zone_first), .fail_valid(failed), .fail_idx(fail_r),
    .set_out(cand_set)
  );

  // ---------------- model issue ----------------
  logic mon_pend;
  logic                      m_valid;
  logic [TAG_W-1:0]          m_tag;
  setting_t [N_ELEM-1:0]     m_set;

  always_comb begin
    m_valid = 1'b0;
    m_tag   = '0;
    m_set   = cav_set;
    if (ga_iss_valid) begin
      m_valid = 1'b1;
      m_tag   = {1'b0, ga_iss_idx};
      m_set   = cand_set;
    end else if (mon_pend && !ga_busy && mode != M_OPT) begin
      m_valid = 1'b1;
      m_tag   = {1'b1, IW'(0)};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mon_pend <= 1'b0;
    else if (mon_req) mon_pend <= 1'b1;
    else if (m_valid && m_tag[TAG_W-1]) mon_pend <= 1'b0;
  end

  logic   [N_ELEM-1:0]            tap_valid, tap_viol;
  logic   [N_ELEM-1:0][TAG_W-1:0] tap_tag;
  state_t [N_ELEM-1:0]            tap_state;

  lattice_model #(.TAG_W(TAG_W)) u_model (
    .clk(clk), .rst_n(rst_n), .cfg(cfg),
    .bmax_x(bmax_x), .bmax_y(bmax_y), .bmax_z(bmax_z),
    .in_valid(m_valid), .in_tag(m_tag), .entrance(entrance), .in_set(m_set),
    .tap_valid(tap_valid), .tap_tag(tap_tag), .tap_viol(tap_viol), .tap_state(tap_state)
  );

  // ---------------- objective at the matching point ----------------
  logic             f_in_valid;
  logic             f_valid;
  logic [TAG_W-1:0] f_tag;
  logic [FIT_W-1:0] f_fit;

  assign f_in_valid = tap_valid[match_idx[3:0]] && !tap_tag[match_idx[3:0]][TAG_W-1];

  fitness_eval #(.TAG_W(TAG_W)) u_fit (
    .clk(clk), .rst_n(rst_n),
    .in_valid(f_in_valid), .in_tag(tap_tag[match_idx[3:0]]), .in_viol(tap_viol[match_idx[3:0]]),
    .in_state(tap_state[match_idx[3:0]]), .tgt_state(tgt_state), .tgt_inv(tgt_inv),
    .out_valid(f_valid), .out_tag(f_tag), .fit(f_fit)
  );

  // ---------------- search ----------------
  ga_engine u_ga (
    .clk(clk), .rst_n(rst_n), .start(ga_start),
    .gene_lo(gene_lo), .gene_hi(gene_hi), .mut_thresh(mut_thresh),
    .fit_target(fit_target), .max_gen(max_gen),
    .iss_valid(ga_iss_valid), .iss_idx(ga_iss_idx), .iss_chrom(ga_iss_chrom),
    .res_valid(f_valid), .res_idx(f_tag[IW-1:0]), .res_fit(f_fit),
    .busy(ga_busy), .done(ga_done), .hit_target(hit_target),
    .best_chrom(best_chrom), .best_fit(best_fit), .gen_count(gen_count),
    .ev_mutate(ev_mutate), .ev_improve(ev_improve)
  );

  // ---------------- monitor capture ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mon_state <= '0;
      mon_valid <= 1'b0;
      mon_viol  <= 1'b0;
    end else begin
      mon_valid <= 1'b0;
      for (int k = 0; k < N_ELEM; k++)
        if (tap_valid[k] && tap_tag[k][TAG_W-1]) mon_state[k] <= tap_state[k];
      if (tap_valid[N_ELEM-1] && tap_tag[N_ELEM-1][TAG_W-1]) begin
        mon_valid <= 1'b1;
        mon_viol  <= tap_viol[N_ELEM-1];
      end
    end
  end

endmodule
