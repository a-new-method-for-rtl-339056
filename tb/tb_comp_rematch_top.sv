// tb_comp_rematch_top: end-to-end test of the compensation processor at its
// default size (14 elements, population 32).
//
// The lattice model is loaded with a small synthetic beam-dynamics model in
// the polynomial form (per element: energy gain V - phi^2/2, solenoid B
// focusing the transverse beta functions, cavity field and phase acting on
// the longitudinal Twiss parameters). Nominal settings, nominal states after
// every element and their reciprocals are computed here with the integer
// reference model and written in. The test then
//   1. checks that the nominal settings are driven in normal operation and
//      that a monitor pass reproduces the reference beam state at every tap;
//   2. reports a failure of the 11th cavity; the processor optimises periods
//      9..13 with the matching point after period 13 and stops on the
//      generation limit; the compensated settings must be driven out, the
//      failed cavity must be at zero field, the elements outside the zone
//      nominal, and a monitor pass must give a matching-point objective equal
//      to the reported best value and better than doing nothing;
//   3. restores nominal operation, reports the failure again with a
//      reachable fitness target and checks the early stop;
//   4. checks the zone placement for failures near both ends of the lattice
//      and that a failure report during a search is ignored.
// It counts how often each mechanism happens (optimisation start, generation,
// mutation, improvement, envelope-limit rejection, stop on generation limit,
// stop on target, monitor pass, restore) and fails for any that never did.
module tb_comp_rematch_top;
  import cr_pkg::*;
  import cr_ref_pkg::*;
  localparam longint ONE = 4096;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic fail_valid, restore, mon_req;
  logic [4:0] fail_idx;
  setting_t [N_ELEM-1:0] cav_set;
  logic [1:0] mode;
  logic ga_done, hit_target, mon_valid, mon_viol, ev_mutate, ev_improve;
  logic [FIT_W-1:0] best_fit;
  logic [15:0] gen_count;
  state_t [N_ELEM-1:0] mon_state;
  int checks = 0, failures = 0;

  comp_rematch_top dut (.*);

  always #5 clk = ~clk;   // 100 MHz in simulation time; cycles are what is checked

  // ---------------- synthetic model ----------------
  longint w[10][16];
  int a[16], b[16];
  longint nom_set[N_ELEM][3];
  longint nom_st[N_ELEM][10];
  longint inv[N_ELEM][7];
  longint entr[10];

  task automatic wr(input cfg_region_e r, input int e, input int idx, input longint data);
    cfg = '{en: 1'b1, region: r, elem: 5'(e), idx: 8'(idx), data: 18'(data)};
    @(posedge clk); #1;
    cfg = '0;
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  task automatic set_term(input int j, input int va, input int vb);
    a[j] = va; b[j] = vb;
  endtask

  // Beam through the whole lattice for given settings
  task automatic chain(input longint s[N_ELEM][3], output longint o[N_ELEM][10]);
    longint st[10], r[10], s3[3];
    st = entr;
    for (int e = 0; e < N_ELEM; e++) begin
      s3 = s[e];
      poly(st, s3, w, a, b, r);
      o[e] = r;
      st = r;
    end
  endtask

  function automatic longint fx(input real x);
    return longint'($rtoi(x * 4096.0 + (x >= 0 ? 0.5 : -0.5)));
  endfunction

  // ---------------- mechanism counters ----------------
  int n_opt = 0, n_gen = 0, n_mut = 0, n_imp = 0, n_rej = 0, n_stop_gen = 0, n_stop_tgt = 0, n_mon = 0, n_restore = 0;
  logic [15:0] last_gen;
  logic [1:0] last_mode;
  always @(posedge clk) if (rst_n) begin
    if (ev_mutate) n_mut++;
    if (ev_improve) n_imp++;
    if (dut.f_valid && dut.f_fit == '1) n_rej++;
    if (gen_count != last_gen && gen_count != 0) n_gen++;
    if (mode == 2'd1 && last_mode != 2'd1) n_opt++;
    if (mode == 2'd2 && last_mode == 2'd1) begin
      if (hit_target) n_stop_tgt++; else n_stop_gen++;
    end
    if (mode == 2'd0 && last_mode == 2'd2) n_restore++;
    if (mon_valid) n_mon++;
    last_gen  <= gen_count;
    last_mode <= mode;
  end

  task automatic monitor(output longint got[N_ELEM][10]);
    int t;
    @(posedge clk); #1 mon_req = 1;
    @(posedge clk); #1 mon_req = 0;
    t = 0;
    while (!mon_valid && t < 1000) begin @(posedge clk); t++; end
    #1;
    chk(t < 1000, "monitor pass completes");
    chk(t <= N_ELEM * ELEM_LAT + 3, $sformatf("monitor latency %0d cycles", t));
    for (int e = 0; e < N_ELEM; e++)
      for (int i = 0; i < 10; i++) got[e][i] = longint'($signed(mon_state[e][i]));
  endtask

  task automatic wait_done(output int cycles);
    int t;
    t = 0;
    while (mode != 2'd2 && t < 2000000) begin @(posedge clk); t++; end
    cycles = t;
    #1;
  endtask

  initial begin
    #500000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ref_o[N_ELEM][10], got[N_ELEM][10], s_fail[N_ELEM][3], s_out[N_ELEM][3];
    longint obj_fail, obj_comp, st_m[10], nm[10], iv[7];
    int cyc;
    int pos[7];
    pos = '{0, 1, 2, 4, 5, 7, 8};
    cfg = '0; fail_valid = 0; fail_idx = 0; restore = 0; mon_req = 0;
    last_gen = 0; last_mode = 0;

    // Terms: 0 const, 1..8 E ax bx gx ay by gy az (linear), 9 bz, 10 phi, 11 V, 12 B,
    // 13 phi^2, 14 B*bx, 15 B*by ; gz handled through V*bz? no: see weights
    for (int j = 0; j < 16; j++) begin a[j] = 0; b[j] = 0; end
    set_term(1, 1, 0);  set_term(2, 2, 0);  set_term(3, 3, 0);  set_term(4, 5, 0);
    set_term(5, 6, 0);  set_term(6, 8, 0);  set_term(7, 9, 0);
    set_term(8, V_PHI, 0); set_term(9, V_V, 0); set_term(10, V_B, 0);
    set_term(11, V_PHI, V_PHI); set_term(12, V_B, 3); set_term(13, V_B, 6); set_term(14, V_V, 9);
    set_term(15, V_PHI, 9);
    for (int k = 0; k < 10; k++) for (int j = 0; j < 16; j++) w[k][j] = 0;
    // E' = E + V - phi^2/2
    w[S_E][1] = ONE; w[S_E][9] = ONE; w[S_E][11] = -ONE / 2;
    // ax' = ax + (B-1)/4 ; bx' = 1.25 bx - B bx / 4
    w[S_AX][2] = ONE; w[S_AX][10] = ONE / 4; w[S_AX][0] = -ONE / 4;
    w[S_BX][3] = ONE + ONE / 4; w[S_BX][12] = -ONE / 4;
    w[S_AY][4] = ONE; w[S_AY][10] = ONE / 4; w[S_AY][0] = -ONE / 4;
    w[S_BY][5] = ONE + ONE / 4; w[S_BY][13] = -ONE / 4;
    // az' = az + phi/2 + V/5 - 1/10 ; bz' = 0.9 bz + 0.2 V bz + 0.1 phi bz
    w[S_AZ][6] = ONE; w[S_AZ][8] = ONE / 2; w[S_AZ][9] = ONE / 5; w[S_AZ][0] = -ONE / 10;
    w[S_BZ][7] = (ONE * 9) / 10; w[S_BZ][14] = ONE / 5; w[S_BZ][15] = ONE / 10;
    // gammas held constant
    w[S_GX][0] = ONE / 2; w[S_GY][0] = ONE / 2; w[S_GZ][0] = ONE;

    entr = '{fx(3.0), fx(0.5), fx(2.0), fx(0.5), fx(0.55), fx(1.9), fx(0.5), fx(-0.3), fx(1.3), fx(1.0)};
    for (int e = 0; e < N_ELEM; e++) nom_set[e] = '{fx(0.0), fx(0.5), fx(1.0)};
    chain(nom_set, nom_st);
    for (int e = 0; e < N_ELEM; e++)
      for (int k = 0; k < 7; k++) inv[e][k] = (ONE * ONE) / nom_st[e][pos[k]];

    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int e = 0; e < N_ELEM; e++) begin
      for (int j = 0; j < 16; j++) wr(R_BASIS, e, j, longint'((b[j] << 4) | a[j]));
      for (int k = 0; k < 10; k++) for (int j = 0; j < 16; j++) if (w[k][j] != 0) wr(R_WEIGHT, e, k * 16 + j, w[k][j]);
      for (int i = 0; i < 3; i++) wr(R_NOM_SET, e, i, nom_set[e][i]);
      for (int i = 0; i < 10; i++) wr(R_NOM_STATE, e, i, nom_st[e][i]);
      for (int k = 0; k < 7; k++) wr(R_INV, e, k, inv[e][k]);
    end
    for (int i = 0; i < 10; i++) wr(R_ENTRANCE, 0, i, entr[i]);
    for (int p = 0; p < ZONE_LEN; p++) begin
      wr(R_GENE_LO, p, 0, fx(-0.5)); wr(R_GENE_HI, p, 0, fx(0.5));
      wr(R_GENE_LO, p, 1, fx(0.0));  wr(R_GENE_HI, p, 1, fx(1.0));
      wr(R_GENE_LO, p, 2, fx(0.5));  wr(R_GENE_HI, p, 2, fx(1.5));
    end
    wr(R_MISC, 0, 0, fx(2.6)); wr(R_MISC, 0, 1, fx(2.6)); wr(R_MISC, 0, 2, fx(4.0));
    wr(R_MISC, 0, 3, 0); wr(R_MISC, 0, 4, 30); wr(R_MISC, 0, 5, 20);

    // 1. normal operation
    chk(mode == 2'd0, "starts in normal mode");
    for (int e = 0; e < N_ELEM; e++)
      chk(cav_set[e].phi == 18'(nom_set[e][0]) && cav_set[e].v == 18'(nom_set[e][1]) && cav_set[e].b == 18'(nom_set[e][2]),
          $sformatf("nominal setting driven to cavity %0d", e + 1));
    monitor(got);
    for (int e = 0; e < N_ELEM; e++) for (int i = 0; i < 10; i++)
      chk(got[e][i] == nom_st[e][i], $sformatf("monitor nominal e=%0d v=%0d got %0d exp %0d", e, i, got[e][i], nom_st[e][i]));
    $display("nominal exit energy %f MeV", real'(nom_st[N_ELEM-1][0]) / 4096.0);

    // objective with the 11th cavity off and nothing else changed
    s_fail = nom_set; s_fail[10][1] = 0;
    chain(s_fail, ref_o);
    for (int i = 0; i < 10; i++) begin st_m[i] = ref_o[12][i]; nm[i] = nom_st[12][i]; end
    for (int k = 0; k < 7; k++) iv[k] = inv[12][k];
    obj_fail = objective(st_m, nm, iv);
    $display("matching point energy with cavity 11 off: %f MeV (nominal %f)", real'(st_m[0]) / 4096.0, real'(nm[0]) / 4096.0);

    // 2. failure of cavity 11, stop on generation limit
    @(posedge clk); #1 fail_valid = 1; fail_idx = 5'd10;
    @(posedge clk); #1 fail_valid = 0;
    #1;
    chk(dut.zone_first == 5'd8 && dut.match_idx == 5'd12, "zone is periods 9..13, matching point after 13");
    wait_done(cyc);
    $display("optimisation: %0d generations in %0d cycles, best objective %0d (%f), uncompensated %0d (%f)",
             gen_count, cyc, best_fit, real'(best_fit) / 4096.0, obj_fail, real'(obj_fail) / 4096.0);
    chk(mode == 2'd2 && !hit_target && gen_count == 16'd30, "stopped after 30 generations");
    chk(longint'(best_fit) < obj_fail, "compensation beats doing nothing");
    for (int e = 0; e < N_ELEM; e++) begin
      s_out[e] = '{longint'($signed(cav_set[e].phi)), longint'($signed(cav_set[e].v)), longint'($signed(cav_set[e].b))};
      if (e < 8 || e > 12) chk(cav_set[e] == '{18'(nom_set[e][0]), 18'(nom_set[e][1]), 18'(nom_set[e][2])}, "outside zone nominal");
    end
    chk(cav_set[10].v == '0, "failed cavity at zero field");
    chain(s_out, ref_o);
    monitor(got);
    for (int e = 0; e < N_ELEM; e++) for (int i = 0; i < 10; i++)
      chk(got[e][i] == ref_o[e][i], $sformatf("monitor compensated e=%0d v=%0d", e, i));
    for (int i = 0; i < 10; i++) st_m[i] = got[12][i];
    obj_comp = objective(st_m, nm, iv);
    chk(obj_comp == longint'(best_fit), $sformatf("driven settings reproduce best objective %0d vs %0d", obj_comp, best_fit));
    $display("matching point energy after compensation: %f MeV", real'(got[12][0]) / 4096.0);

    // 3. restore, then failure again with a reachable target
    @(posedge clk); #1 restore = 1;
    @(posedge clk); #1 restore = 0;
    #1 chk(mode == 2'd0 && cav_set[10].v == 18'(nom_set[10][1]), "restored nominal");
    wr(R_MISC, 0, 3, (obj_fail + 3 * longint'(best_fit)) / 4);
    @(posedge clk); #1 fail_valid = 1; fail_idx = 5'd10;
    @(posedge clk); #1 fail_valid = 0;
    wait_done(cyc);
    $display("target run: %0d generations, best %0d", gen_count, best_fit);
    chk(hit_target && gen_count < 16'd30, "stopped on fitness target");

    // 4. zone placement at the lattice ends, and a report during a search is ignored
    @(posedge clk); #1 restore = 1;
    @(posedge clk); #1 restore = 0;
    wr(R_MISC, 0, 3, 0); wr(R_MISC, 0, 4, 2);
    @(posedge clk); #1 fail_valid = 1; fail_idx = 5'd13;
    @(posedge clk); #1 fail_valid = 0;
    #1 chk(dut.zone_first == 5'd9 && dut.match_idx == 5'd13, "zone clamped at the lattice exit");
    repeat (5) @(posedge clk);
    #1 fail_valid = 1; fail_idx = 5'd3;
    @(posedge clk); #1 fail_valid = 0;
    #1 chk(mode == 2'd1 && dut.zone_first == 5'd9 && dut.fail_r == 5'd13, "report during a search ignored");
    wait_done(cyc);
    chk(gen_count == 16'd2 && cav_set[13].v == '0, "short search at the exit, last cavity at zero");
    @(posedge clk); #1 restore = 1;
    @(posedge clk); #1 restore = 0;
    @(posedge clk); #1 fail_valid = 1; fail_idx = 5'd1;
    @(posedge clk); #1 fail_valid = 0;
    #1 chk(dut.zone_first == 5'd0 && dut.match_idx == 5'd4, "zone clamped at the lattice entrance");
    wait_done(cyc);
    chk(cav_set[1].v == '0 && cav_set[10].v == 18'(nom_set[10][1]), "only the failed cavity at zero");

    $display("mechanisms: optimisations %0d, generations %0d, mutations %0d, improvements %0d, envelope rejections %0d, stop-on-limit %0d, stop-on-target %0d, monitor passes %0d, restores %0d",
             n_opt, n_gen, n_mut, n_imp, n_rej, n_stop_gen, n_stop_tgt, n_mon, n_restore);
    chk(n_opt >= 2, "optimisation started");
    chk(n_gen > 0, "generations");
    chk(n_mut > 0, "mutation");
    chk(n_imp > 0, "improvement");
    chk(n_rej > 0, "envelope-limit rejection");
    chk(n_stop_gen > 0, "stop on generation limit");
    chk(n_stop_tgt > 0, "stop on fitness target");
    chk(n_mon >= 2, "monitor pass");
    chk(n_restore > 0, "restore");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
