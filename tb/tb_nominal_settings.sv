// tb_nominal_settings: checks reset values, then writes every region with
// random data (plus out-of-range writes that must be ignored) and reads
// everything back, including the matching-point selection of nominal state
// and reciprocals.
module tb_nominal_settings;
  import cr_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic [4:0] match_idx;
  setting_t [N_ELEM-1:0] nom_set;
  state_t entrance, tgt_state;
  logic [NFIT-1:0][DW-1:0] tgt_inv;
  logic [NGENE-1:0][DW-1:0] gene_lo, gene_hi;
  fx_t bmax_x, bmax_y, bmax_z;
  logic [FIT_W-1:0] fit_target;
  logic [15:0] max_gen;
  logic [7:0] mut_thresh;
  int checks = 0, failures = 0;

  nominal_settings dut (.*);

  always #5 clk = ~clk;

  int ms[N_ELEM][3], st[N_ELEM][10], iv[N_ELEM][7], en_s[10], lo[NGENE], hi[NGENE], misc[6];

  task automatic wr(input cfg_region_e r, input int e, input int idx, input int data);
    cfg = '{en: 1'b1, region: r, elem: 5'(e), idx: 8'(idx), data: 18'(data)};
    @(posedge clk); #1;
    cfg = '0;
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0; match_idx = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(nom_set == '0 && entrance == '0, "reset clears settings");
    chk(max_gen == 16'd100 && mut_thresh == 8'd8 && bmax_x == 18'h1ffff, "reset defaults");
    for (int e = 0; e < N_ELEM; e++) begin
      for (int i = 0; i < 3; i++) begin ms[e][i] = $urandom_range(0, 262143); wr(R_NOM_SET, e, i, ms[e][i]); end
      for (int i = 0; i < 10; i++) begin st[e][i] = $urandom_range(0, 262143); wr(R_NOM_STATE, e, i, st[e][i]); end
      for (int i = 0; i < 7; i++) begin iv[e][i] = $urandom_range(0, 262143); wr(R_INV, e, i, iv[e][i]); end
    end
    for (int i = 0; i < 10; i++) begin en_s[i] = $urandom_range(0, 262143); wr(R_ENTRANCE, 0, i, en_s[i]); end
    for (int g = 0; g < NGENE; g++) begin
      lo[g] = $urandom_range(0, 262143); wr(R_GENE_LO, g / 3, g % 3, lo[g]);
      hi[g] = $urandom_range(0, 262143); wr(R_GENE_HI, g / 3, g % 3, hi[g]);
    end
    for (int i = 0; i < 6; i++) begin misc[i] = $urandom_range(0, 255); wr(R_MISC, 0, i, misc[i]); end
    // writes outside the map
    wr(R_NOM_SET, N_ELEM, 0, 1234);
    wr(R_NOM_STATE, 2, 12, 1234);
    wr(R_GENE_LO, ZONE_LEN, 0, 1234);
    wr(R_INV, 1, 7, 1234);
    for (int e = 0; e < N_ELEM; e++) begin
      chk(nom_set[e].phi == 18'(ms[e][0]) && nom_set[e].v == 18'(ms[e][1]) && nom_set[e].b == 18'(ms[e][2]),
          $sformatf("nominal setting %0d", e));
      match_idx = 5'(e);
      #1;
      for (int i = 0; i < 10; i++) chk(tgt_state[i] == 18'(st[e][i]), $sformatf("state %0d.%0d", e, i));
      for (int i = 0; i < 7; i++) chk(tgt_inv[i] == 18'(iv[e][i]), $sformatf("inv %0d.%0d", e, i));
    end
    match_idx = 5'd20; #1;
    chk(tgt_state == '0, "out-of-range match index reads zero");
    for (int i = 0; i < 10; i++) chk(entrance[i] == 18'(en_s[i]), "entrance");
    for (int g = 0; g < NGENE; g++) chk(gene_lo[g] == 18'(lo[g]) && gene_hi[g] == 18'(hi[g]), $sformatf("gene bound %0d", g));
    chk(bmax_x == 18'(misc[0]) && bmax_y == 18'(misc[1]) && bmax_z == 18'(misc[2]), "beta limits");
    chk(fit_target == 20'(misc[3]) && max_gen == 16'(misc[4]) && mut_thresh == 8'(misc[5]), "GA limits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
