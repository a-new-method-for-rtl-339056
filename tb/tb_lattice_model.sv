// tb_lattice_model: loads different random polynomial weights into every
// element of the 14-element model, issues back-to-back evaluations with
// random settings for every element, and checks the state, tag, violation
// flag and arrival cycle at every tap against a chained integer reference.
// Proves that the per-element setting delay lines line up with the beam.
module tb_lattice_model;
  import cr_pkg::*;
  import cr_ref_pkg::*;
  localparam int NE = N_ELEM, TW = 6, N = 40;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  fx_t bx, by, bz;
  logic in_valid;
  logic [TW-1:0] in_tag;
  state_t entrance;
  setting_t [NE-1:0] in_set;
  logic [NE-1:0] tap_valid, tap_viol;
  logic [NE-1:0][TW-1:0] tap_tag;
  state_t [NE-1:0] tap_state;
  int checks = 0, failures = 0, nviol = 0;

  lattice_model #(.TAG_W(TW)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .bmax_x(bx), .bmax_y(by), .bmax_z(bz),
    .in_valid(in_valid), .in_tag(in_tag), .entrance(entrance), .in_set(in_set),
    .tap_valid(tap_valid), .tap_tag(tap_tag), .tap_viol(tap_viol), .tap_state(tap_state));

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  longint w[NE][10][16];
  int a[NE][16], b[NE][16];
  longint exp_st[N][NE][10];
  bit exp_v[N][NE];
  int sent[N];
  int got[NE];

  task automatic wr(input cfg_region_e r, input int e, input int idx, input int data);
    cfg = '{en: 1'b1, region: r, elem: 5'(e), idx: 8'(idx), data: 18'(data)};
    @(posedge clk); #1;
    cfg = '0;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #2;
    for (int k = 0; k < NE; k++)
      if (rst_n && tap_valid[k]) begin
        int n;
        n = got[k];
        checks++;
        if (int'(tap_tag[k]) != n) begin failures++; $display("FAIL tap %0d tag", k); end
        checks++;
        if (cyc - sent[n] != (k + 1) * ELEM_LAT) begin failures++; $display("FAIL tap %0d latency %0d", k, cyc - sent[n]); end
        for (int i = 0; i < 10; i++) begin
          checks++;
          if (longint'($signed(tap_state[k][i])) != exp_st[n][k][i]) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d tap %0d var %0d got %0d exp %0d", n, k, i, $signed(tap_state[k][i]), exp_st[n][k][i]);
          end
        end
        checks++;
        if (tap_viol[k] != exp_v[n][k]) begin failures++; $display("FAIL viol n=%0d tap %0d", n, k); end
        if (tap_viol[k]) nviol++;
        got[k]++;
      end
  end

  initial begin
    cfg = '0; in_valid = 0; in_tag = 0; entrance = '0; in_set = '0;
    bx = 18'(3 * 4096); by = 18'(3 * 4096); bz = 18'(3 * 4096);
    for (int k = 0; k < NE; k++) got[k] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // Near-identity elements: y_k = x_k + small random polynomial terms
    for (int e = 0; e < NE; e++) begin
      for (int j = 0; j < 16; j++) begin
        if (j < 11) begin a[e][j] = j; b[e][j] = 0; end        // 1 and the state (linear)
        else begin a[e][j] = $urandom_range(1, 13); b[e][j] = $urandom_range(0, 13); end
        wr(R_BASIS, e, j, (b[e][j] << 4) | a[e][j]);
      end
      for (int k = 0; k < 10; k++)
        for (int j = 0; j < 16; j++) begin
          w[e][k][j] = (j == k + 1) ? 4096 : longint'($urandom_range(0, 600)) - 300;
          wr(R_WEIGHT, e, k * 16 + j, int'(w[e][k][j]));
        end
    end
    for (int n = 0; n < N; n++) begin
      longint st[10], o[10], s3[3];
      for (int i = 0; i < 10; i++) begin
        st[i] = longint'($urandom_range(0, 4 * 4096)) - 2 * 4096;
        entrance[i] = 18'(st[i]);
      end
      for (int e = 0; e < NE; e++) begin
        for (int i = 0; i < 3; i++) s3[i] = longint'($urandom_range(0, 2 * 4096)) - 4096;
        in_set[e] = '{phi: 18'(s3[0]), v: 18'(s3[1]), b: 18'(s3[2])};
        poly(st, s3, w[e], a[e], b[e], o);
        for (int i = 0; i < 10; i++) begin exp_st[n][e][i] = o[i]; st[i] = o[i]; end
        exp_v[n][e] = ((e > 0) && exp_v[n][e-1]) || (o[2] > 3 * 4096) || (o[5] > 3 * 4096) || (o[8] > 3 * 4096);
      end
      in_valid = 1; in_tag = TW'(n); sent[n] = cyc;
      @(posedge clk); #1;
      in_set = '0; entrance = '0;          // settings must have been captured in the delay lines
      in_valid = 0;
    end
    repeat (NE * ELEM_LAT + 5) @(posedge clk);
    for (int k = 0; k < NE; k++) begin
      checks++;
      if (got[k] != N) begin failures++; $display("FAIL tap %0d saw %0d", k, got[k]); end
    end
    checks++;
    if (nviol == 0) begin failures++; $display("FAIL no envelope violation exercised"); end
    $display("violations seen: %0d", nviol);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
