// tb_poly_element: loads random weights and term selects into one element
// (plus decoy writes addressed to another element), streams random beam
// states and settings one per clock, and compares every output, tag and
// violation flag with the integer reference model, ELEM_LAT cycles later.
module tb_poly_element;
  import cr_pkg::*;
  import cr_ref_pkg::*;
  localparam int ID = 3, TW = 6, N = 300;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  fx_t bx, by, bz;
  logic in_valid, in_viol, out_valid, out_viol;
  logic [TW-1:0] in_tag, out_tag;
  state_t in_state, out_state;
  setting_t in_set;
  int checks = 0, failures = 0, nviol = 0;

  poly_element #(.ELEM_ID(ID), .TAG_W(TW)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .bmax_x(bx), .bmax_y(by), .bmax_z(bz),
    .in_valid(in_valid), .in_tag(in_tag), .in_viol(in_viol), .in_state(in_state), .in_set(in_set),
    .out_valid(out_valid), .out_tag(out_tag), .out_viol(out_viol), .out_state(out_state));

  always #5 clk = ~clk;

  longint w[10][16];
  int a[16], b[16];
  longint exp_st [N][10];
  bit     exp_v  [N];
  int     sent_cycle [N];
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic wr(input cfg_region_e r, input int e, input int idx, input int data);
    cfg = '{en: 1'b1, region: r, elem: 5'(e), idx: 8'(idx), data: 18'(data)};
    @(posedge clk); #1;
    cfg = '0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker
  int got = 0;
  always @(posedge clk) begin
    #2;
    if (rst_n && out_valid) begin
      longint o[10];
      int t;
      t = int'(out_tag);
      checks++;
      if (cyc - sent_cycle[got] != ELEM_LAT) begin failures++; $display("FAIL latency %0d", cyc - sent_cycle[got]); end
      checks++;
      if (t != (got % 64)) begin failures++; $display("FAIL tag %0d vs %0d", t, got); end
      for (int k = 0; k < 10; k++) begin
        checks++;
        if (longint'($signed(out_state[k])) != exp_st[got][k]) begin
          failures++;
          $display("FAIL item %0d out %0d got %0d exp %0d", got, k, $signed(out_state[k]), exp_st[got][k]);
        end
      end
      checks++;
      if (out_viol != exp_v[got]) begin failures++; $display("FAIL viol item %0d", got); end
      if (out_viol) nviol++;
      got++;
    end
  end

  initial begin
    cfg = '0; in_valid = 0; in_viol = 0; in_tag = 0; in_state = '0; in_set = '0;
    bx = 18'(3 * 4096); by = 18'(3 * 4096); bz = 18'(3 * 4096);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 10; k++)
      for (int j = 0; j < 16; j++) begin
        w[k][j] = longint'($urandom_range(0, 4096)) - 2048;
        wr(R_WEIGHT, ID, k * 16 + j, int'(w[k][j]));
        wr(R_WEIGHT, ID + 1, k * 16 + j, 5000);          // decoy
      end
    for (int j = 0; j < 16; j++) begin
      a[j] = (j == 0) ? 0 : $urandom_range(0, 13);
      b[j] = (j == 0) ? 0 : ((j < 8) ? 0 : $urandom_range(0, 13));
      wr(R_BASIS, ID, j, (b[j] << 4) | a[j]);
      wr(R_BASIS, ID - 1, j, 8'h77);                    // decoy
    end
    for (int n = 0; n < N; n++) begin
      longint st[10], s3[3], o[10];
      bit iv;
      for (int i = 0; i < 10; i++) begin
        st[i] = longint'($urandom_range(0, 8 * 4096)) - 4 * 4096;
        in_state[i] = 18'(st[i]);
      end
      for (int i = 0; i < 3; i++) s3[i] = longint'($urandom_range(0, 4 * 4096)) - 2 * 4096;
      in_set = '{phi: 18'(s3[0]), v: 18'(s3[1]), b: 18'(s3[2])};
      iv = ($urandom_range(0, 9) == 0);
      poly(st, s3, w, a, b, o);
      for (int k = 0; k < 10; k++) exp_st[n][k] = o[k];
      exp_v[n] = iv || (o[2] > 3 * 4096) || (o[5] > 3 * 4096) || (o[8] > 3 * 4096);
      in_valid = 1; in_viol = iv; in_tag = TW'(n);
      sent_cycle[n] = cyc;
      @(posedge clk); #1;
      in_valid = 0;
      if (n % 7 == 0) begin @(posedge clk); #1; end
    end
    repeat (10) @(posedge clk);
    checks++;
    if (got != N) begin failures++; $display("FAIL got %0d of %0d", got, N); end
    checks++;
    if (nviol == 0) begin failures++; $display("FAIL no violation seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
