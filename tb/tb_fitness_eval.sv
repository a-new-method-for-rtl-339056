// tb_fitness_eval: streams random matching-point states (one per clock, with
// gaps) against random nominal values and reciprocals, and compares every
// objective value with the integer reference (relative errors, quadratic sum,
// floor square root). Also checks the 24-cycle latency, tag transport and the
// worst value for envelope violators.
module tb_fitness_eval;
  import cr_pkg::*;
  import cr_ref_pkg::*;
  localparam int TW = 6, N = 400, LAT = 24;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_viol, out_valid;
  logic [TW-1:0] in_tag, out_tag;
  state_t in_state, tgt_state;
  logic [NFIT-1:0][DW-1:0] tgt_inv;
  logic [FIT_W-1:0] fit;
  int checks = 0, failures = 0;

  fitness_eval #(.TAG_W(TW)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  longint exp_f[N];
  int sent[N];
  int got = 0;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #2;
    if (rst_n && out_valid) begin
      checks++;
      if (int'(out_tag) != got % 64) begin failures++; $display("FAIL tag"); end
      checks++;
      if (cyc - sent[got] != LAT) begin failures++; $display("FAIL latency %0d", cyc - sent[got]); end
      checks++;
      if (longint'(fit) != exp_f[got]) begin failures++; $display("FAIL n=%0d fit %0d exp %0d", got, fit, exp_f[got]); end
      got++;
    end
  end

  initial begin
    longint nom[10], inv[7], st[10];
    in_valid = 0; in_viol = 0; in_tag = 0; in_state = '0;
    for (int i = 0; i < 10; i++) begin
      nom[i] = longint'($urandom_range(0, 8 * 4096)) - 4 * 4096;
      tgt_state[i] = 18'(nom[i]);
    end
    for (int k = 0; k < 7; k++) begin
      inv[k] = longint'($urandom_range(0, 8 * 4096)) - 4 * 4096;
      tgt_inv[k] = 18'(inv[k]);
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < N; n++) begin
      bit v;
      int spread;
      spread = (n < 100) ? 64 : ((n < 300) ? 4096 : 60000);   // small, medium, saturating errors
      for (int i = 0; i < 10; i++) begin
        st[i] = sat(nom[i] + longint'($urandom_range(0, 2 * spread)) - spread);
        in_state[i] = 18'(st[i]);
      end
      v = ($urandom_range(0, 7) == 0);
      exp_f[n] = v ? 64'hFFFFF : objective(st, nom, inv);
      in_valid = 1; in_viol = v; in_tag = TW'(n); sent[n] = cyc;
      @(posedge clk); #1;
      in_valid = 0;
      if (n % 5 == 0) begin @(posedge clk); #1; end
    end
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (got != N) begin failures++; $display("FAIL got %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
