// tb_ga_engine: runs the genetic-algorithm engine against a behavioural
// evaluator in the testbench (objective = scaled distance of the genes from a
// hidden target, some individuals flagged as envelope violators, fixed
// latency). Checks: every issued gene within its bounds, full generations of
// distinct slots, elite re-issued in slot 0, best value equal to the minimum
// ever returned and to the objective of best_chrom, monotone improvement,
// termination by generation count and by fitness target, and that mutation
// and improvement actually happen.
module tb_ga_engine;
  import cr_pkg::*;
  localparam int LAT = 9;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NGENE-1:0][DW-1:0] gene_lo, gene_hi;
  logic [7:0] mut_thresh;
  logic [FIT_W-1:0] fit_target;
  logic [15:0] max_gen;
  logic iss_valid, res_valid, busy, done, hit_target, ev_mutate, ev_improve;
  logic [4:0] iss_idx, res_idx;
  chrom_t iss_chrom, best_chrom;
  logic [FIT_W-1:0] res_fit, best_fit;
  logic [15:0] gen_count;
  int checks = 0, failures = 0;

  ga_engine dut (.*);

  always #5 clk = ~clk;

  longint tgt[NGENE];

  function automatic longint objective(input chrom_t c);
    longint s;
    s = 0;
    if ($signed(c[0]) > 18'sd3000) return 64'hFFFFF;     // envelope violator
    for (int g = 0; g < NGENE; g++) begin
      longint d;
      d = longint'($signed(c[g])) - tgt[g];
      s += (d < 0) ? -d : d;
    end
    return (s > 64'hFFFFE) ? 64'hFFFFE : s;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // Behavioural evaluator with fixed latency
  int   q_idx [$];
  longint q_fit [$];
  int   q_due [$];
  int   cyc = 0;
  longint min_seen;
  int n_mut = 0, n_imp = 0, n_viol = 0, n_iss = 0;
  bit seen_slot [32];
  chrom_t prev_best;
  bit first_gen;

  always @(posedge clk) begin
    cyc++;
    if (ev_mutate) n_mut++;
    if (ev_improve) n_imp++;
    if (iss_valid) begin
      longint f;
      f = objective(iss_chrom);
      if (f == 64'hFFFFF) n_viol++;
      if (f < min_seen) min_seen = f;
      q_idx.push_back(int'(iss_idx)); q_fit.push_back(f); q_due.push_back(cyc + LAT);
      for (int g = 0; g < NGENE; g++)
        chk($signed(iss_chrom[g]) >= $signed(gene_lo[g]) && $signed(iss_chrom[g]) <= $signed(gene_hi[g]), "gene in bounds");
      chk(!seen_slot[iss_idx], "slot issued once per generation");
      seen_slot[iss_idx] = 1;
      if (iss_idx == 0 && !first_gen) chk(iss_chrom == best_chrom, "elite re-issued in slot 0");
      n_iss++;
      if (n_iss % 32 == 0) begin
        for (int i = 0; i < 32; i++) seen_slot[i] = 0;
        first_gen = 0;
      end
    end
  end

  always @(posedge clk) begin
    res_valid <= 1'b0;
    if (q_due.size() > 0 && q_due[0] <= cyc) begin
      res_valid <= 1'b1;
      res_idx   <= 5'(q_idx.pop_front());
      res_fit   <= 20'(q_fit.pop_front());
      void'(q_due.pop_front());
    end
  end

  // Best value never gets worse, and matches the objective of best_chrom
  logic [FIT_W-1:0] last_best;
  always @(posedge clk) begin
    if (rst_n && busy && gen_count > 0) begin
      if (best_fit > last_best && last_best != 0) chk(0, "best value got worse");
    end
    last_best <= best_fit;
  end

  task automatic run(input int gens, input int target, output int cycles);
    int t0;
    for (int i = 0; i < 32; i++) seen_slot[i] = 0;
    first_gen = 1; n_iss = 0;
    min_seen = 64'hFFFFF;
    max_gen = 16'(gens); fit_target = 20'(target);
    @(posedge clk); #1 start = 1; t0 = cyc;
    @(posedge clk); #1 start = 0;
    while (!done && cyc - t0 < 200000) @(posedge clk);
    cycles = cyc - t0;
    #1;
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cy;
    longint first_best;
    res_valid = 0; res_idx = 0; res_fit = 0;
    mut_thresh = 8'd20;
    for (int g = 0; g < NGENE; g++) begin
      gene_lo[g] = 18'(-4096 * (1 + g % 3));
      gene_hi[g] = 18'(4096 * (1 + g % 2));
      tgt[g] = longint'($urandom_range(0, 4096)) - 2048;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // Run 1: unreachable target, stops on generation count
    run(1, 0, cy);
    first_best = longint'(best_fit);
    chk(done && !hit_target && gen_count == 1, "one generation run");
    chk(longint'(best_fit) == min_seen, "best equals minimum of first generation");
    run(40, 0, cy);
    $display("40 generations: %0d cycles, best %0d (first generation best %0d), improvements %0d, mutating pairs %0d, violators %0d",
             cy, best_fit, first_best, n_imp, n_mut, n_viol);
    chk(done && !hit_target && gen_count == 40, "stops after max_gen");
    chk(longint'(best_fit) == min_seen, "best equals minimum ever returned");
    chk(objective(best_chrom) == longint'(best_fit), "best chromosome has best value");
    chk(longint'(best_fit) < first_best, "search improves on a random population");
    chk(n_mut > 0, "mutation happened");
    chk(n_imp > 1, "elite improved over generations");
    chk(n_viol > 0, "envelope violators exercised");

    // Run 2: reachable target, stops early
    run(200, int'(first_best), cy);
    $display("target run: %0d generations, best %0d", gen_count, best_fit);
    chk(done && hit_target && gen_count < 200, "stops on fitness target");
    chk(longint'(best_fit) <= first_best, "target met");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
