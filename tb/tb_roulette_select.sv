// tb_roulette_select: fixed wheels with known slices, a random check against
// a direct search of the running sums, zero-score entries that must never be
// chosen, and a frequency test: over many draws every index is picked in
// proportion to its score.
module tb_roulette_select;
  localparam int POP = 8, CW = 24;
  logic [POP-1:0][CW-1:0] cum;
  logic [31:0] rnd;
  logic [2:0] idx;
  int checks = 0, failures = 0;

  roulette_select #(.POP(POP), .CUM_W(CW)) dut (.cum(cum), .rnd(rnd), .idx(idx));

  int score[POP];
  int hits[POP];

  task automatic set_scores();
    longint acc;
    acc = 0;
    for (int i = 0; i < POP; i++) begin acc += score[i]; cum[i] = CW'(acc); end
  endtask

  function automatic int ref_idx(input longint total, input logic [31:0] r);
    longint p, acc;
    p = (longint'(r) * total) >> 32;
    acc = 0;
    for (int i = 0; i < POP; i++) begin acc += score[i]; if (p < acc) return i; end
    return POP - 1;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Known wheel: scores 1,0,0,0,0,0,0,3 -> first quarter picks 0, rest picks 7
    score = '{1, 0, 0, 0, 0, 0, 0, 3};
    set_scores();
    rnd = 32'h1000_0000; #1; checks++; if (idx != 0) begin failures++; $display("FAIL known 0"); end
    rnd = 32'h4000_0001; #1; checks++; if (idx != 7) begin failures++; $display("FAIL known 7"); end
    rnd = 32'hFFFF_FFFF; #1; checks++; if (idx != 7) begin failures++; $display("FAIL known top"); end
    // Random wheels vs direct search
    for (int c = 0; c < 3000; c++) begin
      longint tot;
      tot = 0;
      for (int i = 0; i < POP; i++) begin
        score[i] = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(1, 100000);
        tot += score[i];
      end
      set_scores();
      rnd = $urandom;
      #1;
      checks++;
      if (tot != 0 && int'(idx) != ref_idx(tot, rnd)) begin failures++; $display("FAIL c=%0d", c); end
      if (tot != 0) begin
        checks++;
        if (score[idx] == 0) begin failures++; $display("FAIL zero-score pick"); end
      end
    end
    // Frequencies
    score = '{10, 20, 0, 40, 5, 5, 10, 10};
    set_scores();
    for (int i = 0; i < POP; i++) hits[i] = 0;
    for (int c = 0; c < 20000; c++) begin rnd = $urandom; #1; hits[idx]++; end
    for (int i = 0; i < POP; i++) begin
      int expct;
      expct = 20000 * score[i] / 100;
      checks++;
      if (hits[i] < expct - expct / 8 - 50 || hits[i] > expct + expct / 8 + 50) begin
        failures++; $display("FAIL freq %0d: %0d vs %0d", i, hits[i], expct);
      end
    end
    // All-zero wheel: uniform on rnd low bits
    score = '{0, 0, 0, 0, 0, 0, 0, 0};
    set_scores();
    rnd = 32'h0000_0005; #1; checks++; if (idx != 5) begin failures++; $display("FAIL all-zero wheel"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
