// tb_mutation: random chromosomes, bounds and random words; each gene is
// checked against the replacement rule (probability thresh/256, uniform value
// lo + ((r * (hi-lo)) >> 18)), forced replacement, bounds, and the observed
// mutation rate.
module tb_mutation;
  localparam int NG = 15, GW = 18;
  logic [NG-1:0][GW-1:0] in_chrom, lo, hi, out_chrom;
  logic [NG-1:0][31:0] rnd;
  logic [7:0] thresh;
  logic force_all;
  logic [NG-1:0] mutated;
  int checks = 0, failures = 0, nmut = 0, ntot = 0;

  mutation #(.NGENE(NG), .GW(GW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 2000; c++) begin
      thresh = (c < 1000) ? 8'd32 : 8'($urandom);
      force_all = (c % 10 == 0);
      for (int g = 0; g < NG; g++) begin
        longint l, h;
        l = longint'($urandom_range(0, 8192)) - 4096;
        h = l + $urandom_range(0, 8192);
        lo[g] = GW'(l); hi[g] = GW'(h);
        in_chrom[g] = GW'($urandom);
        rnd[g] = $urandom;
      end
      #1;
      for (int g = 0; g < NG; g++) begin
        bit m;
        longint l, h, e;
        l = longint'($signed(lo[g])); h = longint'($signed(hi[g]));
        m = force_all || (rnd[g][7:0] < thresh);
        e = m ? l + ((longint'(rnd[g][31:14]) * (h - l)) >> 18) : longint'($signed(in_chrom[g]));
        checks++;
        if (longint'($signed(out_chrom[g])) != e || mutated[g] != m) begin
          failures++; $display("FAIL c=%0d g=%0d", c, g);
        end
        if (m) begin
          checks++;
          if (e < l || (e >= h && h != l)) begin failures++; $display("FAIL bound"); end
        end
        if (c < 1000 && !force_all) begin ntot++; if (m) nmut++; end
      end
    end
    // expected rate 32/256 = 12.5 %
    checks++;
    if (nmut * 1000 / ntot < 100 || nmut * 1000 / ntot > 150) begin failures++; $display("FAIL rate %0d/%0d", nmut, ntot); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
