// tb_chrom_decode: random nominal settings and chromosomes for every zone
// position and failed element; each element's decoded setting is compared
// with the rule (nominal outside the zone, genes inside, failed field zero).
module tb_chrom_decode;
  import cr_pkg::*;
  setting_t [N_ELEM-1:0] nom_set, set_out;
  chrom_t chrom;
  logic use_chrom, fail_valid;
  logic [4:0] zone_first, fail_idx;
  int checks = 0, failures = 0;

  chrom_decode dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 600; c++) begin
      for (int e = 0; e < N_ELEM; e++) nom_set[e] = '{phi: 18'($urandom), v: 18'($urandom), b: 18'($urandom)};
      for (int g = 0; g < NGENE; g++) chrom[g] = 18'($urandom);
      use_chrom  = (c % 5 != 0);
      zone_first = 5'($urandom_range(0, N_ELEM - ZONE_LEN));
      fail_valid = (c % 3 != 0);
      fail_idx   = 5'($urandom_range(0, N_ELEM - 1));
      #1;
      for (int e = 0; e < N_ELEM; e++) begin
        logic [17:0] ep, ev, eb;
        int p;
        p = e - int'(zone_first);
        ep = nom_set[e].phi; ev = nom_set[e].v; eb = nom_set[e].b;
        if (use_chrom && p >= 0 && p < ZONE_LEN) begin ep = chrom[3*p]; ev = chrom[3*p+1]; eb = chrom[3*p+2]; end
        if (fail_valid && e == int'(fail_idx)) ev = '0;
        checks++;
        if (set_out[e].phi != ep || set_out[e].v != ev || set_out[e].b != eb) begin
          failures++; $display("FAIL c=%0d e=%0d", c, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
