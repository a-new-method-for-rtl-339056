// tb_envelope_check: random beam states and limits; the violation flag is
// compared with a signed integer comparison of the three beta functions.
module tb_envelope_check;
  import cr_pkg::*;
  state_t st;
  fx_t bx, by, bz;
  logic viol;
  int checks = 0, failures = 0, nviol = 0;

  envelope_check dut (.state(st), .bmax_x(bx), .bmax_y(by), .bmax_z(bz), .viol(viol));

  function automatic int sx(input logic [17:0] v);
    return int'($signed(v));
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 2000; c++) begin
      bit e;
      for (int i = 0; i < NSTATE; i++) st[i] = 18'($urandom_range(0, 3 * 4096));
      if (c % 4 == 0) st[S_BX] = 18'($urandom);
      bx = 18'($urandom_range(4096, 10000));
      by = 18'($urandom_range(4096, 10000));
      bz = 18'($urandom_range(4096, 10000));
      #1;
      e = (sx(st[2]) > sx(bx)) || (sx(st[5]) > sx(by)) || (sx(st[8]) > sx(bz));
      if (e) nviol++;
      checks++;
      if (viol !== e) begin failures++; $display("FAIL c=%0d", c); end
    end
    checks++;
    if (nviol == 0 || nviol == 2000) begin failures++; $display("FAIL no mix of cases"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
