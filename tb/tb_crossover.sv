// tb_crossover: random parents and every cut point, children compared gene by
// gene with the single-point crossover rule; point 0 and NGENE copy parents.
module tb_crossover;
  localparam int NG = 15, GW = 18;
  logic [NG-1:0][GW-1:0] pa, pb, ca, cb;
  logic [3:0] point;
  int checks = 0, failures = 0;

  crossover #(.NGENE(NG), .GW(GW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 200; c++) begin
      for (int g = 0; g < NG; g++) begin pa[g] = GW'($urandom); pb[g] = GW'($urandom); end
      point = 4'(c % (NG + 1));
      #1;
      for (int g = 0; g < NG; g++) begin
        checks++;
        if (g < int'(point)) begin
          if (ca[g] != pa[g] || cb[g] != pb[g]) begin failures++; $display("FAIL head p=%0d g=%0d", point, g); end
        end else begin
          if (ca[g] != pb[g] || cb[g] != pa[g]) begin failures++; $display("FAIL tail p=%0d g=%0d", point, g); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
