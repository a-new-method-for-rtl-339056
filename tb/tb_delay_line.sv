// tb_delay_line: random data through a 5-stage and a 0-stage delay line; each
// output is compared with the input recorded DEPTH clocks earlier.
module tb_delay_line;
  localparam int W = 8, D = 5;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] d, q, q0;
  logic [W-1:0] hist [$];
  int checks = 0, failures = 0;

  delay_line #(.W(W), .DEPTH(D)) dut  (.clk(clk), .rst_n(rst_n), .d(d), .q(q));
  delay_line #(.W(W), .DEPTH(0)) dut0 (.clk(clk), .rst_n(rst_n), .d(d), .q(q0));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (q != 0) begin failures++; $display("FAIL reset value"); end
    for (int i = 0; i < D; i++) hist.push_back('0);
    for (int c = 0; c < 300; c++) begin
      d = W'($urandom);
      #1;
      checks++; if (q0 !== d) begin failures++; $display("FAIL wire"); end
      hist.push_back(d);
      @(posedge clk); #1;
      void'(hist.pop_front());
      checks++;
      if (q !== hist[0]) begin failures++; $display("FAIL c=%0d q=%h exp=%h", c, q, hist[0]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
