// tb_lfsr_rng: checks the random-word bank against an independent xorshift32
// model: seeding after reset, one step per enabled clock, hold when disabled,
// distinct streams.
module tb_lfsr_rng;
  localparam int NOUT = 3;
  localparam logic [31:0] SEED = 32'hA5A5_0001;
  logic clk = 0, rst_n = 0, en = 0;
  logic [NOUT-1:0][31:0] rnd;
  int checks = 0, failures = 0;

  lfsr_rng #(.NOUT(NOUT), .SEED(SEED)) dut (.clk(clk), .rst_n(rst_n), .en(en), .rnd(rnd));

  always #5 clk = ~clk;

  function automatic logic [31:0] step(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  logic [31:0] ref_s [NOUT];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NOUT; i++) begin
      ref_s[i] = step(SEED ^ (32'h9E37_79B9 * (i + 1)));
      if (ref_s[i] == 0) ref_s[i] = 1;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NOUT; i++) chk(rnd[i] == ref_s[i], $sformatf("seed %0d", i));
    for (int i = 0; i < NOUT; i++) chk(rnd[i] != 0, "nonzero");
    chk(rnd[0] != rnd[1] && rnd[1] != rnd[2], "distinct streams");
    for (int c = 0; c < 200; c++) begin
      en = (c % 3 != 0);
      @(posedge clk); #1;
      if (en) for (int i = 0; i < NOUT; i++) ref_s[i] = step(ref_s[i]);
      for (int i = 0; i < NOUT; i++) chk(rnd[i] == ref_s[i], $sformatf("step %0d out %0d", c, i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
