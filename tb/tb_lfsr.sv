// tb_lfsr - self-checking test of the LFSR.
// A 32-stage instance is compared step by step with an independent model of the
// x^32 + x^22 + x^2 + x + 1 register, including cycles where step is low.  The share of
// ones per stage must be near 0.5.  An 8-stage instance must have period 255.
module tb_lfsr;
  localparam logic [31:0] SEED = 32'h1234_5678;
  logic        clk = 0, rst_n = 0, step = 0, step8 = 0;
  logic [31:0] q, m;
  logic [7:0]  q8;
  int checks = 0, failures = 0;
  int ones [32];

  lfsr #(.WIDTH(32), .SEED(SEED))  dut   (.clk(clk), .rst_n(rst_n), .step(step),  .q(q));
  lfsr #(.WIDTH(8),  .SEED(8'h5A)) dut8  (.clk(clk), .rst_n(rst_n), .step(step8), .q(q8));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m = SEED;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (q !== SEED) begin failures++; $display("FAIL seed"); end
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      step = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (step) m = {m[30:0], m[31] ^ m[21] ^ m[1] ^ m[0]};
      #1;
      checks++;
      if (q !== m) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d q=%h exp=%h", n, q, m);
      end
      for (int b = 0; b < 32; b++) ones[b] += int'(q[b]);
    end
    @(negedge clk); step = 0;
    for (int b = 0; b < 32; b++) begin
      checks++;
      if (ones[b] < 8000 || ones[b] > 12000) begin
        failures++;
        $display("FAIL stage %0d ones=%0d of about 15000", b, ones[b]);
      end
    end
    // period of the 8-stage register
    begin
      int period;
      period = 0;
      step8 = 1;
      do begin
        @(posedge clk); #1;
        period++;
      end while (q8 != 8'h5A && period < 1000);
      step8 = 0;
      checks++;
      if (period != 255) begin failures++; $display("FAIL period %0d", period); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
