// tb_popcount - self-checking test of the popcount at its default width (150 bits).
// Random vectors of varying density, all-zeros and all-ones are compared with a
// bit-by-bit count made in the testbench.
module tb_popcount;
  localparam int N = 150;
  logic [N-1:0] in;
  logic [7:0]   count;
  int checks = 0, failures = 0;

  popcount #(.N(N)) dut (.in(in), .count(count));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int exp, dens;
      exp = 0;
      dens = n % 101;
      for (int i = 0; i < N; i++) begin
        in[i] = ($urandom_range(0, 99) < dens);
        if (in[i]) exp++;
      end
      if (n == 0) begin in = '0; exp = 0; end
      if (n == 1) begin in = '1; exp = N; end
      #1;
      checks++;
      if (int'(count) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL count=%0d exp=%0d", count, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
