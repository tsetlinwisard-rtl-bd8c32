// tb_argmax - self-checking test of the argmax over 10 vote sums.
// Random sums, drawn from a narrow range so ties are frequent, are compared with a scan
// that keeps the first (lowest-index) maximum.  Ties are counted and must occur.
module tb_argmax;
  localparam int NC = 10, W = 8;
  logic [NC-1:0][W-1:0] sums;
  logic [3:0]           idx;
  logic [W-1:0]         max_sum;
  int checks = 0, failures = 0, ties = 0;

  argmax #(.N_CLASSES(NC), .SUM_W(W)) dut (.sums(sums), .idx(idx), .max_sum(max_sum));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int best, bi, nbest;
      for (int c = 0; c < NC; c++)
        sums[c] = (n % 2) ? W'($urandom_range(0, 150)) : W'($urandom_range(70, 75));
      best = -1; bi = 0; nbest = 0;
      for (int c = 0; c < NC; c++) if (int'(sums[c]) > best) begin best = int'(sums[c]); bi = c; end
      for (int c = 0; c < NC; c++) if (int'(sums[c]) == best) nbest++;
      if (nbest > 1) ties++;
      #1;
      checks++;
      if (int'(idx) != bi || int'(max_sum) != best) begin
        failures++;
        if (failures < 10) $display("FAIL idx=%0d exp=%0d max=%0d exp=%0d", idx, bi, max_sum, best);
      end
    end
    checks++;
    if (ties == 0) failures++;
    $display("ties=%0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
