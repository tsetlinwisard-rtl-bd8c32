// tb_lutram64x1 - self-checking test of the 64x1 LUTRAM.
// Fills all 64 addresses with random bits, checks the asynchronous read of every address
// against a reference array, checks that we=0 leaves the contents alone and that a write
// is visible right after its clock edge.
module tb_lutram64x1;
  logic       clk = 0;
  logic       we;
  logic [5:0] a;
  logic       d, o;
  logic [63:0] ref_mem;
  int checks = 0, failures = 0;

  lutram64x1 dut (.clk(clk), .we(we), .a(a), .d(d), .o(o));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic exp, input string what);
    checks++;
    if (o !== exp) begin
      failures++;
      $display("FAIL %s: a=%0d o=%0b exp=%0b", what, a, o, exp);
    end
  endtask

  initial begin
    we = 0; a = 0; d = 0;
    // fill
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      a = 6'(i); d = 1'($urandom); we = 1;
      ref_mem[i] = d;
      @(posedge clk); #1;
      check(ref_mem[i], "read after write");
    end
    @(negedge clk); we = 0;
    // asynchronous read of every address, no clock edge needed
    for (int i = 63; i >= 0; i--) begin
      a = 6'(i); #1;
      check(ref_mem[i], "async read");
    end
    // writes disabled: contents unchanged
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      a = 6'(i); d = ~ref_mem[i]; we = 0;
      @(posedge clk); #1;
      check(ref_mem[i], "no write when we=0");
    end
    // random mix
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      a = 6'($urandom); d = 1'($urandom); we = 1'($urandom);
      #1 check(ref_mem[a], "read before edge");
      if (we) ref_mem[a] = d;
      @(posedge clk); #1;
      check(ref_mem[a], "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
