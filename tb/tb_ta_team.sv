// tb_ta_team - self-checking test of one TA team (LUT + its Tsetlin automata).
// A reference array holds the state (1 .. 2N) of every TA.  The test initialises all
// entries, then applies random and directed increment/decrement steps, with the LUT output
// checked against "state > N" before every edge.  Directed runs drive single TAs into both
// end states to check saturation and the exact number of steps needed to flip the output.
module tb_ta_team;
  localparam int LI = 6;
  localparam int SB = 5;
  localparam int NS = 1 << (SB - 1);   // N = 16; states 1 .. 32

  logic          clk = 0;
  logic [LI-1:0] addr;
  logic          feedback_en, feedback_dir, init_en, init_hi, out;
  int            st [1<<LI];
  int checks = 0, failures = 0, sat_top = 0, sat_bot = 0;

  ta_team #(.LUT_INPUTS(LI), .STATE_BITS(SB)) dut (
    .clk(clk), .addr(addr), .feedback_en(feedback_en), .feedback_dir(feedback_dir),
    .init_en(init_en), .init_hi(init_hi), .out(out));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what);
    #1;
    checks++;
    if (out !== (st[addr] > NS)) begin
      failures++;
      $display("FAIL %s: addr=%0d state=%0d out=%0b", what, addr, st[addr], out);
    end
  endtask

  // one step on address x; dir 1 = increment
  task automatic step(input int x, input logic en, input logic dir);
    @(negedge clk);
    addr = LI'(x); feedback_en = en; feedback_dir = dir; init_en = 0;
    chk("before step");
    @(posedge clk);
    if (en) begin
      if (dir) begin
        if (st[x] == 2*NS) sat_top++; else st[x]++;
      end else begin
        if (st[x] == 1) sat_bot++; else st[x]--;
      end
    end
    @(negedge clk); feedback_en = 0;
    chk("after step");
  endtask

  initial begin
    addr = 0; feedback_en = 0; feedback_dir = 0; init_en = 0; init_hi = 0;
    // initialisation: state N or N+1
    for (int i = 0; i < (1<<LI); i++) begin
      @(negedge clk);
      addr = LI'(i); init_en = 1; init_hi = 1'($urandom);
      st[i] = init_hi ? NS + 1 : NS;
      @(posedge clk);
    end
    @(negedge clk); init_en = 0;
    for (int i = 0; i < (1<<LI); i++) begin addr = LI'(i); chk("after init"); end

    // directed: address 5 to the bottom, past it, then count increments to flip
    for (int k = 0; k < 2*NS + 3; k++) step(5, 1, 0);
    checks++; if (st[5] != 1) failures++;
    for (int k = 0; k < NS - 1; k++) step(5, 1, 1);   // state N: still 0
    step(5, 1, 1);                                    // state N+1: output 1
    checks++; if (out !== 1'b1) begin failures++; $display("FAIL flip at N+1"); end
    // address 9 to the top and past it
    for (int k = 0; k < 2*NS + 3; k++) step(9, 1, 1);
    for (int k = 0; k < NS - 1; k++) step(9, 1, 0);   // state N+1: still 1
    checks++; if (out !== 1'b1) begin failures++; $display("FAIL top hold"); end
    step(9, 1, 0);                                    // state N: output 0
    checks++; if (out !== 1'b0) begin failures++; $display("FAIL flip at N"); end

    // random steps concentrated on a few addresses so both ends are reached
    for (int n = 0; n < 4000; n++) begin
      int x;
      x = (n % 3 == 0) ? int'($urandom_range(0, (1<<LI)-1)) : int'($urandom_range(0, 3));
      step(x, 1'($urandom), ($urandom_range(0, 99) < ((n / 500) % 2 ? 70 : 30)));
    end
    // every entry once more
    for (int i = 0; i < (1<<LI); i++) begin addr = LI'(i); chk("final sweep"); end
    checks++;
    if (sat_top == 0 || sat_bot == 0) begin
      failures++;
      $display("FAIL saturation not exercised top=%0d bottom=%0d", sat_top, sat_bot);
    end
    $display("saturations: top=%0d bottom=%0d", sat_top, sat_bot);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
