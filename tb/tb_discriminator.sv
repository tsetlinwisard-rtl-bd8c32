// tb_discriminator - self-checking test of one discriminator (40 LUTs, 2 LFSRs of 32 stages).
// The testbench keeps its own model of the LFSR bank (seeded with tw_pkg::lfsr_seed, shifted
// with the 32,22,2,1 feedback) and of every TA state.  It walks the initialisation over all
// addresses, then applies random addresses with random feedback, and compares the vote sum
// before every clock edge with the model's count of TAs above state N.  It also checks that
// roughly half of the LUTs take part in each feedback step.
module tb_discriminator;
  localparam int L = 40, LI = 6, SB = 5, LW = 32, ID = 3;
  localparam int NS = 1 << (SB - 1);
  localparam int NL = (L + LW - 1) / LW;

  logic                  clk = 0, rst_n = 0;
  logic [L-1:0][LI-1:0]  addr;
  logic                  feedback, feedback_dir, init_en;
  logic [5:0]            sum;
  logic [NL*LW-1:0]      rnd;
  int                    st [L][1<<LI];
  int checks = 0, failures = 0, updates = 0, fb_steps = 0;

  discriminator #(.N_LUTS(L), .LUT_INPUTS(LI), .STATE_BITS(SB), .LFSR_W(LW), .DISC_ID(ID)) dut (
    .clk(clk), .rst_n(rst_n), .addr(addr), .feedback(feedback), .feedback_dir(feedback_dir),
    .init_en(init_en), .sum(sum));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int exp_sum();
    int s = 0;
    for (int l = 0; l < L; l++) if (st[l][addr[l]] > NS) s++;
    return s;
  endfunction

  task automatic advance_model();
    for (int j = 0; j < NL; j++) begin
      logic [31:0] r;
      r = rnd[j*LW +: LW];
      rnd[j*LW +: LW] = {r[30:0], r[31] ^ r[21] ^ r[1] ^ r[0]};
    end
  endtask

  initial begin
    for (int j = 0; j < NL; j++) rnd[j*LW +: LW] = tw_pkg::lfsr_seed(ID, j, LW);
    addr = '0; feedback = 0; feedback_dir = 0; init_en = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initialisation walk
    for (int a = 0; a < (1<<LI); a++) begin
      @(negedge clk);
      init_en = 1;
      for (int l = 0; l < L; l++) addr[l] = LI'(a);
      @(posedge clk);
      for (int l = 0; l < L; l++) st[l][a] = rnd[l] ? NS + 1 : NS;
      advance_model();
    end
    @(negedge clk); init_en = 0;
    // random operation
    for (int n = 0; n < 6000; n++) begin
      int k;
      @(negedge clk);
      for (int l = 0; l < L; l++)
        addr[l] = (n % 4 == 0) ? LI'($urandom) : LI'($urandom_range(0, 1));
      feedback     = ($urandom_range(0, 2) != 0);
      feedback_dir = ((n / 700) % 2) ? ($urandom_range(0, 9) < 8) : ($urandom_range(0, 9) < 2);
      #1;
      checks++;
      if (int'(sum) != exp_sum()) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d sum=%0d exp=%0d", n, sum, exp_sum());
      end
      @(posedge clk);
      if (feedback) begin
        k = 0;
        for (int l = 0; l < L; l++) if (rnd[l]) begin
          k++;
          if (feedback_dir && st[l][addr[l]] < 2*NS) st[l][addr[l]]++;
          if (!feedback_dir && st[l][addr[l]] > 1)   st[l][addr[l]]--;
        end
        updates += k;
        fb_steps++;
        advance_model();
      end
    end
    // about half of the LUTs per feedback step
    checks++;
    if (updates < fb_steps * L * 4 / 10 || updates > fb_steps * L * 6 / 10) begin
      failures++;
      $display("FAIL feedback share %0d of %0d", updates, fb_steps * L);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
