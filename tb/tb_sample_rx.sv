// tb_sample_rx - self-checking test of the AXI4-Stream sample receiver (784 features).
// Sends frames with random valid gaps, checks the buffered label, mode and features, that
// tready stays low while the buffer is full (back-pressure) until sample_ack, and that short
// frames are dropped and a missing tlast is flagged but kept.
module tb_sample_rx;
  localparam int F = 784, NB = (F + 31) / 32;
  logic          clk = 0, rst_n = 0;
  logic [31:0]   tdata;
  logic          tvalid, tlast, tready;
  logic          sample_valid, train, sample_ack, frame_err;
  logic [F-1:0]  features, exp_f;
  logic [7:0]    label;
  int checks = 0, failures = 0, errs = 0, stalls = 0;

  sample_rx #(.N_FEATURES(F)) dut (
    .clk(clk), .rst_n(rst_n), .s_axis_tdata(tdata), .s_axis_tvalid(tvalid),
    .s_axis_tlast(tlast), .s_axis_tready(tready), .sample_valid(sample_valid),
    .features(features), .label(label), .train(train), .sample_ack(sample_ack),
    .frame_err(frame_err));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (frame_err) errs++;
    if (tvalid && !tready) stalls++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic send_beat(input logic [31:0] d, input logic last);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin tvalid = 0; @(negedge clk); end
    tdata = d; tlast = last; tvalid = 1;
    @(posedge clk);
    while (!tready) @(posedge clk);
    @(negedge clk); tvalid = 0; tlast = 0;
  endtask

  // nbeats < NB+1 makes a short frame; drop_last omits tlast on the final beat
  task automatic send_frame(input logic [7:0] lab, input logic tr, input int nbeats,
                            input logic drop_last);
    logic [NB*32-1:0] v;
    for (int i = 0; i < NB * 32; i++) v[i] = 1'($urandom);
    if (nbeats == NB + 1) exp_f = v[F-1:0];
    send_beat({23'd0, tr, lab}, nbeats == 1);
    for (int k = 1; k < nbeats; k++) send_beat(v[(k-1)*32 +: 32], (k == nbeats - 1) && !drop_last);
  endtask

  initial begin
    tvalid = 0; tlast = 0; tdata = 0; sample_ack = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      logic [7:0] lab;
      logic       tr;
      int         e0;
      lab = 8'($urandom_range(0, 9));
      tr  = 1'($urandom);
      e0  = errs;
      if (n % 10 == 3) begin
        send_frame(lab, tr, 1 + $urandom_range(0, NB - 1), 0);    // short frame
        @(negedge clk);
        expect_true(errs == e0 + 1 && !sample_valid, "short frame dropped");
        continue;
      end
      send_frame(lab, tr, NB + 1, (n % 10 == 7));
      @(negedge clk);
      expect_true(sample_valid, "buffer full");
      expect_true(label == lab && train == tr, "header");
      expect_true(features == exp_f, "features");
      expect_true(errs == e0 + ((n % 10 == 7) ? 1 : 0), "tlast check");
      // hold the buffer a while with the next beat offered: tready must stay low
      tdata = 32'hDEAD_BEEF; tvalid = 1; tlast = 0;
      repeat ($urandom_range(1, 5)) begin
        @(negedge clk);
        expect_true(!tready && sample_valid && features == exp_f, "back-pressure");
      end
      tvalid = 0;
      sample_ack = 1;
      @(negedge clk);
      sample_ack = 0;
      expect_true(!sample_valid && tready, "released");
    end
    expect_true(stalls > 0, "stall seen");
    $display("frame errors=%0d stall cycles=%0d", errs, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
