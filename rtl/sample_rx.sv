// sample_rx - AXI4-Stream receiver that fills the sample buffer of the core.
//
// A sample is one AXI4-Stream frame of 1 + ceil(N_FEATURES/32) beats of 32 bits:
//   beat 0      header: bits [7:0] class label, bit 8 = 1 for a training sample
//               (0 = classify only); the other bits are ignored.
//   beat k>=1   features 32*(k-1) .. 32*(k-1)+31, lowest feature in bit 0; padding bits of the
//               last beat are ignored.  tlast is expected on the last beat.
// When the last beat is stored, sample_valid rises and tready falls: the buffer is held
// unchanged, back-pressuring the stream, until sample_ack (one cycle) frees it.  A frame that
// ends early (tlast before its last beat) is dropped; a last beat without tlast is kept.  Both
// raise frame_err for one cycle.
// The paper only says that the processing system streams samples over AXI; the frame format,
// the single buffer and the error handling are this design's choices.
// The padding bits of the last beat are stored but not used (a lint tool reports them).
module sample_rx #(
  parameter int unsigned N_FEATURES = 784
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Stream slave
  input  logic [31:0]           s_axis_tdata,
  input  logic                  s_axis_tvalid,
  input  logic                  s_axis_tlast,
  output logic                  s_axis_tready,
  // sample buffer
  output logic                  sample_valid,
  output logic [N_FEATURES-1:0] features,
  output logic [7:0]            label,
  output logic                  train,
  input  logic                  sample_ack,
  output logic                  frame_err
);
  localparam int unsigned N_BEATS = (N_FEATURES + 31) / 32;
  localparam int unsigned CNT_W   = $clog2(N_BEATS + 1);

  logic [N_BEATS*32-1:0] buffer;
  logic [CNT_W-1:0]      cnt;      // 0: header next, k: feature beat k next
  logic                  full;
  logic                  beat;

  assign s_axis_tready = ~full;
  assign beat          = s_axis_tvalid & s_axis_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      full      <= 1'b0;
      label     <= '0;
      train     <= 1'b0;
      buffer    <= '0;
      frame_err <= 1'b0;
    end else begin
      frame_err <= 1'b0;
      if (sample_ack) full <= 1'b0;
      if (beat) begin
        if (cnt == '0) begin
          label <= s_axis_tdata[7:0];
          train <= s_axis_tdata[8];
          if (s_axis_tlast) frame_err <= 1'b1;       // header-only frame: dropped
          else              cnt       <= CNT_W'(1);
        end else begin
          buffer[(int'(cnt) - 1) * 32 +: 32] <= s_axis_tdata;
          if (cnt == CNT_W'(N_BEATS)) begin
            cnt  <= '0;
            full <= 1'b1;
            if (!s_axis_tlast) frame_err <= 1'b1;    // missing tlast: kept
          end else if (s_axis_tlast) begin
            cnt       <= '0;                           // short frame: dropped
            frame_err <= 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
      end
    end
  end

  assign sample_valid = full;
  assign features     = buffer[N_FEATURES-1:0];

  assert property (@(posedge clk) disable iff (!rst_n) sample_ack |-> full)
    else $error("sample_rx: acknowledge without a sample");
endmodule
