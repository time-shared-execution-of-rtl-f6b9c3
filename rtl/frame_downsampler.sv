// frame_downsampler - passes only every s-th frame of the camera stream.
//
// When the pipelines of one round cannot finish within the frame time even
// with multi-frame bundles, the framework lowers the frame rate it feeds them
// by passing one camera frame out of every s. Frames are recognised by the
// start-of-frame flag (tuser); the first frame after reset is passed, the next s-1 frames are consumed and dropped. s of 0 or 1 passes
// every frame. The stages downstream see an ordinary, slower video stream, so
// the downsampling is invisible to them.
//
// Interface: AXI4-Stream style in and out; ready flows through unchanged for
// passed frames, dropped beats are always accepted.
// Timing: combinational (no added latency). dropped counts dropped frames.
module frame_downsampler
  import ts_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s,
  input  logic        s_valid,
  input  beat_t       s_beat,
  output logic        s_ready,
  output logic        m_valid,
  output beat_t       m_beat,
  input  logic        m_ready,
  output logic [15:0] dropped
);
  logic [7:0] phase;     // frames since the last passed one
  logic       passing;   // the current frame is passed
  logic       pass_this; // decision for the current beat

  always_comb begin
    if (s_beat.user)
      pass_this = (s <= 8'd1) || (phase == 8'd0);
    else
      pass_this = passing;
    m_valid = s_valid && pass_this;
    m_beat  = s_beat;
    s_ready = pass_this ? m_ready : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0; passing <= 1'b0; dropped <= '0;
    end else begin
      if (s_valid && s_ready && s_beat.user) begin
        passing <= pass_this;
        phase   <= (s <= 8'd1 || phase + 1'b1 >= s) ? 8'd0 : phase + 1'b1;
        if (!pass_this) dropped <= dropped + 1'b1;
      end
    end
  end
endmodule
