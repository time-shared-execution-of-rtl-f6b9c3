// camera_ctrl - turns the image sensor's pixel bus into a pixel stream.
//
// The paper uses a built-in camera controller for a 1080p60 image sensor and
// does not describe it; this is the simplest controller that yields the
// stream the rest of the design expects. The sensor side is modelled as a
// pixel bus already decoded from the sensor's serial links: pix_valid marks a
// pixel, frame_start marks the first pixel of a frame. The controller counts
// columns against the programmed width to mark line ends (tlast) and puts
// frame_start on tuser. A camera cannot be stalled, so the pixels pass
// through a FIFO of FIFO_DEPTH entries that rides out short stalls of the DRAM
// path; a pixel that finds the FIFO full is lost and counted in 'dropped'.
// All pixels are ignored until the first frame_start, so the stream always
// begins on a frame boundary.
//
// Timing: one register stage plus the FIFO; with the consumer ready a pixel
// appears on m_* two cycles after it is presented. The paper clocks the camera at 148.5 MHz and the fabric at
// 200 MHz; here both share one clock and pix_valid carries the pixel rate
// (a clock-domain crossing FIFO is left out).
module camera_ctrl
  import ts_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DIM_W-1:0] width,
  // sensor pixel bus
  input  logic             pix_valid,
  input  logic [PIX_W-1:0] pix_data,
  input  logic             frame_start,
  // stream out
  output logic             m_valid,
  output beat_t            m_beat,
  input  logic             m_ready,
  output logic [15:0]      dropped
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [DIM_W-1:0] col;
  logic             locked;   // a frame start has been seen
  logic             q_valid;  // registered pixel waiting to enter the FIFO
  beat_t            q_beat;
  logic [CW-1:0]    count;
  logic             fifo_full;

  assign fifo_full = (count == CW'(FIFO_DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_valid <= 1'b0; q_beat <= '0; col <= '0; locked <= 1'b0; dropped <= '0;
    end else begin
      if (q_valid && fifo_full) dropped <= dropped + 1'b1;   // pixel lost
      q_valid <= 1'b0;
      if (pix_valid && (locked || frame_start)) begin
        logic [DIM_W-1:0] c;
        c = frame_start ? '0 : col;
        locked      <= 1'b1;
        q_valid     <= 1'b1;
        q_beat.data <= pix_data;
        q_beat.user <= frame_start;
        q_beat.last <= (c == width - 1'b1);
        col         <= (c == width - 1'b1) ? '0 : c + 1'b1;
      end
    end
  end

  logic [$bits(beat_t)-1:0] head;
  sync_fifo #(.W($bits(beat_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clr(1'b0),
    .push(q_valid && !fifo_full), .wdata(q_beat),
    .pop(m_valid && m_ready), .rdata(head), .count(count)
  );
  assign m_valid = (count != '0);
  assign m_beat  = beat_t'(head);
endmodule
