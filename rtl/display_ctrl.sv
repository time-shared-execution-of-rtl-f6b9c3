// display_ctrl - drives the video output from a pixel stream.
//
// The paper's display (HDMI) controller is built in and not described; this
// is the simplest controller that does the job. A timing generator walks the
// raster (active area plus front porch, sync and back porch, in both
// directions; the defaults are the standard 1920x1080 CEA-861 timing) one step
// per pix_ce pulse. In the active area it takes one beat from the stream per
// pixel and shows it with de high. The stream must deliver a start-of-frame
// beat (tuser) at the first active pixel; if the stream is out of step, beats
// are discarded until a start of frame is at the head and black is shown
// until the next frame (counted in 'resyncs'). A missing beat inside the
// active area shows black and counts in 'underruns'.
//
// Timing: outputs are registered, one pix_ce step after the raster position
// they belong to. The paper clocks the display at 148.5 MHz; here the fabric
// clock is used with pix_ce giving the pixel rate.
module display_ctrl
  import ts_pkg::*;
#(
  parameter int unsigned H_ACTIVE = 1920,
  parameter int unsigned H_FP     = 88,
  parameter int unsigned H_SYNC   = 44,
  parameter int unsigned H_BP     = 148,
  parameter int unsigned V_ACTIVE = 1080,
  parameter int unsigned V_FP     = 4,
  parameter int unsigned V_SYNC   = 5,
  parameter int unsigned V_BP     = 36
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pix_ce,
  // stream in
  input  logic             s_valid,
  input  beat_t            s_beat,
  output logic             s_ready,
  // video out
  output logic [PIX_W-1:0] vid_data,
  output logic             vid_de,
  output logic             vid_hsync,
  output logic             vid_vsync,
  output logic [15:0]      underruns,
  output logic [15:0]      resyncs
);
  localparam int unsigned H_TOTAL = H_ACTIVE + H_FP + H_SYNC + H_BP;
  localparam int unsigned V_TOTAL = V_ACTIVE + V_FP + V_SYNC + V_BP;
  localparam int unsigned HW = $clog2(H_TOTAL);
  localparam int unsigned VW = $clog2(V_TOTAL);

  logic [HW-1:0] hc;
  logic [VW-1:0] vc;
  logic          active, first_px, in_sync;

  always_comb begin
    active   = (hc < HW'(H_ACTIVE)) && (vc < VW'(V_ACTIVE));
    first_px = (hc == '0) && (vc == '0);
    // consume one beat per active pixel while in step; when out of step,
    // throw away beats until a start of frame waits at the head
    if (!in_sync)
      s_ready = s_valid && !s_beat.user;
    else
      s_ready = pix_ce && active;
    if (pix_ce && first_px && s_valid && s_beat.user)
      s_ready = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hc <= '0; vc <= '0; in_sync <= 1'b0;
      vid_data <= '0; vid_de <= 1'b0; vid_hsync <= 1'b0; vid_vsync <= 1'b0;
      underruns <= '0; resyncs <= '0;
    end else if (pix_ce) begin
      // raster position
      if (hc == HW'(H_TOTAL - 1)) begin
        hc <= '0;
        vc <= (vc == VW'(V_TOTAL - 1)) ? '0 : vc + 1'b1;
      end else
        hc <= hc + 1'b1;

      // lock onto the stream at the first pixel of a frame
      if (first_px) begin
        if (s_valid && s_beat.user) in_sync <= 1'b1;
        else begin
          if (in_sync) resyncs <= resyncs + 1'b1;
          in_sync <= 1'b0;
        end
      end

      vid_hsync <= (hc >= HW'(H_ACTIVE + H_FP)) && (hc < HW'(H_ACTIVE + H_FP + H_SYNC));
      vid_vsync <= (vc >= VW'(V_ACTIVE + V_FP)) && (vc < VW'(V_ACTIVE + V_FP + V_SYNC));
      vid_de    <= active;
      if (active && s_ready && s_valid) vid_data <= s_beat.data;
      else begin
        vid_data <= '0;
        if (active && (in_sync || first_px)) underruns <= underruns + 1'b1;
      end
    end
  end
endmodule
