// tb_display_ctrl - self-checking test of the display controller on a tiny
// raster (4x3 active, 7x6 total), one pixel every second clock.
//
// The stream starts in the middle of a frame, so the controller must discard
// beats until a start of frame and lock on. Checked afterwards: per frame,
// exactly 12 pixels with de, one sync pulse per line and per frame of the
// programmed widths, and the pixel values of three consecutive frames in
// raster order. When the stream stops, underruns are counted.
module tb_display_ctrl;
  import ts_pkg::*;
  localparam int HA = 4, HF = 1, HS = 1, HB = 1, VA = 3, VF = 1, VS = 1, VB = 1;
  localparam int HT = HA + HF + HS + HB, VT = VA + VF + VS + VB;

  logic clk = 0, rst_n = 0, pix_ce = 0;
  always #5 clk = ~clk;

  logic             s_valid = 0, s_ready;
  beat_t            s_beat = '0;
  logic [PIX_W-1:0] vid_data;
  logic             vid_de, vid_hsync, vid_vsync;
  logic [15:0]      underruns, resyncs;

  display_ctrl #(.H_ACTIVE(HA), .H_FP(HF), .H_SYNC(HS), .H_BP(HB),
                 .V_ACTIVE(VA), .V_FP(VF), .V_SYNC(VS), .V_BP(VB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) pix_ce <= !pix_ce;

  // stream source: frames numbered from 0, first frame cut short (starts at pixel 5)
  int  src_f = 0, src_i = 5;
  bit  feeding = 1;
  always @(posedge clk)
    if (s_valid && s_ready) begin
      src_i <= (src_i + 1 == HA * VA) ? 0 : src_i + 1;
      if (src_i + 1 == HA * VA) src_f <= src_f + 1;
    end
  always @(negedge clk) begin
    s_valid = feeding;
    s_beat  = '{data: 16'(src_f * 32 + src_i + 1), user: (src_i == 0), last: (src_i % HA == HA - 1)};
  end

  // sample outputs one cycle after each pix_ce step
  logic ce_d = 0;
  always @(posedge clk) ce_d <= pix_ce;
  logic [PIX_W-1:0] seen [$];
  int hs_pulses = 0, vs_pulses = 0, hs_len = 0, vs_len = 0;
  logic hs_prev = 0, vs_prev = 0;
  always @(posedge clk) if (rst_n && ce_d) begin
    if (vid_de) seen.push_back(vid_data);
    if (vid_hsync && !hs_prev) hs_pulses++;
    if (vid_vsync && !vs_prev) vs_pulses++;
    if (vid_hsync) hs_len++;
    if (vid_vsync) vs_len++;
    hs_prev = vid_hsync; vs_prev = vid_vsync;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // first raster frame: the stream is out of step, the controller locks at the next frame
    repeat (2 * HT * VT) @(posedge clk);
    seen.delete(); hs_pulses = 0; vs_pulses = 0; hs_len = 0; vs_len = 0;
    // three whole frames
    repeat (3 * 2 * HT * VT) @(posedge clk);
    check(seen.size() == 3 * HA * VA, $sformatf("%0d active pixels in 3 frames", seen.size()));
    check(hs_pulses == 3 * VT, $sformatf("%0d line syncs", hs_pulses));
    check(hs_len == 3 * VT * HS, "line sync width");
    check(vs_pulses == 3, $sformatf("%0d frame syncs", vs_pulses));
    check(vs_len == 3 * VS * HT, "frame sync width");
    begin
      int f0; bit ok = 1;
      f0 = (seen.size() > 0) ? (int'(seen[0]) - 1) / 32 : 0;
      for (int k = 0; k < seen.size(); k++)
        if (seen[k] != 16'((f0 + k / (HA * VA)) * 32 + k % (HA * VA) + 1)) ok = 0;
      check(ok, "pixels in raster order, frame after frame");
      check(seen.size() > 0 && (int'(seen[0]) - 1) % 32 == 0, "shown frames start with their first pixel");
    end
    check(underruns == 0, "no underruns while fed");
    // starve the display
    feeding = 0;
    repeat (2 * HT * VT) @(posedge clk);
    check(underruns > 0, "underruns counted when starved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
