// tb_ts_top_full - the static region at its full size: 1080p60 raster with
// the CEA-861 timing, the top's parameters left at their defaults.
//
// One pipeline with a single module runs continuously: camera -> partition 0
// -> DMA engine 0 in ring mode (decoupling buffer in DRAM) -> display. The
// sensor model produces a 1920x1080 frame on the same raster as the display,
// eight lines ahead of it, so the ring absorbs the lead and the display can
// lock at the start of its second frame. Pixel (x, y) of camera frame f
// carries x + 3y + 5f; the partition computes 3*in + k. Checked: the display
// locks, then two complete frames arrive pixel for pixel, each a single
// camera frame; no underrun once locked, no resync, no camera pixel lost and
// the ring never overflowed into a stall of the camera.
// The pixel enable comes every third clock (the DRAM port serves one write
// and one read per pixel); the DRAM model answers after 6 cycles and never
// stalls.
module tb_ts_top_full;
  import ts_pkg::*;
  localparam int HA = 1920, HT = 2200, VA = 1080, VT = 1125;
  localparam int CE_DIV = 3;
  localparam int LEAD = 8;                        // camera lead in lines
  localparam logic [15:0] KA = 16'h0123;
  localparam logic [15:0] INV3 = 16'hAAAB;        // 3 * INV3 = 1 (mod 2^16)

  logic clk = 0, rst_n = 0, pix_ce = 0;
  always #5 clk = ~clk;

  logic        s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 1;
  logic [11:0] s_awaddr = '0, s_araddr = '0;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [1:0]  s_bresp, s_rresp;
  logic        s_arvalid = 0, s_arready, s_rvalid, s_rready = 1;
  logic        cam_pix_valid = 0, cam_frame_start = 0;
  logic [PIX_W-1:0] cam_pix_data = '0;
  logic [PIX_W-1:0] vid_data;
  logic        vid_de, vid_hsync, vid_vsync;
  localparam int NP = N_RP * RP_PORTS;
  logic [NP-1:0] rp_in_valid, rp_in_ready, rp_out_valid, rp_out_ready;
  beat_t         rp_in_beat [NP];
  beat_t         rp_out_beat [NP];
  logic        mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t    mem_req;
  mem_rsp_t    mem_rsp;

  ts_top dut (.*);

  dram_model #(.LAT(6), .STALL_PCT(0)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req(mem_req), .req_ready(mem_req_ready),
    .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  logic [15:0] k_now;
  rp_model u_rp (
    .clk, .rst_n, .reconfiguring(1'b0), .k_next(KA), .k(k_now),
    .in_valid(rp_in_valid[0]), .in_beat(rp_in_beat[0]), .in_ready(rp_in_ready[0]),
    .out_valid(rp_out_valid[0]), .out_beat(rp_out_beat[0]), .out_ready(rp_out_ready[0]));
  always_comb
    for (int i = 1; i < NP; i++) begin
      rp_in_ready[i]  = 1'b0;
      rp_out_valid[i] = 1'b0;
      rp_out_beat[i]  = '0;
    end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------------------------------------------------------- pixel clock and sensor
  int ce_cnt = 0;
  always @(posedge clk) begin
    ce_cnt <= (ce_cnt + 1) % CE_DIV;
    pix_ce <= (ce_cnt == 0);
  end

  int chc = 0, cvc = LEAD, cam_f = 0;
  always @(posedge clk) if (rst_n) begin
    cam_pix_valid   <= 1'b0;
    cam_frame_start <= 1'b0;
    if (pix_ce) begin
      if (chc < HA && cvc < VA) begin
        cam_pix_valid   <= 1'b1;
        cam_frame_start <= (chc == 0 && cvc == 0);
        cam_pix_data    <= 16'(chc + 3 * cvc + 5 * cam_f);
      end
      if (chc == HT - 1) begin
        chc <= 0;
        if (cvc == VT - 1) begin cvc <= 0; cam_f <= cam_f + 1; end
        else cvc <= cvc + 1;
      end else chc <= chc + 1;
    end
  end

  // ---------------------------------------------------------------- display check
  logic ce_d = 0;
  always @(posedge clk) ce_d <= pix_ce;
  int px = 0, good_frames = 0, bad_pixels = 0, frames_seen = 0;
  bit frame_ok = 1;
  logic [15:0] c0 = '0;
  always @(posedge clk) if (rst_n && ce_d && vid_de) begin
    int x, y;
    x = px % HA; y = px / HA;
    if (px == 0) begin
      c0 = 16'((vid_data - KA) * INV3);
      frame_ok = (vid_data != 0);
    end else if (frame_ok && vid_data != 16'(3 * (c0 + 16'(x + 3 * y)) + KA)) begin
      frame_ok = 0;
      bad_pixels++;
      if (bad_pixels < 5) $display("pixel (%0d,%0d) of display frame %0d is %h", x, y, frames_seen, vid_data);
    end
    if (px == HA * VA - 1) begin
      px = 0;
      frames_seen++;
      if (frame_ok) good_frames++;
    end else px++;
  end

  // ---------------------------------------------------------------- register access
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d;
    @(posedge clk); while (!s_awready) @(posedge clk);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    @(posedge clk); while (!s_arready) @(posedge clk);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
  endtask

  initial begin
    logic [31:0] v;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(REG_DMA + DMA_BASE, 32'h0010_0000);
    wr(REG_DMA + DMA_RSIZE, 32'd16384);
    wr(REG_DMA + DMA_DIM, {4'd0, 12'(VA), 4'd0, 12'(HA)});        // ring rebuilds frame markers
    wr(REG_DMA + DMA_CTRL, 32'(DMA_RING));
    wr(REG_XBAR + 12'(4 * 0), 32'h8000_0000 | 32'(SRC_CAMERA));         // camera -> partition 0
    wr(REG_XBAR + 12'(4 * EP_DMA0), 32'h8000_0000 | 32'd0);            // partition 0 -> ring
    wr(REG_XBAR + 12'(4 * DST_DISPLAY), 32'h8000_0000 | 32'(EP_DMA0)); // ring -> display
    // frame 0 of the display runs unlocked; then two locked frames
    wait (frames_seen == 3);
    repeat (10) @(posedge clk);
    rd(REG_DISP_STAT, v);
    $display("display frames %0d, good %0d, underruns %0d, resyncs %0d, ring level at the end %0d",
             frames_seen, good_frames, v[15:0], v[31:16], dut.dma_stat[0].level);
    check(good_frames >= 2, "two full 1080p frames reached the display pixel for pixel");
    check(bad_pixels == 0, "no wrong pixel in any displayed frame");
    check(v[31:16] == 0, "the display never lost lock");
    check(v[15:0] <= 1, "no underrun after locking");
    rd(REG_CAM_STAT, v);
    check(v[15:0] == 0, "camera never lost a pixel");
    check(dut.dma_stat[0].full_stalls == 0, "ring never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * HT * VT * CE_DIV) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
