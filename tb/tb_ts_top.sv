// tb_ts_top - end-to-end test of the static region running time-shared
// pipelines, with a small frame (8x4 pixels) and a matching small display
// raster so that many rounds fit in a short simulation.
//
// The testbench plays the runtime manager on the processor: it programs the
// control registers over AXI4-Lite, "reconfigures" partitions (rp_model,
// with a fixed reconfiguration time), and checks what reaches the display.
// Set-up: the camera fills DMA engine 0 (double buffer, g = 2 frames per
// bundle, every 2nd camera frame kept: s = 2); DMA engine 1 is the output
// double buffer replayed to the display; DMA engine 2 is a decoupling ring.
// Three partitions hold modules A, B/D and C. Each round the manager waits
// for a new bundle and runs two pipelines in turn, each writing its half of
// the split-screen output, then swaps the output banks:
//   rounds 1-3 : P1 = A->B->C and P2 = A->D->C. Switching needs the middle
//                partition reloaded (substitution). The reload overlaps with
//                processing: A streams into the ring while the middle
//                partition is rewritten (staggered start).
//   rounds 4-6 : P1 = A->B->C and P3 = A->C. P3 only re-routes the crossbar
//                around the middle partition (deletion); once B is back in
//                place nothing is reloaded any more.
// Checked: every displayed frame is one camera frame f with f even (s = 2),
// its left half P1(f) and its right half the second pipeline's result for
// the same f; both pipeline pairs reach the display; and each mechanism
// (downsampling drop, automatic bank swap, ring back-pressure/decoupling,
// partition reload, crossbar-only switch, output bank swap) happened.
module tb_ts_top;
  import ts_pkg::*;
  localparam int W = 8, H = 4, G = 2, S = 2;
  localparam int HA = W, HF = 2, HS = 2, HB = 2, VA = H, VF = 1, VS = 1, VB = 1;
  localparam int CE_DIV = 4;
  localparam int CAM_PERIOD = (HA + HF + HS + HB) * (VA + VF + VS + VB) * CE_DIV;
  localparam int T_CFG = 200;                 // partition reload time in cycles
  localparam logic [15:0] KA = 16'h0011, KB = 16'h0202, KC = 16'h3003, KD = 16'h0440;

  logic clk = 0, rst_n = 0, pix_ce = 0;
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- DUT
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

  ts_top #(.H_ACTIVE(HA), .H_FP(HF), .H_SYNC(HS), .H_BP(HB),
           .V_ACTIVE(VA), .V_FP(VF), .V_SYNC(VS), .V_BP(VB)) dut (.*);

  dram_model #(.LAT(6), .STALL_PCT(10)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req(mem_req), .req_ready(mem_req_ready),
    .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  // ---------------------------------------------------------------- partitions
  logic [2:0]  reconf = '0;
  logic [15:0] k_next [3];
  logic [15:0] k_now [3];
  for (genvar r = 0; r < 3; r++) begin : g_rp
    rp_model u_rp (
      .clk, .rst_n, .reconfiguring(reconf[r]), .k_next(k_next[r]), .k(k_now[r]),
      .in_valid(rp_in_valid[2*r]), .in_beat(rp_in_beat[2*r]), .in_ready(rp_in_ready[2*r]),
      .out_valid(rp_out_valid[2*r]), .out_beat(rp_out_beat[2*r]), .out_ready(rp_out_ready[2*r]));
  end
  always_comb begin
    for (int i = 0; i < NP; i++) begin
      if (i % 2 == 1 || i >= 6) begin
        rp_in_ready[i]  = 1'b0;
        rp_out_valid[i] = 1'b0;
        rp_out_beat[i]  = '0;
      end
    end
  end

  // ---------------------------------------------------------------- bookkeeping
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n_reconfig = 0, n_xbar_only = 0, n_ring_stall = 0, n_ring_used = 0, n_out_swap = 0;
  int n_cam_swap = 0;
  logic cam_bank_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_dma[2].u_dma.s_valid && !dut.g_dma[2].u_dma.s_ready &&
        dut.g_dma[2].u_dma.cfg.mode == DMA_RING) n_ring_stall++;
    if (dut.g_dma[2].u_dma.level > 0) n_ring_used++;
    cam_bank_q <= dut.dma_stat[0].rd_bank;
    if (dut.dma_stat[0].rd_bank != cam_bank_q) n_cam_swap++;
  end

  // ---------------------------------------------------------------- camera and pixel clock
  always @(posedge clk) begin
    int c = 0;
    c = (c + 1) % CE_DIV;
    pix_ce <= (c == 0);
  end

  int cam_f = 0;
  bit cam_on = 0;    // the sensor is switched on once the buffers are set up
  initial begin
    wait (cam_on);
    forever begin
      for (int i = 0; i < W * H; i++) begin
        @(negedge clk);
        cam_pix_valid = 1; cam_frame_start = (i == 0); cam_pix_data = 16'(cam_f * 64 + i);
        @(negedge clk);
        cam_pix_valid = 0; cam_frame_start = 0;
      end
      repeat (CAM_PERIOD - 2 * W * H) @(negedge clk);
      cam_f++;
    end
  end

  // ---------------------------------------------------------------- display capture
  logic ce_d = 0;
  always @(posedge clk) ce_d <= pix_ce;
  logic [15:0] disp_px [$];
  always @(posedge clk) if (rst_n && ce_d && vid_de) disp_px.push_back(vid_data);

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
  function automatic logic [11:0] dreg(input int e, input logic [5:0] off);
    return REG_DMA + 12'(64 * e) + 12'(off);
  endfunction
  task automatic route(input int dst, input int src);
    wr(REG_XBAR + 12'(4 * dst), 32'h8000_0000 | 32'(src));
  endtask
  task automatic unroute(input int dst);
    wr(REG_XBAR + 12'(4 * dst), 32'h0);
  endtask

  localparam int SRC_RP0 = 0, SRC_RP1 = 2, SRC_RP2 = 4;
  localparam int DST_RP0 = 0, DST_RP1 = 2, DST_RP2 = 4;
  localparam int EP_IN = EP_DMA0, EP_OUT = EP_DMA0 + 1, EP_RING = EP_DMA0 + 2;

  // reload partition r with module k (the processor blocks while it runs)
  task automatic reload(input int r, input logic [15:0] k);
    @(negedge clk); reconf[r] = 1; k_next[r] = k;
    repeat (T_CFG) @(negedge clk);
    reconf[r] = 0;
    n_reconfig++;
  endtask

  // run one pipeline for one bundle. mid: module wanted in partition 1
  // (0: partition 1 not used). half: 0 left, 1 right.
  task automatic run_pipeline(input logic [15:0] mid, input int half);
    logic [31:0] v;
    bit need_reload;
    need_reload = (mid != 0) && (k_now[1] != mid);
    for (int d = 0; d < 6; d++) unroute(d);
    unroute(EP_OUT); unroute(EP_RING);
    wr(dreg(2, DMA_CTRL), 32'(DMA_OFF));
    // output window and start of the output write
    wr(dreg(1, DMA_WIN), {4'd0, 12'(half ? W - 1 : W / 2 - 1), 4'd0, 12'(half ? W / 2 : 0)});
    wr(dreg(1, DMA_CTRL), 32'(DMA_LOOP) | (32'd1 << 9));
    route(DST_RP0, EP_IN);
    if (mid == 0) begin
      route(DST_RP2, SRC_RP0);                      // skip partition 1
      n_xbar_only++;
    end else begin
      route(DST_RP2, SRC_RP1);
      if (need_reload) begin                        // decouple through the ring
        wr(dreg(2, DMA_CTRL), 32'(DMA_RING));
        route(EP_RING, SRC_RP0);
        route(DST_RP1, EP_RING);
      end else begin
        route(DST_RP1, SRC_RP0);
        n_xbar_only++;
      end
    end
    route(EP_OUT, SRC_RP2);
    // start the replay of the bundle; reload partition 1 while A streams
    wr(dreg(0, DMA_CTRL), 32'(DMA_FRAME) | 32'h4 | (32'd1 << 8));
    if (need_reload) reload(1, mid);
    // wait for the output buffer to have taken its g frames
    do rd(dreg(1, DMA_STAT), v); while (v[1]);
  endtask

  function automatic logic [15:0] f_rp(input logic [15:0] x, input logic [15:0] k);
    return 16'(3 * x + k);
  endfunction
  function automatic logic [15:0] p1(input logic [15:0] x); return f_rp(f_rp(f_rp(x, KA), KB), KC); endfunction
  function automatic logic [15:0] p2(input logic [15:0] x); return f_rp(f_rp(f_rp(x, KA), KD), KC); endfunction
  function automatic logic [15:0] p3(input logic [15:0] x); return f_rp(f_rp(x, KA), KC); endfunction

  int seen_p2 = 0, seen_p3 = 0, bad_frames = 0, odd_frames = 0, blank_frames = 0;
  task automatic classify_display();
    int nfr;
    nfr = disp_px.size() / (W * H);
    for (int fr = 0; fr < nfr; fr++) begin
      int base, found;
      base = fr * W * H;
      found = -1;
      if (disp_px[base] == 0) begin blank_frames++; continue; end
      for (int f = 0; f <= cam_f && found < 0; f++)
        if (disp_px[base] == p1(16'(f * 64))) found = f;
      if (found < 0) begin bad_frames++; $display("bad display frame %0d: no camera frame", fr); continue; end
      begin
        bit ok1 = 1, ok2 = 1, ok3 = 1;
        for (int i = 0; i < W * H; i++) begin
          logic [15:0] x = 16'(found * 64 + i);
          if (i % W < W / 2) begin if (disp_px[base + i] != p1(x)) ok1 = 0; end
          else begin
            if (disp_px[base + i] != p2(x)) ok2 = 0;
            if (disp_px[base + i] != p3(x)) ok3 = 0;
          end
        end
        if (!ok1 || !(ok2 || ok3)) begin
          bad_frames++;
          $display("bad display frame %0d: camera frame %0d, left %0d, right P2 %0d P3 %0d", fr, found, ok1, ok2, ok3);
          for (int i = 0; i < W * H; i++) $write("%h ", disp_px[base + i]); $display("");
        end
        if (ok1 && ok2) seen_p2++;
        if (ok1 && ok3) seen_p3++;
        if (found % S != 0) odd_frames++;
      end
    end
  endtask

  initial begin
    logic [31:0] v;
    logic        bank;
    k_next[0] = KA; k_next[1] = KB; k_next[2] = KC;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // one-time set-up
    wr(REG_CAM_DIM, {4'd0, 12'(H), 4'd0, 12'(W)});
    wr(REG_DOWNS, S);
    for (int e = 0; e < 3; e++) begin
      wr(dreg(e, DMA_DIM), {4'd0, 12'(H), 4'd0, 12'(W)});
      wr(dreg(e, DMA_G), G);
      wr(dreg(e, DMA_WIN), {4'd0, 12'(W - 1), 4'd0, 12'd0});
    end
    wr(dreg(0, DMA_BASE), 32'h0000_1000);
    wr(dreg(1, DMA_BASE), 32'h0000_2000);
    wr(dreg(2, DMA_BASE), 32'h0000_3000);
    wr(dreg(2, DMA_RSIZE), 32'd48);
    wr(dreg(0, DMA_CTRL), 32'(DMA_FRAME) | 32'h4);    // camera buffer, automatic swap
    wr(dreg(1, DMA_CTRL), 32'(DMA_LOOP));             // display buffer
    route(EP_IN, SRC_CAMERA);
    route(DST_DISPLAY, EP_OUT);
    cam_on = 1;

    for (int round = 0; round < 6; round++) begin
      // wait for a new bundle from the camera
      rd(dreg(0, DMA_STAT), v); bank = v[2];
      do rd(dreg(0, DMA_STAT), v); while (v[2] == bank);
      run_pipeline(KB, 0);
      run_pipeline(round < 3 ? KD : 16'h0, 1);
      wr(dreg(1, DMA_CTRL), 32'(DMA_LOOP) | (32'd1 << 10));   // show the new output
      n_out_swap++;
    end
    repeat (3 * G * CAM_PERIOD) @(posedge clk);

    classify_display();
    $display("display frames %0d: P1|P2 %0d, P1|P3 %0d, blank %0d, bad %0d",
             disp_px.size() / (W * H), seen_p2, seen_p3, blank_frames, bad_frames);
    $display("mechanisms: reloads %0d, crossbar-only switches %0d, ring stalls %0d, ring busy cycles %0d, camera swaps %0d, output swaps %0d",
             n_reconfig, n_xbar_only, n_ring_stall, n_ring_used, n_cam_swap, n_out_swap);
    check(bad_frames == 0, "every displayed frame is a split screen of two pipelines on one camera frame");
    check(odd_frames == 0, "only every s-th camera frame is processed");
    check(seen_p2 > 0, "P1|P2 rounds reached the display");
    check(seen_p3 > 0, "P1|P3 rounds reached the display");
    rd(REG_CAM_STAT, v);
    check(v[31:16] > 0, "downsampler dropped frames");
    check(v[15:0] == 0, "camera never lost a pixel");
    check(n_cam_swap > 0, "camera buffer swapped banks");
    check(n_reconfig >= 4, "partitions were reloaded");
    check(n_xbar_only >= 3, "pipelines switched by crossbar alone");
    check(n_ring_used > 0, "the ring decoupled a partition being reloaded");
    check(n_ring_stall > 0 || n_ring_used > T_CFG, "the ring held data while the consumer was absent");
    check(n_out_swap == 6, "output banks swapped once per round");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
