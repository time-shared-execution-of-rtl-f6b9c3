// tb_dma_engine - self-checking test of one DMA engine against a DRAM model.
//
// 1. Ring (decoupling FIFO): the consumer is held off, as if its partition
//    were still being reconfigured; the ring fills, back-pressure stalls are
//    counted, and after release three frames come out in order with rebuilt
//    start-of-frame and end-of-line flags. A stray beat before the first
//    start of frame is dropped.
// 2. Frame store, g = 2, automatic bank swap: two replays of the same bundle
//    give identical frames; after the next bundle the replay shows it.
// 3. Split screen: two writers with different column windows fill one bank,
//    software swaps, and a replay shows the left and right halves.
// 4. Loop: the read side replays the bank without commands.
module tb_dma_engine;
  import ts_pkg::*;
  localparam int W = 8, H = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  dma_cfg_t  cfg;
  dma_cmd_t  cmd;
  dma_stat_t stat;
  logic      s_valid = 0, s_ready, m_valid, m_ready = 0;
  beat_t     s_beat = '0, m_beat;
  logic      wr_req_valid, wr_req_ready, rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [ADDR_W-1:0] wr_req_addr, rd_req_addr;
  logic [PIX_W-1:0]  wr_req_data, rd_rsp_data;

  dma_engine dut (.*);

  // one engine in front of the DRAM model through the arbiter
  logic     mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  logic [0:0]        a_wv, a_wr, a_rv, a_rr, a_rsp;
  logic [ADDR_W-1:0] a_wa [1];
  logic [PIX_W-1:0]  a_wd [1];
  logic [ADDR_W-1:0] a_ra [1];
  assign a_wv[0] = wr_req_valid; assign a_wa[0] = wr_req_addr; assign a_wd[0] = wr_req_data;
  assign a_rv[0] = rd_req_valid; assign a_ra[0] = rd_req_addr;
  assign wr_req_ready = a_wr[0]; assign rd_req_ready = a_rr[0]; assign rd_rsp_valid = a_rsp[0];
  mem_arbiter #(.NE(1)) u_arb (
    .clk, .rst_n, .wr_valid(a_wv), .wr_addr(a_wa), .wr_data(a_wd), .wr_ready(a_wr),
    .rd_valid(a_rv), .rd_addr(a_ra), .rd_ready(a_rr), .rsp_valid(a_rsp), .rsp_data(rd_rsp_data),
    .mem_req_valid(mreq_valid), .mem_req(mreq), .mem_req_ready(mreq_ready),
    .mem_rsp_valid(mrsp_valid), .mem_rsp(mrsp));
  dram_model #(.LAT(5), .STALL_PCT(20)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req(mreq), .req_ready(mreq_ready),
    .rsp_valid(mrsp_valid), .rsp(mrsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [15:0] pix(input int f, input int i);
    return 16'(f * 256 + i);
  endfunction

  // stream source
  task automatic send_frame(input int f);
    for (int i = 0; i < W * H; i++) begin
      @(negedge clk);
      s_valid = 1;
      s_beat  = '{data: pix(f, i), user: (i == 0), last: (i % W == W - 1)};
      @(posedge clk);
      while (!s_ready) @(posedge clk);
    end
    @(negedge clk); s_valid = 0;
  endtask

  // stream sink: collects beats when m_ready is high
  beat_t got [$];
  always @(posedge clk) if (rst_n && m_valid && m_ready) got.push_back(m_beat);

  task automatic expect_frame(input int f, input int cols_lo_f, input int split, input string tag);
    // cols < split come from frame f, the rest from frame cols_lo_f (split = W: one frame)
    bit ok = 1;
    for (int i = 0; i < W * H; i++) begin
      beat_t b; logic [15:0] want;
      if (got.size() == 0) begin ok = 0; break; end
      b = got.pop_front();
      want = (i % W < split) ? pix(f, i) : pix(cols_lo_f, i);
      if (b.data != want || b.user != (i == 0) || b.last != (i % W == W - 1)) begin
        ok = 0;
        $display("  %s pixel %0d: got %h/%b%b want %h", tag, i, b.data, b.user, b.last, want);
      end
    end
    check(ok, tag);
  endtask

  task automatic wait_out(input int n);
    int t = 0;
    while (got.size() < n && t < 4000) begin @(posedge clk); t++; end
  endtask

  initial begin
    cfg = '0; cmd = '0;
    cfg.width = W; cfg.height = H;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------------------------------------------------------- 1 ring
    cfg.mode = DMA_RING; cfg.base = 32'h100; cfg.ring_words = 16;
    @(negedge clk); s_valid = 1; s_beat = '{data:16'hDEAD, user:0, last:0};  // before any frame
    @(posedge clk); @(negedge clk); s_valid = 0;
    fork
      begin send_frame(1); send_frame(2); send_frame(3); end
      begin repeat (150) @(posedge clk); m_ready = 1; end
    join
    check(stat.full_stalls > 0, "ring back-pressured while the consumer was held");
    wait_out(3 * W * H);
    expect_frame(1, 1, W, "ring frame 1");
    expect_frame(2, 2, W, "ring frame 2");
    expect_frame(3, 3, W, "ring frame 3");
    check(got.size() == 0, "ring: no extra beats");
    check(stat.level == 0, "ring drained");

    // ---------------------------------------------------------------- 2 frame store
    @(negedge clk); cfg.mode = DMA_OFF; @(negedge clk);
    cfg.mode = DMA_FRAME; cfg.auto_swap = 1; cfg.g = 2; cfg.base = 32'h1000;
    cfg.col_lo = 0; cfg.col_hi = W - 1;
    send_frame(10); send_frame(11);
    repeat (2) @(posedge clk);
    check(stat.rd_bank == 1'b1, "banks swapped after g frames");
    for (int p = 0; p < 2; p++) begin                 // two pipelines replay the bundle
      @(negedge clk); cmd.rd_start = 1; @(negedge clk); cmd.rd_start = 0;
      wait_out(2 * W * H);
      expect_frame(10, 10, W, $sformatf("replay %0d frame 0", p));
      expect_frame(11, 11, W, $sformatf("replay %0d frame 1", p));
      repeat (3) @(posedge clk);
      check(!stat.rd_busy, "replay finished");
    end
    send_frame(12); send_frame(13);
    @(negedge clk); cmd.rd_start = 1; @(negedge clk); cmd.rd_start = 0;
    wait_out(2 * W * H);
    expect_frame(12, 12, W, "next bundle frame 0");
    expect_frame(13, 13, W, "next bundle frame 1");

    // ---------------------------------------------------------------- 3 split screen
    @(negedge clk); cfg.mode = DMA_OFF; @(negedge clk);
    cfg.mode = DMA_FRAME; cfg.auto_swap = 0; cfg.g = 1; cfg.base = 32'h2000;
    cfg.col_lo = 0; cfg.col_hi = W / 2 - 1;
    check(!s_ready || !stat.wr_busy, "write side idle before wr_start");
    @(negedge clk); cmd.wr_start = 1; @(negedge clk); cmd.wr_start = 0;
    send_frame(20);
    @(negedge clk); cfg.col_lo = W / 2; cfg.col_hi = W - 1;
    cmd.wr_start = 1; @(negedge clk); cmd.wr_start = 0;
    send_frame(21);
    @(negedge clk); cmd.swap = 1; @(negedge clk); cmd.swap = 0;
    @(negedge clk); cmd.rd_start = 1; @(negedge clk); cmd.rd_start = 0;
    wait_out(W * H);
    expect_frame(20, 21, W / 2, "split screen halves");

    // ---------------------------------------------------------------- 4 loop
    @(negedge clk); cfg.mode = DMA_LOOP;
    wait_out(3 * W * H);
    expect_frame(20, 21, W / 2, "loop replay 1");
    expect_frame(20, 21, W / 2, "loop replay 2");
    expect_frame(20, 21, W / 2, "loop replay 3");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
