// tb_ctrl_regs - self-checking test of the control registers over AXI4-Lite.
//
// Writes every kind of register and checks both the configuration outputs
// and the read-back values; checks that DMA command bits give one-cycle
// pulses and are not stored, that status inputs read back, and that an
// unmapped address reads zero. Address and data are offered in different
// cycles to check that a write waits for both.
module tb_ctrl_regs;
  import ts_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 1;
  logic [11:0] s_awaddr = '0, s_araddr = '0;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [1:0]  s_bresp, s_rresp;
  logic        s_arvalid = 0, s_arready, s_rvalid, s_rready = 1;
  logic [N_END-1:0]  xbar_en;
  logic [SEL_W-1:0]  xbar_sel [N_END];
  logic [7:0]        downs_s;
  logic [DIM_W-1:0]  cam_width, cam_height;
  dma_cfg_t          dma_cfg [N_DMA];
  dma_cmd_t          dma_cmd [N_DMA];
  dma_stat_t         dma_stat [N_DMA];
  logic [15:0] cam_dropped = 16'h0011, ds_dropped = 16'h0022, disp_underruns = 16'h0033, disp_resyncs = 16'h0044;

  ctrl_regs dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int pulses [N_DMA];
  always @(posedge clk) if (rst_n) for (int e = 0; e < N_DMA; e++) if (dma_cmd[e].rd_start) pulses[e]++;

  task automatic wr(input logic [11:0] a, input logic [31:0] d, input bit split = 0);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a;
    if (split) begin @(negedge clk); check(!s_awready, "write waits for data"); end
    s_wvalid = 1; s_wdata = d;
    @(posedge clk); while (!s_awready) @(posedge clk);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    check(s_bresp == 2'b00, "write response OKAY");
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
    for (int e = 0; e < N_DMA; e++) begin dma_stat[e] = '0; pulses[e] = 0; end
    dma_stat[3].rd_frames = 16'h0007; dma_stat[3].wr_frames = 16'h0009;
    dma_stat[3].level = 32'd1234; dma_stat[3].rd_bank = 1'b1; dma_stat[3].full_stalls = 16'd55;
    repeat (2) @(posedge clk);
    rst_n = 1;

    wr(REG_XBAR + 12'(4 * 7), 32'h8000_0015, 1);
    check(xbar_en[7] && xbar_sel[7] == 5'd21, "crossbar route 7 <- 21");
    wr(REG_XBAR + 12'(4 * 20), 32'h8000_0003);
    rd(REG_XBAR + 12'(4 * 20), v); check(v == 32'h8000_0003, "crossbar route reads back");
    wr(REG_XBAR + 12'(4 * 7), 32'h0000_0015);
    check(!xbar_en[7], "crossbar route disabled");
    wr(REG_DOWNS, 32'd3);            check(downs_s == 8'd3, "downsampling factor");
    wr(REG_CAM_DIM, {4'd0, 12'd720, 4'd0, 12'd1280});
    check(cam_width == 1280 && cam_height == 720, "camera size");
    rd(REG_CAM_STAT, v);             check(v == 32'h0022_0011, "camera status");
    rd(REG_DISP_STAT, v);            check(v == 32'h0044_0033, "display status");

    wr(REG_DMA + 12'h40 * 2 + 12'(DMA_BASE), 32'h0010_0000);
    wr(REG_DMA + 12'h40 * 2 + 12'(DMA_RSIZE), 32'd4096);
    wr(REG_DMA + 12'h40 * 2 + 12'(DMA_DIM), {4'd0, 12'd1080, 4'd0, 12'd1920});
    wr(REG_DMA + 12'h40 * 2 + 12'(DMA_WIN), {4'd0, 12'd959, 4'd0, 12'd0});
    wr(REG_DMA + 12'h40 * 2 + 12'(DMA_G), 32'd3);
    wr(REG_DMA + 12'h40 * 2 + 12'(DMA_CTRL), 32'h0000_0106);   // FRAME, auto_swap, rd_start
    @(posedge clk); @(negedge clk);
    check(dma_cfg[2].base == 32'h0010_0000 && dma_cfg[2].ring_words == 4096, "DMA base and ring size");
    check(dma_cfg[2].width == 1920 && dma_cfg[2].height == 1080, "DMA frame size");
    check(dma_cfg[2].col_lo == 0 && dma_cfg[2].col_hi == 959, "DMA window");
    check(dma_cfg[2].g == 4'd3 && dma_cfg[2].mode == DMA_FRAME && dma_cfg[2].auto_swap, "DMA mode and g");
    check(pulses[2] == 1 && pulses[0] == 0, $sformatf("rd_start is a single pulse on engine 2 only (%0d %0d)", pulses[2], pulses[0]));
    check(dma_cmd[2] == '0, "command bits are not stored");
    rd(REG_DMA + 12'h40 * 2 + 12'(DMA_CTRL), v); check(v == 32'h6, "control reads back without commands");
    rd(REG_DMA + 12'h40 * 2 + 12'(DMA_G), v);    check(v == 32'd3, "g reads back");
    rd(REG_DMA + 12'h40 * 3 + 12'(DMA_FRM), v);  check(v == 32'h0007_0009, "frame counters");
    rd(REG_DMA + 12'h40 * 3 + 12'(DMA_LEVEL), v); check(v == 32'd1234, "ring level");
    rd(REG_DMA + 12'h40 * 3 + 12'(DMA_STAT), v); check(v == 32'h4, "status bits");
    rd(REG_DMA + 12'h40 * 3 + 12'(DMA_FULL), v); check(v == 32'd55, "full stalls");
    rd(12'hFF0, v);                               check(v == 0, "unmapped reads zero");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
