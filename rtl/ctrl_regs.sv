// ctrl_regs - memory-mapped control registers written by the processor.
//
// The runtime manager on the ARM core sets up each timeslice through these
// registers: the crossbar routes (which source feeds each destination), the
// DMA engines' buffers and modes, the camera frame size and the downsampling
// factor s. Setting up a new topology is a handful of register writes, which
// is why changing the interconnect costs microseconds while reloading a
// partition costs milliseconds. The paper gives only that these are control
// registers reached over AXI4 memory-mapped I/O; the register map below
// (see ts_pkg) is this design's own.
//
// Bus: AXI4-Lite slave, 32-bit data, 12-bit byte address. A write is taken
// when address and data are both valid and no response is pending; byte
// strobes are ignored (registers are written whole). Reads return in the
// cycle after the address is taken. Unmapped addresses read as zero and
// ignore writes; the response is always OKAY.
// The command bits of a DMA control register (rd_start, wr_start, swap) are
// not stored: a write with such a bit set gives a one-cycle pulse.
module ctrl_regs
  import ts_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [11:0]       s_awaddr,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  logic [31:0]       s_wdata,
  output logic              s_bvalid,
  input  logic              s_bready,
  output logic [1:0]        s_bresp,
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [11:0]       s_araddr,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  // configuration out
  output logic [N_END-1:0]  xbar_en,
  output logic [SEL_W-1:0]  xbar_sel [N_END],
  output logic [7:0]        downs_s,
  output logic [DIM_W-1:0]  cam_width,
  output logic [DIM_W-1:0]  cam_height,
  output dma_cfg_t          dma_cfg [N_DMA],
  output dma_cmd_t          dma_cmd [N_DMA],
  // status in
  input  dma_stat_t         dma_stat [N_DMA],
  input  logic [15:0]       cam_dropped,
  input  logic [15:0]       ds_dropped,
  input  logic [15:0]       disp_underruns,
  input  logic [15:0]       disp_resyncs
);
  logic wr_go;
  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  // DMA window decode
  function automatic logic is_dma(input logic [11:0] a, output int unsigned e, output logic [5:0] off);
    logic [11:0] rel;
    rel = a - REG_DMA;
    e   = int'(rel >> 6);
    off = rel[5:0];
    return (a >= REG_DMA) && (e < N_DMA);
  endfunction

  // writes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid   <= 1'b0;
      xbar_en    <= '0;
      for (int d = 0; d < N_END; d++) xbar_sel[d] <= '0;
      downs_s    <= 8'd1;
      cam_width  <= DIM_W'(1920);
      cam_height <= DIM_W'(1080);
      for (int e = 0; e < N_DMA; e++) dma_cfg[e] <= '0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_go) begin
        int unsigned e;
        logic [5:0]  off;
        s_bvalid <= 1'b1;
        if (s_awaddr < 12'(4 * N_END) && s_awaddr[1:0] == 2'b00) begin
          xbar_en [s_awaddr >> 2] <= s_wdata[31];
          xbar_sel[s_awaddr >> 2] <= SEL_W'(s_wdata);
        end else if (s_awaddr == REG_DOWNS)
          downs_s <= s_wdata[7:0];
        else if (s_awaddr == REG_CAM_DIM) begin
          cam_width  <= s_wdata[DIM_W-1:0];
          cam_height <= s_wdata[16 +: DIM_W];
        end else if (is_dma(s_awaddr, e, off)) begin
          unique case (off)
            DMA_CTRL: begin
              dma_cfg[e].mode      <= dma_mode_e'(s_wdata[1:0]);
              dma_cfg[e].auto_swap <= s_wdata[2];
            end
            DMA_BASE:  dma_cfg[e].base       <= s_wdata[ADDR_W-1:0];
            DMA_RSIZE: dma_cfg[e].ring_words <= s_wdata[ADDR_W-1:0];
            DMA_DIM: begin
              dma_cfg[e].width  <= s_wdata[DIM_W-1:0];
              dma_cfg[e].height <= s_wdata[16 +: DIM_W];
            end
            DMA_WIN: begin
              dma_cfg[e].col_lo <= s_wdata[DIM_W-1:0];
              dma_cfg[e].col_hi <= s_wdata[16 +: DIM_W];
            end
            DMA_G:     dma_cfg[e].g <= s_wdata[3:0];
            default: ;
          endcase
        end
      end
    end
  end

  // command pulses: one cycle, from a write of the DMA control register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      for (int e = 0; e < N_DMA; e++) dma_cmd[e] <= '0;
    else
      for (int e = 0; e < N_DMA; e++)
        if (wr_go && s_awaddr == REG_DMA + 12'(64 * e) + 12'(DMA_CTRL))
          dma_cmd[e] <= '{rd_start: s_wdata[8], wr_start: s_wdata[9], swap: s_wdata[10]};
        else
          dma_cmd[e] <= '0;
  end

  // reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        int unsigned e;
        logic [5:0]  off;
        s_rvalid <= 1'b1;
        s_rdata  <= '0;
        if (s_araddr < 12'(4 * N_END) && s_araddr[1:0] == 2'b00)
          s_rdata <= {xbar_en[s_araddr >> 2], 31'(xbar_sel[s_araddr >> 2])};
        else if (s_araddr == REG_DOWNS)    s_rdata <= 32'(downs_s);
        else if (s_araddr == REG_CAM_DIM)  s_rdata <= {4'd0, cam_height, 4'd0, cam_width};
        else if (s_araddr == REG_CAM_STAT) s_rdata <= {ds_dropped, cam_dropped};
        else if (s_araddr == REG_DISP_STAT) s_rdata <= {disp_resyncs, disp_underruns};
        else if (is_dma(s_araddr, e, off)) begin
          unique case (off)
            DMA_CTRL:  s_rdata <= {29'd0, dma_cfg[e].auto_swap, dma_cfg[e].mode};
            DMA_BASE:  s_rdata <= 32'(dma_cfg[e].base);
            DMA_RSIZE: s_rdata <= 32'(dma_cfg[e].ring_words);
            DMA_DIM:   s_rdata <= {4'd0, dma_cfg[e].height, 4'd0, dma_cfg[e].width};
            DMA_WIN:   s_rdata <= {4'd0, dma_cfg[e].col_hi, 4'd0, dma_cfg[e].col_lo};
            DMA_G:     s_rdata <= 32'(dma_cfg[e].g);
            DMA_STAT:  s_rdata <= {29'd0, dma_stat[e].rd_bank, dma_stat[e].wr_busy, dma_stat[e].rd_busy};
            DMA_FRM:   s_rdata <= {dma_stat[e].rd_frames, dma_stat[e].wr_frames};
            DMA_LEVEL: s_rdata <= 32'(dma_stat[e].level);
            DMA_FULL:  s_rdata <= 32'(dma_stat[e].full_stalls);
            default: ;
          endcase
        end
      end
    end
  end

  // AXI rule: a response, once valid, stays until it is taken.
  logic bvalid_q, rvalid_q, bready_q, rready_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin bvalid_q <= 1'b0; rvalid_q <= 1'b0; bready_q <= 1'b0; rready_q <= 1'b0; end
    else begin bvalid_q <= s_bvalid; rvalid_q <= s_rvalid; bready_q <= s_bready; rready_q <= s_rready; end
  end
  always_ff @(posedge clk)
    if (rst_n) begin
      assert (!(bvalid_q && !bready_q && !s_bvalid)) else $error("ctrl_regs: bvalid dropped before bready");
      assert (!(rvalid_q && !rready_q && !s_rvalid)) else $error("ctrl_regs: rvalid dropped before rready");
    end
endmodule
