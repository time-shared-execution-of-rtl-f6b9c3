// ts_top - static region of the time-shared vision framework.
//
// Everything that stays loaded while the reconfigurable partitions (RPs) are
// swapped: the streaming crossbar that forms each pipeline's topology, the
// camera controller (followed by the frame downsampler), the display
// controller, five DMA engines that give DRAM streaming connections (camera
// input double buffer, display output double buffer, and decoupling rings for
// staggered start), the arbiter that shares the DRAM port among them, and the
// control registers the ARM core writes. The RPs themselves are not part of
// this module: their stream ports (RP_PORTS inputs and outputs per RP) leave
// as ports, to be connected to whatever module is loaded into each partition.
// The DRAM port also leaves the module (the memory controller is a hard block
// of the SoC).
//
// Crossbar endpoint numbers (ts_pkg): sources 0..2*N_RP-1 are RP outputs
// (RP r, port p is 2r+p), source 2*N_RP is the camera, sources 2*N_RP+1+e the
// read side of DMA engine e. Destinations use the same numbers for RP inputs,
// the display and the write side of DMA engine e.
//
// One clock drives everything; pix_ce gives the display pixel rate. The
// display raster defaults to 1920x1080 at the standard CEA-861 timing.
module ts_top
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
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pix_ce,
  // AXI4-Lite control port from the processor
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
  // camera pixel bus
  input  logic              cam_pix_valid,
  input  logic [PIX_W-1:0]  cam_pix_data,
  input  logic              cam_frame_start,
  // video out
  output logic [PIX_W-1:0]  vid_data,
  output logic              vid_de,
  output logic              vid_hsync,
  output logic              vid_vsync,
  // reconfigurable partition stream ports
  output logic [N_RP*RP_PORTS-1:0] rp_in_valid,
  output beat_t                    rp_in_beat  [N_RP*RP_PORTS],
  input  logic [N_RP*RP_PORTS-1:0] rp_in_ready,
  input  logic [N_RP*RP_PORTS-1:0] rp_out_valid,
  input  beat_t                    rp_out_beat [N_RP*RP_PORTS],
  output logic [N_RP*RP_PORTS-1:0] rp_out_ready,
  // DRAM port
  output logic              mem_req_valid,
  output mem_req_t          mem_req,
  input  logic              mem_req_ready,
  input  logic              mem_rsp_valid,
  input  mem_rsp_t          mem_rsp
);
  localparam int unsigned NRPP = N_RP * RP_PORTS;

  // ------------------------------------------------------------ control
  logic [N_END-1:0] xbar_en;
  logic [SEL_W-1:0] xbar_sel [N_END];
  logic [7:0]       downs_s;
  logic [DIM_W-1:0] cam_width, cam_height;
  dma_cfg_t         dma_cfg  [N_DMA];
  dma_cmd_t         dma_cmd  [N_DMA];
  dma_stat_t        dma_stat [N_DMA];
  logic [15:0]      cam_dropped, ds_dropped, disp_underruns, disp_resyncs;

  ctrl_regs u_regs (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .xbar_en, .xbar_sel, .downs_s, .cam_width, .cam_height,
    .dma_cfg, .dma_cmd, .dma_stat,
    .cam_dropped, .ds_dropped, .disp_underruns, .disp_resyncs
  );

  // ------------------------------------------------------------ crossbar
  logic [N_END-1:0] src_valid, src_ready, dst_valid, dst_ready;
  beat_t            src_beat [N_END];
  beat_t            dst_beat [N_END];

  stream_xbar #(.N(N_END)) u_xbar (
    .clk, .rst_n,
    .cfg_en(xbar_en), .cfg_sel(xbar_sel),
    .src_valid, .src_beat, .src_ready,
    .dst_valid, .dst_beat, .dst_ready
  );

  for (genvar i = 0; i < NRPP; i++) begin : g_rp
    assign src_valid[i]    = rp_out_valid[i];
    assign src_beat[i]     = rp_out_beat[i];
    assign rp_out_ready[i] = src_ready[i];
    assign rp_in_valid[i]  = dst_valid[i];
    assign rp_in_beat[i]   = dst_beat[i];
    assign dst_ready[i]    = rp_in_ready[i];
  end

  // ------------------------------------------------------------ camera
  logic  cam_valid, cam_ready;
  beat_t cam_beat;

  camera_ctrl u_cam (
    .clk, .rst_n, .width(cam_width),
    .pix_valid(cam_pix_valid), .pix_data(cam_pix_data), .frame_start(cam_frame_start),
    .m_valid(cam_valid), .m_beat(cam_beat), .m_ready(cam_ready),
    .dropped(cam_dropped)
  );

  frame_downsampler u_down (
    .clk, .rst_n, .s(downs_s),
    .s_valid(cam_valid), .s_beat(cam_beat), .s_ready(cam_ready),
    .m_valid(src_valid[SRC_CAMERA]), .m_beat(src_beat[SRC_CAMERA]),
    .m_ready(src_ready[SRC_CAMERA]),
    .dropped(ds_dropped)
  );

  // ------------------------------------------------------------ display
  display_ctrl #(
    .H_ACTIVE(H_ACTIVE), .H_FP(H_FP), .H_SYNC(H_SYNC), .H_BP(H_BP),
    .V_ACTIVE(V_ACTIVE), .V_FP(V_FP), .V_SYNC(V_SYNC), .V_BP(V_BP)
  ) u_disp (
    .clk, .rst_n, .pix_ce,
    .s_valid(dst_valid[DST_DISPLAY]), .s_beat(dst_beat[DST_DISPLAY]),
    .s_ready(dst_ready[DST_DISPLAY]),
    .vid_data, .vid_de, .vid_hsync, .vid_vsync,
    .underruns(disp_underruns), .resyncs(disp_resyncs)
  );

  // ------------------------------------------------------------ DMA engines
  logic [N_DMA-1:0]  wr_valid, wr_ready, rd_valid, rd_ready, rsp_valid;
  logic [ADDR_W-1:0] wr_addr [N_DMA];
  logic [PIX_W-1:0]  wr_data [N_DMA];
  logic [ADDR_W-1:0] rd_addr [N_DMA];
  logic [PIX_W-1:0]  rsp_data;

  for (genvar e = 0; e < N_DMA; e++) begin : g_dma
    dma_engine u_dma (
      .clk, .rst_n,
      .cfg(dma_cfg[e]), .cmd(dma_cmd[e]), .stat(dma_stat[e]),
      .s_valid(dst_valid[EP_DMA0 + e]), .s_beat(dst_beat[EP_DMA0 + e]),
      .s_ready(dst_ready[EP_DMA0 + e]),
      .m_valid(src_valid[EP_DMA0 + e]), .m_beat(src_beat[EP_DMA0 + e]),
      .m_ready(src_ready[EP_DMA0 + e]),
      .wr_req_valid(wr_valid[e]), .wr_req_addr(wr_addr[e]), .wr_req_data(wr_data[e]),
      .wr_req_ready(wr_ready[e]),
      .rd_req_valid(rd_valid[e]), .rd_req_addr(rd_addr[e]), .rd_req_ready(rd_ready[e]),
      .rd_rsp_valid(rsp_valid[e]), .rd_rsp_data(rsp_data)
    );
  end

  mem_arbiter #(.NE(N_DMA)) u_arb (
    .clk, .rst_n,
    .wr_valid, .wr_addr, .wr_data, .wr_ready,
    .rd_valid, .rd_addr, .rd_ready,
    .rsp_valid, .rsp_data,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_rsp_valid, .mem_rsp
  );
endmodule
