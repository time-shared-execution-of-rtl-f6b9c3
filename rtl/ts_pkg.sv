// ts_pkg - types and constants shared by the time-sharing static region.
//
// The static region connects ten reconfigurable partitions (RPs), a camera
// controller, a display controller and five DMA engines through one streaming
// crossbar (endpoint counts follow the paper). Pixels travel as AXI4-Stream
// style beats: one 16-bit YUYV422 pixel per beat, tuser marks the first pixel
// of a frame and tlast the last pixel of a line (the Xilinx video convention;
// the exact side-band use is this design's choice). Giving every RP two stream
// inputs and two stream outputs, so that fork (duplicate) and join (merge)
// stages fit in any RP, is also this design's choice.
package ts_pkg;

  parameter int unsigned N_RP      = 10;  // reconfigurable partitions
  parameter int unsigned RP_PORTS  = 2;   // stream inputs and outputs per RP
  parameter int unsigned N_DMA     = 5;   // DMA engines (DRAM streaming connections)
  parameter int unsigned PIX_W     = 16;  // bits per pixel (YUYV422)
  parameter int unsigned ADDR_W    = 32;  // DRAM word address width
  parameter int unsigned DIM_W     = 12;  // frame width / height fields (up to 4095)

  // Crossbar endpoint numbering. Sources: RP outputs, camera, DMA read sides.
  // Destinations: RP inputs, display, DMA write sides.
  parameter int unsigned N_END     = N_RP * RP_PORTS + 1 + N_DMA;  // 26 each way
  parameter int unsigned SRC_CAMERA  = N_RP * RP_PORTS;
  parameter int unsigned DST_DISPLAY = N_RP * RP_PORTS;
  parameter int unsigned EP_DMA0     = N_RP * RP_PORTS + 1;
  parameter int unsigned SEL_W     = $clog2(N_END);

  // One stream beat (valid and ready travel beside it).
  typedef struct packed {
    logic [PIX_W-1:0] data;
    logic             user;   // start of frame
    logic             last;   // end of line
  } beat_t;

  // DMA engine modes.
  typedef enum logic [1:0] {
    DMA_OFF    = 2'd0,  // idle, inputs are not accepted
    DMA_RING   = 2'd1,  // circular-buffer FIFO in DRAM (stage decoupling)
    DMA_FRAME  = 2'd2,  // double-buffered frame store, g frames per bank
    DMA_LOOP   = 2'd3   // frame store whose read side replays the last bank forever
  } dma_mode_e;

  // Configuration of one DMA engine, as held in the control registers.
  typedef struct packed {
    dma_mode_e         mode;
    logic              auto_swap;  // swap banks by itself after g frames written
    logic [ADDR_W-1:0] base;       // first DRAM word of the buffer
    logic [ADDR_W-1:0] ring_words; // ring size in words (DMA_RING)
    logic [DIM_W-1:0]  width;      // pixels per line
    logic [DIM_W-1:0]  height;     // lines per frame
    logic [3:0]        g;          // frames per bank (bundle size)
    logic [DIM_W-1:0]  col_lo;     // write window, first column kept
    logic [DIM_W-1:0]  col_hi;     // write window, last column kept
  } dma_cfg_t;

  // Commands (one-cycle pulses from register writes).
  typedef struct packed {
    logic rd_start;   // replay g frames of the last complete bank (DMA_FRAME)
    logic wr_start;   // write the next g frames (DMA_FRAME, auto_swap = 0)
    logic swap;       // make the bank just written the one read
  } dma_cmd_t;

  typedef struct packed {
    logic              rd_busy;
    logic              wr_busy;
    logic              rd_bank;    // bank the read side plays from
    logic [15:0]       wr_frames;  // frames written since enable
    logic [15:0]       rd_frames;  // frames read since enable
    logic [ADDR_W-1:0] level;      // ring occupancy in words
    logic [15:0]       full_stalls;// cycles the ring refused input because it was full
  } dma_stat_t;

  // DRAM request / response as seen by DMA channels. Channel 2*e is the
  // write side of engine e, 2*e+1 its read side.
  parameter int unsigned N_CH = 2 * N_DMA;
  parameter int unsigned ID_W = $clog2(N_CH);

  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [PIX_W-1:0]  wdata;
    logic [ID_W-1:0]   id;
  } mem_req_t;

  typedef struct packed {
    logic [PIX_W-1:0]  rdata;
    logic [ID_W-1:0]   id;
  } mem_rsp_t;

  // Control register map (byte addresses, 32-bit registers).
  parameter logic [11:0] REG_XBAR     = 12'h000;  // + 4*destination: {en[31], src}
  parameter logic [11:0] REG_DOWNS    = 12'h080;  // downsampling factor s (0 and 1: every frame)
  parameter logic [11:0] REG_CAM_DIM  = 12'h084;  // {height[27:16], width[11:0]}
  parameter logic [11:0] REG_CAM_STAT = 12'h088;  // dropped pixel count (read only)
  parameter logic [11:0] REG_DISP_STAT = 12'h08C; // {resyncs[31:16], underruns[15:0]} (read only)
  parameter logic [11:0] REG_DMA      = 12'h100;  // + 0x40*engine
  // Offsets within one DMA engine's window.
  parameter logic [5:0]  DMA_CTRL  = 6'h00;  // mode[1:0], auto_swap[2]; writing 1 to [8] rd_start, [9] wr_start, [10] swap
  parameter logic [5:0]  DMA_BASE  = 6'h04;
  parameter logic [5:0]  DMA_RSIZE = 6'h08;  // ring size in words
  parameter logic [5:0]  DMA_DIM   = 6'h0C;  // {height[27:16], width[11:0]}
  parameter logic [5:0]  DMA_WIN   = 6'h10;  // {col_hi[27:16], col_lo[11:0]}
  parameter logic [5:0]  DMA_G     = 6'h14;
  parameter logic [5:0]  DMA_STAT  = 6'h18;  // {rd_bank[2], wr_busy[1], rd_busy[0]}
  parameter logic [5:0]  DMA_FRM   = 6'h1C;  // {rd_frames[31:16], wr_frames[15:0]}
  parameter logic [5:0]  DMA_LEVEL = 6'h20;
  parameter logic [5:0]  DMA_FULL  = 6'h24;

endpackage
