// dma_engine - one DRAM streaming connection of the static region.
//
// An engine has a write side (stream in -> DRAM) and a read side (DRAM ->
// stream out) that share one buffer in DRAM. Software picks one of three uses:
//
//  DMA_RING  : circular-buffer FIFO. Whatever enters the write side comes out
//              of the read side, delayed by as much as the downstream stage
//              needs. This is the paper's decoupling connection for staggered
//              start: the upstream stage keeps running while the downstream
//              RP is still being reconfigured. When the ring is full the
//              write side drops ready (back-pressure) and counts a stall.
//  DMA_FRAME : double-buffered frame store holding g frames per bank (the
//              paper's multi-frame bundles). The write side fills one bank
//              while the read side replays the other. With auto_swap set
//              (camera input buffer) the banks swap by themselves every g
//              frames; otherwise the write side takes g frames after each
//              wr_start command and software swaps with the swap command.
//              Each rd_start command replays the g frames of the bank last
//              completed, so every pipeline of a round sees the same frames.
//  DMA_LOOP  : as DMA_FRAME, but the read side replays the bank over and over
//              without commands; it re-reads the bank number after every g
//              frames. This gives the display an evenly timed stream from the
//              output double buffer.
//
// In the frame modes the write side keeps only the columns col_lo..col_hi of
// each line and consumes the rest without writing them. Several pipelines
// writing one output buffer, each with its own column window, produce the
// split-screen output the paper shows; how the split is made is this design's
// choice. The write side waits for a start-of-frame beat (tuser) before it
// stores anything, so buffers always hold whole frames. DRAM holds only pixel
// data; the read side rebuilds tuser and tlast from width and height.
//
// DRAM traffic is one pixel per request. The read side keeps at most
// RD_DEPTH reads in flight or buffered, so it never loses data when the
// stream consumer stalls. Buffer layout: bank b, frame k starts at word
// base + (b*g + k)*width*height.
//
// Timing: a write is issued in the cycle the pixel is accepted; read data
// leaves through a first-word fall-through FIFO one cycle after DRAM returns it.
module dma_engine
  import ts_pkg::*;
#(
  parameter int unsigned RD_DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  dma_cfg_t         cfg,
  input  dma_cmd_t         cmd,
  output dma_stat_t        stat,
  // stream into DRAM
  input  logic             s_valid,
  input  beat_t            s_beat,
  output logic             s_ready,
  // stream out of DRAM
  output logic             m_valid,
  output beat_t            m_beat,
  input  logic             m_ready,
  // DRAM write requests
  output logic             wr_req_valid,
  output logic [ADDR_W-1:0] wr_req_addr,
  output logic [PIX_W-1:0] wr_req_data,
  input  logic             wr_req_ready,
  // DRAM read requests and returned data (in order)
  output logic             rd_req_valid,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic             rd_req_ready,
  input  logic             rd_rsp_valid,
  input  logic [PIX_W-1:0] rd_rsp_data
);
  localparam int unsigned CW = $clog2(RD_DEPTH + 1);

  // ---------------------------------------------------------------- sizes
  logic [ADDR_W-1:0] frame_words, bank_words;
  logic [3:0]        g_eff;
  logic              frame_mode, mode_off;

  always_comb begin
    g_eff       = (cfg.g == '0) ? 4'd1 : cfg.g;
    frame_words = ADDR_W'(cfg.width) * ADDR_W'(cfg.height);
    bank_words  = frame_words * ADDR_W'(g_eff);
    frame_mode  = (cfg.mode == DMA_FRAME) || (cfg.mode == DMA_LOOP);
    mode_off    = (cfg.mode == DMA_OFF);
  end

  // ---------------------------------------------------------------- bank state
  logic [15:0] wr_frames, rd_frames, full_stalls;
  logic rd_bank;      // bank that holds the last complete set of g frames
  logic wr_bank_done; // write side completed g frames this cycle

  // ---------------------------------------------------------------- write side
  logic              wr_active;    // frame modes: taking frames
  logic              wr_synced;    // inside a frame (start seen)
  logic [DIM_W-1:0]  wx, wy;
  logic [3:0]        wk;           // frame within the bank
  logic [ADDR_W-1:0] woff;         // word offset within the bank / ring
  logic [ADDR_W-1:0] level;        // ring: words written and not yet requested back
  logic              ring_full;
  logic              wr_keep;      // current beat is stored
  logic              s_fire;
  logic              starts_frame;

  assign ring_full    = (cfg.mode == DMA_RING) && (level >= cfg.ring_words);
  assign starts_frame = s_beat.user;

  always_comb begin
    // a beat is stored when it lies in a frame (or starts one) and, in the
    // frame modes, inside the column window
    wr_keep = 1'b0;
    if (cfg.mode == DMA_RING)
      wr_keep = wr_synced || starts_frame;
    else if (frame_mode && wr_active && (wr_synced || starts_frame)) begin
      if (starts_frame && !wr_synced)
        wr_keep = (cfg.col_lo == '0);
      else
        wr_keep = (wx >= cfg.col_lo) && (wx <= cfg.col_hi);
    end

    if (mode_off)
      s_ready = 1'b0;
    else if (frame_mode && !wr_active)
      s_ready = 1'b0;                        // wait for wr_start
    else if (!wr_synced && !starts_frame)
      s_ready = 1'b1;                        // discard until a frame starts
    else if (wr_keep)
      s_ready = wr_req_ready && !ring_full;
    else
      s_ready = 1'b1;                        // outside the window: consume

    wr_req_valid = s_valid && wr_keep && !ring_full && !mode_off;
    wr_req_data  = s_beat.data;
    if (cfg.mode == DMA_RING)
      wr_req_addr = cfg.base + woff;
    else
      wr_req_addr = cfg.base + (rd_bank ? ADDR_W'(0) : bank_words) +
                    ((starts_frame && !wr_synced) ? ADDR_W'(wk) * frame_words : woff);
  end

  assign s_fire = s_valid && s_ready;

  // position bookkeeping of the write side
  logic w_in_frame;
  logic w_last_pix;
  always_comb begin
    w_in_frame = s_fire && (wr_synced || starts_frame);
    w_last_pix = ((starts_frame && !wr_synced) ? DIM_W'(0) : wx) == cfg.width - 1'b1 &&
                 ((starts_frame && !wr_synced) ? DIM_W'(0) : wy) == cfg.height - 1'b1;
  end

  logic ring_rd_fire;   // a ring read request was accepted this cycle

  assign wr_bank_done = w_in_frame && w_last_pix && frame_mode && (wk + 1'b1 == g_eff);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_active <= 1'b0; wr_synced <= 1'b0;
      wx <= '0; wy <= '0; wk <= '0; woff <= '0;
      wr_frames <= '0; full_stalls <= '0;
    end else begin
      if (mode_off) begin
        wr_active <= 1'b0; wr_synced <= 1'b0;
        wx <= '0; wy <= '0; wk <= '0; woff <= '0;
        wr_frames <= '0; full_stalls <= '0;
      end else begin
        if (frame_mode && cfg.auto_swap) wr_active <= 1'b1;
        else if (frame_mode && cmd.wr_start && !wr_active) begin
          wr_active <= 1'b1; wk <= '0; wr_synced <= 1'b0;
        end
        if (s_valid && !s_ready && ring_full) full_stalls <= full_stalls + 1'b1;

        if (w_in_frame) begin
          // address offset of the next pixel
          if (cfg.mode == DMA_RING)
            woff <= (woff + 1'b1 == cfg.ring_words) ? '0 : woff + 1'b1;
          else if (starts_frame && !wr_synced)
            woff <= ADDR_W'(wk) * frame_words + 1'b1;
          else
            woff <= woff + 1'b1;

          if (w_last_pix) begin
            wr_synced      <= 1'b0;
            wx <= '0; wy <= '0;
            wr_frames <= wr_frames + 1'b1;
            if (frame_mode) begin
              if (wk + 1'b1 == g_eff) begin
                wk <= '0;
                if (!cfg.auto_swap) wr_active <= 1'b0;
              end else
                wk <= wk + 1'b1;
            end
          end else begin
            wr_synced <= 1'b1;
            if (starts_frame && !wr_synced) begin
              wx <= DIM_W'(1); wy <= '0;
              if (cfg.width == DIM_W'(1)) begin wx <= '0; wy <= DIM_W'(1); end
            end else if (wx == cfg.width - 1'b1) begin
              wx <= '0; wy <= wy + 1'b1;
            end else
              wx <= wx + 1'b1;
          end
        end
      end
    end
  end

  // bank swap
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_bank <= 1'b0;
    else if (mode_off) rd_bank <= 1'b0;
    else if ((wr_bank_done && cfg.auto_swap) || cmd.swap) rd_bank <= !rd_bank;
  end

  // ---------------------------------------------------------------- read side
  logic              rd_active;
  logic              rd_cur_bank;   // bank being replayed
  logic [ADDR_W-1:0] roff;          // next word to request
  logic [ADDR_W-1:0] rd_issued;     // frame modes: words requested in this replay
  logic [CW-1:0]     reserved;      // reads in flight plus words buffered
  logic [CW-1:0]     fifo_count;
  logic [PIX_W-1:0]  fifo_data;
  logic              m_fire, rd_req_fire;
  logic [DIM_W-1:0]  ox, oy;
  logic [3:0]        ok;
  logic              o_last_pix;

  always_comb begin
    rd_req_valid = 1'b0;
    if (reserved < CW'(RD_DEPTH)) begin
      if (cfg.mode == DMA_RING) rd_req_valid = (level != '0);
      else if (frame_mode)      rd_req_valid = rd_active && (rd_issued < bank_words);
    end
    if (cfg.mode == DMA_RING) rd_req_addr = cfg.base + roff;
    else                      rd_req_addr = cfg.base + (rd_cur_bank ? bank_words : ADDR_W'(0)) + rd_issued;
  end

  assign rd_req_fire  = rd_req_valid && rd_req_ready;
  assign ring_rd_fire = rd_req_fire && (cfg.mode == DMA_RING);

  sync_fifo #(.W(PIX_W), .DEPTH(RD_DEPTH)) u_rdfifo (
    .clk, .rst_n, .clr(mode_off),
    .push(rd_rsp_valid), .wdata(rd_rsp_data),
    .pop(m_fire), .rdata(fifo_data), .count(fifo_count)
  );

  assign m_valid     = (fifo_count != '0) && !mode_off;
  assign m_fire      = m_valid && m_ready;
  assign m_beat.data = fifo_data;
  assign m_beat.user = (ox == '0) && (oy == '0);
  assign m_beat.last = (ox == cfg.width - 1'b1);
  assign o_last_pix  = (ox == cfg.width - 1'b1) && (oy == cfg.height - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_active <= 1'b0; rd_cur_bank <= 1'b0;
      roff <= '0; rd_issued <= '0; reserved <= '0;
      ox <= '0; oy <= '0; ok <= '0;
      rd_frames <= '0;
      level <= '0;
    end else if (mode_off) begin
      rd_active <= 1'b0; roff <= '0; rd_issued <= '0; reserved <= '0;
      ox <= '0; oy <= '0; ok <= '0; rd_frames <= '0; level <= '0;
    end else begin
      reserved <= reserved + CW'(rd_req_fire) - CW'(m_fire);

      // ring occupancy: words stored minus words requested back
      level <= level + ADDR_W'(wr_req_valid && wr_req_ready && cfg.mode == DMA_RING)
                     - ADDR_W'(ring_rd_fire);
      if (ring_rd_fire)
        roff <= (roff + 1'b1 == cfg.ring_words) ? '0 : roff + 1'b1;

      // start of a replay
      if (frame_mode && !rd_active && (cmd.rd_start || cfg.mode == DMA_LOOP)) begin
        rd_active   <= 1'b1;
        rd_cur_bank <= rd_bank;
        rd_issued   <= '0;
        ok          <= '0;
      end else if (frame_mode && rd_req_fire)
        rd_issued <= rd_issued + 1'b1;

      if (m_fire) begin
        if (o_last_pix) begin
          ox <= '0; oy <= '0;
          rd_frames <= rd_frames + 1'b1;
          if (frame_mode) begin
            if (ok + 1'b1 == g_eff) begin ok <= '0; rd_active <= 1'b0; end
            else ok <= ok + 1'b1;
          end
        end else if (ox == cfg.width - 1'b1) begin
          ox <= '0; oy <= oy + 1'b1;
        end else
          ox <= ox + 1'b1;
      end
    end
  end

  always_comb begin
    stat.rd_busy     = rd_active;
    stat.wr_busy     = wr_active;
    stat.rd_bank     = rd_bank;
    stat.wr_frames   = wr_frames;
    stat.rd_frames   = rd_frames;
    stat.level       = level;
    stat.full_stalls = full_stalls;
  end

  // The read FIFO never overflows because requests are limited by 'reserved'.
  always_ff @(posedge clk) begin
    if (rst_n && !mode_off)
      assert (!(rd_rsp_valid && fifo_count == CW'(RD_DEPTH)))
        else $error("dma_engine: read data with a full FIFO");
  end
endmodule
