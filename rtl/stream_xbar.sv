// stream_xbar - register-configured streaming crossbar between all endpoints
// of the static region (RP ports, camera, display, DMA engines).
//
// Software writes, for every destination, which source feeds it (sel) and
// whether the link is enabled (en). Because the topology is fixed for a whole
// timeslice and no destination ever has two sources, each destination is a
// plain N:1 multiplexer with no arbitration and no buffering beyond one
// register stage: the paper's "single-cycle buffered path". That register
// stage is a pipelined AXI4-Stream slice (full throughput, ready passed back
// combinationally), so a link adds exactly one cycle of latency. The ready of
// a source is the ready of the destination that selected it; a source nobody
// selected sees ready low. Selecting one source from two destinations (a
// fork) is not supported in the crossbar: as in the paper, forks are done by
// duplicate stages inside RPs, and an assertion flags such a configuration.
//
// Interface: src_* are the stream outputs of the endpoints (crossbar inputs),
// dst_* the stream inputs of the endpoints (crossbar outputs).
// Timing: a beat accepted at src on cycle t is presented at dst on t+1.
module stream_xbar
  import ts_pkg::*;
#(
  parameter int unsigned N  = N_END,
  parameter int unsigned SW = $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  // configuration, one entry per destination
  input  logic [N-1:0]   cfg_en,
  input  logic [SW-1:0]  cfg_sel [N],
  // sources
  input  logic [N-1:0]   src_valid,
  input  beat_t          src_beat [N],
  output logic [N-1:0]   src_ready,
  // destinations
  output logic [N-1:0]   dst_valid,
  output beat_t          dst_beat [N],
  input  logic [N-1:0]   dst_ready
);

  logic [N-1:0] slice_in_ready;   // destination slice can take a beat
  logic [N-1:0] mux_valid;
  beat_t        mux_beat [N];

  // Per destination: select the source, then one register stage.
  for (genvar d = 0; d < N; d++) begin : g_dst
    always_comb begin
      mux_valid[d] = cfg_en[d] && (cfg_sel[d] < SW'(N)) && src_valid[cfg_sel[d]];
      mux_beat[d]  = src_beat[cfg_sel[d]];
    end

    assign slice_in_ready[d] = !dst_valid[d] || dst_ready[d];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        dst_valid[d] <= 1'b0;
        dst_beat[d]  <= '0;
      end else if (!cfg_en[d]) begin
        dst_valid[d] <= 1'b0;            // link torn down: drop what it held
      end else if (slice_in_ready[d]) begin
        dst_valid[d] <= mux_valid[d];
        if (mux_valid[d]) dst_beat[d] <= mux_beat[d];
      end
    end
  end

  // Ready back to each source from the destination that selected it.
  always_comb begin
    src_ready = '0;
    for (int d = 0; d < N; d++)
      if (cfg_en[d] && cfg_sel[d] < SW'(N))
        src_ready[cfg_sel[d]] = src_ready[cfg_sel[d]] | slice_in_ready[d];
  end

  // No source may feed two destinations at once.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int a = 0; a < N; a++)
        for (int b = a + 1; b < N; b++)
          assert (!(cfg_en[a] && cfg_en[b] && cfg_sel[a] == cfg_sel[b]))
            else $error("stream_xbar: destinations %0d and %0d share source %0d", a, b, cfg_sel[a]);
    end
  end

endmodule
