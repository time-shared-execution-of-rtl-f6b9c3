// mem_arbiter - shares one DRAM port among the write and read sides of all
// DMA engines.
//
// On the board all DRAM streaming connections share the DRAM bandwidth
// through the high-performance AXI ports; how the sharing is done is not
// described, so this design uses the simplest fair scheme: a round-robin
// arbiter over 2*N_DMA channels (channel 2e is the write side of engine e,
// 2e+1 its read side) in front of one request port. Each request carries the
// channel number as its id; the memory returns read data in order with the
// id, and the arbiter steers it back to the engine that asked.
//
// Timing: the grant is combinational (the winner's ready is high in the same
// cycle its request is forwarded); the round-robin pointer moves past the
// winner after every accepted request.
module mem_arbiter
  import ts_pkg::*;
#(
  parameter int unsigned NE = N_DMA
) (
  input  logic              clk,
  input  logic              rst_n,
  // per engine: write requests
  input  logic [NE-1:0]     wr_valid,
  input  logic [ADDR_W-1:0] wr_addr [NE],
  input  logic [PIX_W-1:0]  wr_data [NE],
  output logic [NE-1:0]     wr_ready,
  // per engine: read requests and responses
  input  logic [NE-1:0]     rd_valid,
  input  logic [ADDR_W-1:0] rd_addr [NE],
  output logic [NE-1:0]     rd_ready,
  output logic [NE-1:0]     rsp_valid,
  output logic [PIX_W-1:0]  rsp_data,
  // DRAM port
  output logic              mem_req_valid,
  output mem_req_t          mem_req,
  input  logic              mem_req_ready,
  input  logic              mem_rsp_valid,
  input  mem_rsp_t          mem_rsp
);
  localparam int unsigned NC = 2 * NE;
  localparam int unsigned CW = $clog2(NC);

  logic [NC-1:0] req;
  logic [CW-1:0] ptr;      // highest priority channel
  logic [CW-1:0] win;
  logic          any;

  always_comb begin
    for (int e = 0; e < NE; e++) begin
      req[2*e]   = wr_valid[e];
      req[2*e+1] = rd_valid[e];
    end
    // first requester at or after ptr, wrapping around
    any = 1'b0;
    win = '0;
    for (int i = 0; i < NC; i++) begin
      int unsigned c;
      c = (int'(ptr) + i) % NC;
      if (!any && req[c]) begin
        any = 1'b1;
        win = CW'(c);
      end
    end

    mem_req_valid = any;
    mem_req.we    = !win[0];
    mem_req.id    = ID_W'(win);
    mem_req.addr  = win[0] ? rd_addr[win >> 1] : wr_addr[win >> 1];
    mem_req.wdata = wr_data[win >> 1];

    wr_ready = '0;
    rd_ready = '0;
    if (any && mem_req_ready) begin
      if (win[0]) rd_ready[win >> 1] = 1'b1;
      else        wr_ready[win >> 1] = 1'b1;
    end

    rsp_valid = '0;
    if (mem_rsp_valid) rsp_valid[mem_rsp.id >> 1] = 1'b1;
    rsp_data = mem_rsp.rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (any && mem_req_ready) ptr <= (win == CW'(NC - 1)) ? '0 : win + 1'b1;
  end

  // Responses only ever answer reads.
  always_ff @(posedge clk)
    if (rst_n && mem_rsp_valid)
      assert (mem_rsp.id[0]) else $error("mem_arbiter: response for a write channel");
endmodule
