// dram_model - behavioural model of the DRAM behind the DMA port (not
// synthesizable). Writes take effect when accepted; reads return their data,
// with the request id, LAT cycles after acceptance and in request order. The
// request port refuses a request with probability STALL_PCT percent, to
// exercise the back-pressure paths. Storage is sparse, unwritten words read 0.
module dram_model
  import ts_pkg::*;
#(
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  input  mem_req_t req,
  output logic     req_ready,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);
  logic [PIX_W-1:0] mem [logic [ADDR_W-1:0]];
  logic             pv [LAT];
  mem_rsp_t         pd [LAT];
  int unsigned      writes, reads;

  always_ff @(posedge clk) begin
    if (!rst_n) req_ready <= 1'b1;
    else        req_ready <= ($urandom_range(99) >= STALL_PCT);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pv[i] <= 1'b0;
      writes <= 0; reads <= 0;
    end else begin
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      pv[0] <= 1'b0;
      if (req_valid && req_ready) begin
        if (req.we) begin
          mem[req.addr] = req.wdata;
          writes <= writes + 1;
        end else begin
          pv[0]       <= 1'b1;
          pd[0].id    <= req.id;
          pd[0].rdata <= mem.exists(req.addr) ? mem[req.addr] : '0;
          reads <= reads + 1;
        end
      end
    end
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp       = pd[LAT-1];

  // Direct access for testbenches.
  function automatic logic [PIX_W-1:0] peek(input logic [ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
endmodule
