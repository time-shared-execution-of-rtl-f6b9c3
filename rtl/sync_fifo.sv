// sync_fifo - small single-clock FIFO used inside the DMA engine's read side
// to hold DRAM read data until the stream consumer takes it.
//
// Storage is a register array of DEPTH entries (DEPTH a power of two). push
// and pop in the same cycle are allowed; push when full and pop when empty
// are ignored and caught by assertions. count gives the occupancy; the head
// entry is visible on rdata while count is not zero (first-word fall-through).
module sync_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 8,
  parameter int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          push,
  input  logic [W-1:0]  wdata,
  input  logic          pop,
  output logic [W-1:0]  rdata,
  output logic [CW-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_push = push && (count != CW'(DEPTH));
  wire do_pop  = pop  && (count != '0);

  assign rdata = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (clr) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= wdata;

  always_ff @(posedge clk) begin
    if (rst_n && !clr) begin
      assert (!(push && count == CW'(DEPTH))) else $error("sync_fifo: push when full");
      assert (!(pop && count == '0))          else $error("sync_fifo: pop when empty");
    end
  end
endmodule
