// rp_model - behavioural stand-in for a vision module loaded into a
// reconfigurable partition (not synthesizable logic of the design; the real
// partitions hold modules compiled separately). The loaded module computes
// out = 3*in + k on every pixel (k identifies the module), keeps tuser and
// tlast, and adds one register stage. While 'reconfiguring' is high the
// partition is being rewritten: it accepts nothing, presents nothing and
// loses whatever it held, and the module number k_next takes effect when
// reconfiguration ends.
module rp_model
  import ts_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reconfiguring,
  input  logic [15:0] k_next,
  output logic [15:0] k,
  input  logic        in_valid,
  input  beat_t       in_beat,
  output logic        in_ready,
  output logic        out_valid,
  output beat_t       out_beat,
  input  logic        out_ready
);
  assign in_ready = !reconfiguring && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_beat <= '0; k <= k_next;
    end else if (reconfiguring) begin
      out_valid <= 1'b0;
      k         <= k_next;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_beat <= '{data: 16'(3 * in_beat.data + k), user: in_beat.user, last: in_beat.last};
    end
  end
endmodule
