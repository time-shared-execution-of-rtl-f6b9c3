// tb_camera_ctrl - self-checking test of the camera controller.
//
// A sensor model sends pixels (with idle gaps) before the first frame start,
// then two frames. Checked: nothing comes out before the first frame start,
// every later pixel comes out two cycles after it was presented, tuser marks
// frame starts, tlast marks every width-th pixel, a stalled consumer is
// covered by the FIFO, and pixels that find the FIFO full are counted as
// dropped.
module tb_camera_ctrl;
  import ts_pkg::*;
  localparam int W = 6, H = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DIM_W-1:0] width = DIM_W'(W);
  logic             pix_valid = 0, frame_start = 0, m_valid, m_ready = 1;
  logic [PIX_W-1:0] pix_data = '0;
  beat_t            m_beat;
  logic [15:0]      dropped;

  camera_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  beat_t exp_q [$];
  int    out_n = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      beat_t e;
      out_n++;
      e = exp_q.size() ? exp_q.pop_front() : '0;
      check(m_beat == e, $sformatf("beat %h want %h", m_beat, e));
    end
    if (m_ready && out_n < 2 * W * H) check(exp_q.size() <= 2, "latency is two cycles");
  end

  task automatic pixel(input logic [15:0] d, input bit fs, input bit expect_out, input int col);
    @(negedge clk);
    pix_valid = 1; pix_data = d; frame_start = fs;
    if (expect_out) exp_q.push_back('{data: d, user: fs, last: (col == W - 1)});
    @(negedge clk);
    pix_valid = 0; frame_start = 0;
    if ($urandom_range(1)) @(negedge clk);   // idle gap
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) pixel(16'hAA00 + 16'(i), 0, 0, 0);   // before lock
    check(out_n == 0, "nothing before first frame start");
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < W * H; i++) pixel(16'(f * 100 + i), i == 0, 1, i % W);
    repeat (3) @(posedge clk);
    check(out_n == 2 * W * H, "all pixels of both frames delivered");
    check(dropped == 0, "no drops while ready");
    // consumer stalls: 16 pixels wait in the FIFO, the next 3 are lost
    m_ready = 0;
    for (int i = 0; i < 19; i++) pixel(16'h5500 + 16'(i), 0, i < 16, (i + 0) % W);
    repeat (2) @(posedge clk);
    check(dropped == 3, $sformatf("drops counted (%0d)", dropped));
    m_ready = 1;
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0 && out_n == 2 * W * H + 16, "buffered pixels delivered after the stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
