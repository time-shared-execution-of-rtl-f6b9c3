// tb_frame_downsampler - self-checking test of the frame downsampler.
//
// For s = 1, 2, 3 and 4 a run of 12 numbered frames is sent; the frames
// that come out must be exactly 0, s, 2s, ... with all their pixels, and the
// dropped counter must grow by the number of frames left out.
module tb_frame_downsampler;
  import ts_pkg::*;
  localparam int W = 4, H = 2, NF = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  s;
  logic        s_valid = 0, s_ready, m_valid, m_ready = 1;
  beat_t       s_beat = '0, m_beat;
  logic [15:0] dropped;

  frame_downsampler dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [15:0] got [$];
  always @(posedge clk) if (rst_n && m_valid && m_ready) got.push_back(m_beat.data);
  always @(negedge clk) m_ready = ($urandom_range(3) != 0);

  task automatic send_frame(input int f);
    for (int i = 0; i < W * H; i++) begin
      @(negedge clk);
      s_valid = 1;
      s_beat  = '{data: 16'(f * 16 + i), user: (i == 0), last: (i % W == W - 1)};
      @(posedge clk);
      while (!s_ready) @(posedge clk);
    end
    @(negedge clk); s_valid = 0;
  endtask

  initial begin
    for (int sv = 1; sv <= 4; sv++) begin
      int d0, n;
      rst_n = 0; s = 8'(sv); got.delete();
      repeat (2) @(posedge clk);
      rst_n = 1;
      d0 = dropped;
      for (int f = 0; f < NF; f++) send_frame(f);
      repeat (3) @(posedge clk);
      n = (NF + sv - 1) / sv;
      check(got.size() == n * W * H, $sformatf("s=%0d: %0d pixels out, want %0d", sv, got.size(), n * W * H));
      for (int k = 0; k < n && got.size() >= W * H; k++)
        for (int i = 0; i < W * H; i++) begin
          logic [15:0] v;
          v = got.pop_front();
          if (i == 0 || i == W * H - 1)
            check(v == 16'(k * sv * 16 + i), $sformatf("s=%0d frame %0d pixel %0d: %h", sv, k, i, v));
        end
      check(int'(dropped) - d0 == NF - n, $sformatf("s=%0d dropped count %0d", sv, dropped));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
