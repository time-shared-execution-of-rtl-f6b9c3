// tb_stream_xbar - self-checking test of the streaming crossbar.
//
// Six endpoints. Routes are set, random traffic with random back-pressure is
// pushed through, and every destination's beats are compared in order with
// a reference queue filled from the source it selects. Also checked: the
// one-cycle latency of an idle link, that an unselected source sees ready
// low, and that re-routing between bursts (a topology change) takes effect.
module tb_stream_xbar;
  import ts_pkg::*;
  localparam int N  = 6;
  localparam int SW = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0]  cfg_en;
  logic [SW-1:0] cfg_sel [N];
  logic [N-1:0]  src_valid, src_ready, dst_valid, dst_ready;
  beat_t         src_beat [N];
  beat_t         dst_beat [N];

  stream_xbar #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  beat_t exp_q [N][$];
  int    rx_count [N];
  bit    randomize_traffic = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference: what each source hands over goes to the destination selecting it
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < N; s++)
      if (src_valid[s] && src_ready[s])
        for (int d = 0; d < N; d++)
          if (cfg_en[d] && cfg_sel[d] == SW'(s)) exp_q[d].push_back(src_beat[s]);
    for (int d = 0; d < N; d++)
      if (dst_valid[d] && dst_ready[d]) begin
        beat_t e;
        rx_count[d]++;
        if (exp_q[d].size() == 0) check(0, $sformatf("dst %0d: unexpected beat", d));
        else begin
          e = exp_q[d].pop_front();
          check(dst_beat[d] == e, $sformatf("dst %0d: got %h want %h", d, dst_beat[d], e));
        end
      end
  end

  always @(negedge clk) if (randomize_traffic) begin
    for (int s = 0; s < N; s++) begin
      if (!src_valid[s] || src_ready[s]) begin
        src_valid[s] = ($urandom_range(3) != 0);
        src_beat[s]  = beat_t'({16'($urandom), 2'($urandom)});
      end
    end
    for (int d = 0; d < N; d++) dst_ready[d] = ($urandom_range(3) != 0);
  end

  task automatic route(input int d, input int s);
    cfg_en[d] = 1'b1; cfg_sel[d] = SW'(s);
  endtask

  initial begin
    cfg_en = '0; src_valid = '0; dst_ready = '0;
    for (int i = 0; i < N; i++) begin cfg_sel[i] = '0; src_beat[i] = '0; rx_count[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // one-cycle latency on an idle link: source 2 -> destination 4
    @(negedge clk);
    route(4, 2);
    dst_ready = '1;
    check(src_ready[0] == 1'b0, "unselected source sees ready low");
    src_valid[2] = 1; src_beat[2] = '{data:16'hBEEF, user:1'b1, last:1'b0};
    @(negedge clk);
    src_valid[2] = 0;
    check(dst_valid[4] && dst_beat[4].data == 16'hBEEF && dst_beat[4].user, "beat appears one cycle later");
    check(!dst_valid[3], "other destination stays idle");
    @(negedge clk);
    check(!dst_valid[4], "single beat only");

    // topology A: a chain 0->1, 1->2, 3->0, 5->5
    cfg_en = '0;
    route(1, 0); route(2, 1); route(0, 3); route(5, 5);
    randomize_traffic = 1;
    repeat (400) @(posedge clk);
    randomize_traffic = 0;
    @(negedge clk); src_valid = '0; dst_ready = '1;
    repeat (4) @(posedge clk);
    for (int d = 0; d < N; d++) check(exp_q[d].size() == 0, $sformatf("dst %0d drained (A)", d));

    // topology B: deletion and reordering, done by rewriting the routes only
    @(negedge clk);
    cfg_en = '0;
    route(2, 0); route(1, 4); route(3, 2);
    randomize_traffic = 1;
    repeat (400) @(posedge clk);
    randomize_traffic = 0;
    @(negedge clk); src_valid = '0; dst_ready = '1;
    repeat (4) @(posedge clk);
    for (int d = 0; d < N; d++) check(exp_q[d].size() == 0, $sformatf("dst %0d drained (B)", d));
    check(rx_count[2] > 100 && rx_count[1] > 100 && rx_count[3] > 100, "traffic flowed in topology B");
    check(rx_count[4] == 1, "destination 4 only got the directed beat");

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
