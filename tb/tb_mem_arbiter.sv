// tb_mem_arbiter - self-checking test of the DRAM port arbiter.
//
// Five engines issue random write and read requests against the DRAM model.
// Checked: every write lands at its address, every read returns to the
// engine that issued it with the right data and in order, and with all ten
// channels requesting all the time each gets exactly its round-robin share.
module tb_mem_arbiter;
  import ts_pkg::*;
  localparam int NE = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NE-1:0]     wr_valid = '0, wr_ready, rd_valid = '0, rd_ready, rsp_valid;
  logic [ADDR_W-1:0] wr_addr [NE];
  logic [PIX_W-1:0]  wr_data [NE];
  logic [ADDR_W-1:0] rd_addr [NE];
  logic [PIX_W-1:0]  rsp_data;
  logic     mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;

  mem_arbiter #(.NE(NE)) dut (.*);
  dram_model #(.LAT(3), .STALL_PCT(0)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req(mem_req), .req_ready(mem_req_ready),
    .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Engine e writes value f(e,addr) to addresses in its own region and later
  // reads them back.
  function automatic logic [15:0] val(input int e, input int a);
    return 16'(e * 4096 + a * 7 + 3);
  endfunction

  int wr_cnt [NE], rd_cnt [NE], grants_w [NE], grants_r [NE];
  logic [PIX_W-1:0] exp_q [NE][$];
  bit phase_read = 0;

  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < NE; e++) begin
      if (wr_valid[e] && wr_ready[e]) begin grants_w[e]++; wr_cnt[e]++; end
      if (rd_valid[e] && rd_ready[e]) begin
        grants_r[e]++;
        exp_q[e].push_back(val(e, rd_cnt[e]));
        rd_cnt[e]++;
      end
      if (rsp_valid[e]) begin
        logic [15:0] w;
        w = exp_q[e].size() ? exp_q[e].pop_front() : 16'hxxxx;
        check(rsp_data == w, $sformatf("engine %0d read data %h want %h", e, rsp_data, w));
      end
    end
    check($countones(rsp_valid) <= 1, "one response at a time");
  end

  always_comb for (int e = 0; e < NE; e++) begin
    wr_addr[e] = ADDR_W'(e * 65536 + wr_cnt[e]);
    wr_data[e] = val(e, wr_cnt[e]);
    rd_addr[e] = ADDR_W'(e * 65536 + rd_cnt[e]);
  end

  initial begin
    for (int e = 0; e < NE; e++) begin wr_cnt[e] = 0; rd_cnt[e] = 0; grants_w[e] = 0; grants_r[e] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // all channels busy: writes from all engines, fair share
    @(negedge clk); wr_valid = '1;
    repeat (100) @(posedge clk);
    @(negedge clk); wr_valid = '0;
    for (int e = 0; e < NE; e++)
      check(grants_w[e] == 20, $sformatf("engine %0d got %0d of 100 write slots", e, grants_w[e]));
    for (int e = 0; e < NE; e++)
      check(u_mem.peek(ADDR_W'(e * 65536 + 5)) == val(e, 5), $sformatf("engine %0d write landed", e));
    // reads and writes mixed, random
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int e = 0; e < NE; e++) begin
        rd_valid[e] = ($urandom_range(1) == 1) && (rd_cnt[e] < wr_cnt[e]);
        wr_valid[e] = ($urandom_range(3) == 0);
      end
    end
    @(negedge clk); rd_valid = '0; wr_valid = '0;
    repeat (10) @(posedge clk);
    for (int e = 0; e < NE; e++) begin
      check(exp_q[e].size() == 0, $sformatf("engine %0d all reads answered", e));
      check(rd_cnt[e] > 10, $sformatf("engine %0d read traffic", e));
    end
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
