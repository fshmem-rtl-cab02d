// tb_art_unit: results arrive at random times; with N results per transfer
// the unit must issue one long PUT per N results, with source and
// destination advancing by 16 bytes per result, and a final PUT for the
// remainder once done is seen. Also checks nothing is sent while disabled.
module tb_art_unit;
  import fshmem_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_en, start, res_valid, dla_done, cmd_valid, cmd_ready, idle, sent;
  logic [15:0] cfg_n;
  logic [31:0] cfg_src, cfg_dst;
  am_cmd_t cmd;
  int checks = 0, failures = 0;
  am_cmd_t got [$];

  art_unit dut (.*);
  always #5 clk = ~clk;
  bit eager;          // consumer always ready: PUTs must leave without delay
  int results = 0;
  int res_at [$];
  always @(negedge clk) cmd_ready <= eager || ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && cmd_ready) begin got.push_back(cmd); res_at.push_back(results); end
    if (res_valid) results++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int total, bit en);
    int exp_off = 0;
    got.delete(); res_at.delete(); results = 0;
    @(negedge clk);
    cfg_en = en; cfg_n = 16'(n); cfg_src = 32'h20_0000; cfg_dst = 32'h8000;
    start = 1;
    @(negedge clk); start = 0;
    for (int r = 0; r < total; r++) begin
      res_valid = 1; @(negedge clk); res_valid = 0;
      repeat ($urandom % 4) @(negedge clk);
    end
    dla_done = 1; @(negedge clk); dla_done = 0;
    repeat (20) @(negedge clk);
    if (!en) begin
      checks++;
      if (got.size() != 0) begin failures++; $display("sent while disabled"); end
      return;
    end
    checks++;
    if (got.size() != (total + n - 1) / n) begin failures++; $display("N=%0d total=%0d: %0d PUTs", n, total, got.size()); end
    foreach (got[i]) begin
      int cnt = (total - exp_off >= n) ? n : total - exp_off;
      checks++;
      if (got[i].mtype != AM_LONG || got[i].handler != H_PUT ||
          got[i].src_addr != 32'h20_0000 + 32'(16 * exp_off) ||
          got[i].dst_addr != 32'h8000 + 32'(16 * exp_off) || got[i].len != 32'(16 * cnt)) begin
        failures++;
        if (failures < 5) $display("PUT %0d: src %h dst %h len %0d", i, got[i].src_addr, got[i].dst_addr, got[i].len);
      end
      exp_off += cnt;
      // with an always-ready consumer, a full chunk leaves as soon as its N-th result is in
      if (eager && cnt == n) begin
        checks++;
        if (res_at[i] != exp_off) begin failures++; $display("chunk %0d sent after %0d results, exp %0d", i, res_at[i], exp_off); end
      end
    end
    checks++;
    if (!idle) begin failures++; $display("not idle"); end
  endtask

  initial begin
    eager = 0; cfg_en = 0; cfg_n = 1; cfg_src = 0; cfg_dst = 0; start = 0; res_valid = 0; dla_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    eager = 1;
    run(4, 10, 1);
    run(3, 30, 1);
    eager = 0;
    run(8, 64, 1);
    run(1, 5, 1);
    run(16, 7, 1);
    run(4, 10, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
