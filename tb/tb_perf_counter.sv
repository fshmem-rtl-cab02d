// tb_perf_counter: starts and stops the counter at known cycle distances and
// checks the captured timestamps and latency.
module tb_perf_counter;
  logic clk = 0, rst_n = 0, start, stop, armed;
  logic [31:0] cycles, t_start, t_hdr, latency;
  int checks = 0, failures = 0;

  perf_counter dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; stop = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      int gap = 1 + $urandom % 100;
      int ts;
      repeat ($urandom % 10) @(negedge clk);
      ts = int'(cycles);
      start = 1; @(negedge clk); start = 0;
      repeat (gap - 1) @(negedge clk);
      stop = 1; @(negedge clk); stop = 0;
      // a second stop does not change the latency
      stop = 1; @(negedge clk); stop = 0;
      checks++;
      if (latency != 32'(gap) || t_start != 32'(ts) || t_hdr != 32'(ts + gap + 1) || armed) begin
        failures++;
        if (failures < 5) $display("gap %0d: lat %0d start %0d/%0d hdr %0d", gap, latency, t_start, ts, t_hdr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
