// tb_am_scheduler: three sources push tagged commands into the scheduler.
// Checks that every command arrives once, in order per source, and that
// with all sources busy the grants rotate round-robin.
module tb_am_scheduler;
  localparam int N = 3, W = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] src_valid, src_ready;
  logic [N-1:0][W-1:0] src_data;
  logic out_valid, out_ready;
  logic [W-1:0] out_data;
  int checks = 0, failures = 0;
  int sent [N], recv [N];
  int last_src;
  int phase;
  logic [N-1:0] hs;

  am_scheduler #(.N_SRC(N), .WIDTH(W), .DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb
    for (int s = 0; s < N; s++) src_data[s] = W'((s << 12) | sent[s]);

  // consumer
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int s = int'(out_data[W-1:12]);
    automatic int k = int'(out_data[11:0]);
    checks++;
    if (s >= N || k != recv[s]) begin
      failures++;
      if (failures < 5) $display("order error src=%0d k=%0d exp=%0d", s, k, recv[s]);
    end else recv[s]++;
    if (phase == 1) begin
      checks++;
      if (last_src >= 0 && s != (last_src + 1) % N) begin
        failures++;
        if (failures < 5) $display("not round-robin: %0d after %0d", s, last_src);
      end
      last_src = s;
    end
  end

  initial begin
    for (int s = 0; s < N; s++) begin sent[s] = 0; recv[s] = 0; end
    src_valid = 0; out_ready = 0; phase = 0; last_src = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Phase 0: random traffic.
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      for (int s = 0; s < N; s++)
        if (!src_valid[s] && sent[s] < 300) src_valid[s] = ($urandom % 2);
      out_ready = ($urandom % 3) != 0;
      #1 hs = src_valid & src_ready;
      @(posedge clk); #1;
      for (int s = 0; s < N; s++)
        if (hs[s]) begin sent[s]++; src_valid[s] = 0; end
    end
    // drain
    @(negedge clk); src_valid = 0; out_ready = 1;
    repeat (20) @(posedge clk);
    for (int s = 0; s < N; s++) begin
      checks++;
      if (recv[s] != sent[s]) begin failures++; $display("src %0d sent %0d recv %0d", s, sent[s], recv[s]); end
    end
    // Phase 1: all sources always valid, consumer always ready.
    @(negedge clk); phase = 1; src_valid = '1;
    repeat (60) begin
      #1 hs = src_ready;
      @(posedge clk); #1;
      for (int s = 0; s < N; s++) if (hs[s]) sent[s]++;
    end
    @(negedge clk); src_valid = 0;
    repeat (20) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
