// tb_compute_controller: queues compute commands and plays the DLA: it
// checks each command reaches the DLA unchanged and in order, that a new
// command waits for the DLA's done and for ART to drain, that each done
// counts one acknowledgement, and that ART sends the results of every run.
module tb_compute_controller;
  import fshmem_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, dla_valid, dla_ready, dla_done, res_valid;
  comp_cmd_t cmd, dla_cmd;
  logic art_en, art_cmd_valid, art_cmd_ready, art_sent, comp_done, busy;
  logic [15:0] art_n;
  logic [31:0] art_src, art_dst;
  am_cmd_t art_cmd;
  int checks = 0, failures = 0, acks = 0, puts = 0, put_bytes = 0;
  int dla_active = 0, overlap = 0;
  comp_cmd_t sentq [$];

  compute_controller dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) art_cmd_ready <= ($urandom % 4 != 0);

  always @(posedge clk) if (rst_n) begin
    if (comp_done) acks++;
    if (art_sent) begin puts++; put_bytes += int'(art_cmd.len); end
  end

  // DLA model: takes a command, produces arg1 results, then done.
  initial begin
    dla_ready = 0; dla_done = 0; res_valid = 0;
    forever begin
      @(negedge clk);
      dla_ready = ($urandom % 2);
      if (dla_valid && dla_ready) begin
        comp_cmd_t e;
        @(negedge clk); dla_ready = 0;
        checks++;
        e = sentq.pop_front();
        if (dla_cmd != e) begin failures++; $display("DLA got %h exp %h", dla_cmd, e); end
        if (dla_active != 0) overlap++;
        dla_active = 1;
        for (int r = 0; r < int'(dla_cmd.arg1); r++) begin
          res_valid = 1; @(negedge clk); res_valid = 0;
          repeat ($urandom % 3) @(negedge clk);
        end
        dla_done = 1; @(negedge clk); dla_done = 0;
        dla_active = 0;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total = 0;
    cmd_valid = 0; cmd = '0; art_en = 1; art_n = 16'd4; art_src = 32'h20_0000; art_dst = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6; i++) begin
      comp_cmd_t c;
      c.src_node = 4'(i); c.arg0 = $urandom; c.arg1 = 32'(3 + $urandom % 10);
      total += int'(c.arg1);
      sentq.push_back(c);
      @(negedge clk);
      cmd = c; cmd_valid = 1;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      @(negedge clk); cmd_valid = 0;
    end
    while (busy || acks != 6) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (acks != 6) begin failures++; $display("acks %0d", acks); end
    checks++;
    if (overlap != 0) begin failures++; $display("DLA commands overlapped"); end
    checks++;
    if (put_bytes != 16 * total) begin failures++; $display("ART sent %0d bytes exp %0d", put_bytes, 16 * total); end
    checks++;
    if (sentq.size() != 0) begin failures++; $display("%0d commands never reached the DLA", sentq.size()); end
    $display("ART PUTs: %0d for %0d results", puts, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
