// tb_rd_dma: two clients read bursts from a memory model (random grant
// stalls, one-cycle read latency) with random backpressure. Every word a
// client receives must equal the memory word at its next address. With no
// stalls, a 64-word burst must finish within 64 + 4 cycles.
module tb_rd_dma;
  localparam int NC = 2;
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] req_valid, req_ready, d_valid, d_ready;
  logic [NC-1:0][31:0] req_addr;
  logic [NC-1:0][15:0] req_words;
  logic [127:0] d_data;
  logic m_req, m_we, m_gnt, m_rvalid;
  logic [31:0] m_addr;
  logic [127:0] m_wdata, m_rdata;
  logic [15:0] m_be;
  int checks = 0, failures = 0;
  bit stall_mem, stall_cli;
  int exp_word [NC], recv [NC];

  rd_dma #(.N_CLIENT(NC), .BUF_DEPTH(8)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [127:0] memval(int w);
    return {32'(w), 32'(w * 7), 32'hA5A5_0000 | 32'(w), ~32'(w)};
  endfunction

  // memory model
  bit gnt_ok;
  always @(negedge clk) gnt_ok <= !stall_mem || ($urandom % 2);
  always_comb m_gnt = m_req && gnt_ok;
  always @(posedge clk) begin
    m_rvalid <= m_req && m_gnt;
    m_rdata  <= memval(int'(m_addr >> 4));
  end

  always @(negedge clk) d_ready <= stall_cli ? NC'($urandom) : '1;

  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NC; c++)
      if (d_valid[c] && d_ready[c]) begin
        checks++;
        if (d_data !== memval(exp_word[c])) begin
          failures++;
          if (failures < 5) $display("client %0d got %h exp word %0d", c, d_data, exp_word[c]);
        end
        exp_word[c]++;
        recv[c]++;
      end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic burst(int c, int w0, int n);
    // wait for the previous burst of this client to drain
    while (recv[c] != 0) @(posedge clk);
    @(negedge clk);
    exp_word[c] = w0;
    req_valid[c] = 1; req_addr[c] = 32'(w0 * 16); req_words[c] = 16'(n);
    @(posedge clk);
    while (!req_ready[c]) @(posedge clk);
    @(negedge clk); req_valid[c] = 0;
  endtask

  initial begin
    int t0;
    req_valid = 0; req_addr = '0; req_words = '0; stall_mem = 0; stall_cli = 0;
    recv[0] = 0; recv[1] = 0; exp_word[0] = 0; exp_word[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // throughput: one 64-word burst, no stalls
    t0 = $time / 10;
    burst(0, 100, 64);
    while (recv[0] != 64) @(posedge clk);
    checks++;
    if ($time / 10 - t0 > 64 + 4) begin failures++; $display("burst took %0d cycles", $time / 10 - t0); end
    $display("64-word burst: %0d cycles", $time / 10 - t0);
    recv[0] = 0;
    // random: both clients, stalls
    stall_mem = 1; stall_cli = 1;
    for (int i = 0; i < 20; i++) begin
      int n0, n1;
      n0 = 1 + $urandom % 40; n1 = 1 + $urandom % 40;
      fork
        burst(0, $urandom % 1000, n0);
        burst(1, 2000 + $urandom % 1000, n1);
      join
      // drain
      repeat (300) @(posedge clk);
      checks++;
      if (recv[0] != n0 || recv[1] != n1) begin
        failures++; $display("word count %0d/%0d %0d/%0d", recv[0], n0, recv[1], n1);
      end
      recv[0] = 0; recv[1] = 0;
    end
    checks++;
    if (d_valid != 0) begin failures++; $display("data left over"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
