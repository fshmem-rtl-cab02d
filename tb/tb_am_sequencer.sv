// tb_am_sequencer: sends commands through the sequencer (with the read DMA
// and a memory model) and compares every flit on the network port with an
// independently built expectation: one header per packet of at most
// pkt_bytes, fields as commanded, 'last' on the final packet, payload equal
// to the memory contents. Also measures the time a 4 KiB PUT occupies the
// port with 1 KiB packets.
module tb_am_sequencer;
  import fshmem_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] node_id = 4'd5;
  logic [15:0] pkt_bytes;
  logic cmd_valid, cmd_ready;
  am_cmd_t cmd;
  logic rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  logic [31:0] rd_req_addr;
  logic [15:0] rd_req_words;
  logic [127:0] rd_data;
  logic tx_valid, tx_ready, busy;
  logic [127:0] tx_data;
  logic m_req, m_we, m_gnt, m_rvalid;
  logic [31:0] m_addr;
  logic [127:0] m_wdata, m_rdata;
  logic [15:0] m_be;
  int checks = 0, failures = 0;
  logic [127:0] expq [$];
  bit bp;

  am_sequencer dut (.*);
  rd_dma #(.N_CLIENT(1)) u_dma (
    .clk, .rst_n, .req_valid(rd_req_valid), .req_ready(rd_req_ready),
    .req_addr(rd_req_addr), .req_words(rd_req_words),
    .d_valid(rd_valid), .d_ready(rd_ready), .d_data(rd_data),
    .m_req, .m_we, .m_addr, .m_wdata, .m_be, .m_gnt, .m_rvalid, .m_rdata);
  always #5 clk = ~clk;

  function automatic logic [127:0] memval(int w);
    return {32'(w) ^ 32'h1234_5678, 32'(w * 3), 32'(w), 32'hC0DE_0000 | 32'(w)};
  endfunction
  assign m_gnt = m_req;
  always @(posedge clk) begin
    m_rvalid <= m_req;
    m_rdata  <= memval(int'(m_addr >> 4));
  end
  always @(negedge clk) tx_ready <= bp ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("unexpected flit %h", tx_data);
    end else begin
      automatic logic [127:0] e = expq.pop_front();
      if (tx_data !== e) begin
        failures++;
        if (failures < 6) $display("flit %h exp %h", tx_data, e);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Build the expected flits of a command.
  task automatic expect_cmd(am_cmd_t c, int pb);
    int left = (c.mtype == AM_SHORT) ? 0 : int'(c.len);
    int off = 0;
    do begin
      am_hdr_t h;
      int plen = (left > pb) ? pb : left;
      h = '0;
      h.arg1 = c.arg1; h.arg0 = c.arg0; h.len = 16'(plen);
      h.addr = c.dst_addr + 32'(off); h.src_node = node_id;
      h.handler = c.handler; h.mtype = c.mtype; h.reply = c.reply;
      h.last = (left == plen);
      expq.push_back(h);
      for (int k = 0; k < (plen + 15) / 16; k++) expq.push_back(memval(int'(c.src_addr >> 4) + off / 16 + k));
      off += plen; left -= plen;
    end while (left > 0);
  endtask

  task automatic send(am_type_e t, handler_e hd, int src, int dst, int len, int pb);
    am_cmd_t c;
    c = '0;
    c.mtype = t; c.handler = hd; c.src_addr = 32'(src); c.dst_addr = 32'(dst);
    c.len = 32'(len); c.arg0 = $urandom; c.arg1 = $urandom; c.reply = $urandom % 2;
    while (busy || expq.size() != 0) @(posedge clk);
    @(negedge clk);
    pkt_bytes = 16'(pb);
    expect_cmd(c, pb);
    cmd = c; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  initial begin
    int t0, t1;
    cmd_valid = 0; cmd = '0; pkt_bytes = 16'd1024; bp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // bandwidth: 4 KiB in 1 KiB packets, port always ready
    send(AM_LONG, H_PUT, 'h1000, 'h8000, 4096, 1024);
    t0 = $time / 10;
    while (busy || expq.size() != 0) @(posedge clk);
    t1 = $time / 10;
    $display("4 KiB PUT, 1 KiB packets: %0d cycles (%0d flits)", t1 - t0, 4 * 65);
    checks++;
    if (t1 - t0 > 4 * (65 + 3)) begin failures++; $display("too slow"); end
    bp = 1;
    send(AM_LONG,   H_PUT,     'h2000, 'h100, 3000, 1024);
    send(AM_SHORT,  H_GET,     0,      'h300, 777, 1024);
    send(AM_MEDIUM, H_COMPUTE, 'h3000, 'h40, 100, 128);
    send(AM_LONG,   H_PUT,     'h4000, 'h80, 0, 256);
    send(AM_LONG,   H_PUT,     'h5000, 'h80, 1000, 256);
    for (int i = 0; i < 10; i++)
      send(am_type_e'($urandom % 3), H_PUT, 16 * ($urandom % 512), 16 * ($urandom % 512), $urandom % 2000, 128 << ($urandom % 4));
    while (busy || expq.size() != 0) @(posedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
