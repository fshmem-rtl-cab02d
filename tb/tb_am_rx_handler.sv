// tb_am_rx_handler: feeds packets into the receive handler (with the write
// DMA and a byte-addressed memory model) and checks: long payload lands in
// the shared segment, medium payload in the local segment, a GET produces
// the PUT reply command built from its header, a COMPUTE message queues its
// arguments only after its payload is in memory, and every message counts
// one msg_done.
module tb_am_rx_handler;
  import fshmem_pkg::*;
  localparam int MB = 'h30_0000;
  logic clk = 0, rst_n = 0;
  logic rx_valid, rx_ready;
  logic [127:0] rx_data;
  logic wr_desc_valid, wr_desc_ready, wr_valid, wr_ready, wr_done;
  logic [31:0] wr_desc_addr;
  logic [15:0] wr_desc_bytes;
  logic [127:0] wr_data;
  logic rep_valid, rep_ready, cc_valid, cc_ready, hdr_seen, msg_done;
  am_cmd_t rep_cmd;
  comp_cmd_t cc_cmd;
  handler_e msg_handler;
  logic m_req, m_we, m_gnt, m_rvalid;
  logic [31:0] m_addr;
  logic [127:0] m_wdata, m_rdata;
  logic [15:0] m_be;
  logic [7:0] mem [MB];
  logic [7:0] expm [int];
  int checks = 0, failures = 0, n_done = 0, n_hdr = 0, writes = 0;
  am_cmd_t   rep_q [$];
  comp_cmd_t cc_q [$];
  int cc_writes_at [$];

  am_rx_handler dut (.*);
  wr_dma #(.N_CLIENT(1)) u_dma (
    .clk, .rst_n, .desc_valid(wr_desc_valid), .desc_ready(wr_desc_ready),
    .desc_addr(wr_desc_addr), .desc_bytes(wr_desc_bytes),
    .d_valid(wr_valid), .d_ready(wr_ready), .d_data(wr_data), .done(wr_done),
    .m_req, .m_we, .m_addr, .m_wdata, .m_be, .m_gnt, .m_rvalid, .m_rdata);
  always #5 clk = ~clk;
  assign m_gnt = m_req;
  assign m_rvalid = 1'b0;
  assign m_rdata = '0;
  always @(posedge clk) if (m_req && m_we) begin
    writes++;
    for (int b = 0; b < 16; b++) if (m_be[b]) mem[int'(m_addr) + b] <= m_wdata[8*b +: 8];
  end
  always @(negedge clk) begin
    rep_ready <= ($urandom % 2);
    cc_ready  <= ($urandom % 2);
  end
  always @(posedge clk) if (rst_n) begin
    if (msg_done) n_done++;
    if (hdr_seen) n_hdr++;
    if (rep_valid && rep_ready) rep_q.push_back(rep_cmd);
    if (cc_valid && cc_ready) begin cc_q.push_back(cc_cmd); cc_writes_at.push_back(writes); end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic flit(logic [127:0] f);
    @(negedge clk);
    rx_valid = ($urandom % 4 != 0);
    while (!rx_valid) begin @(negedge clk); rx_valid = 1; end
    rx_data = f;
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    @(negedge clk); rx_valid = 0;
  endtask

  // Send one packet; payload bytes are random and recorded at the physical address.
  task automatic packet(am_type_e t, handler_e hd, logic last, int addr, int len, int a0, int a1);
    am_hdr_t h;
    int base = (t == AM_MEDIUM) ? int'(LOCAL_BASE) : int'(SHARED_BASE);
    h = '0;
    h.mtype = t; h.handler = hd; h.last = last; h.addr = 32'(addr); h.len = 16'(len);
    h.arg0 = 32'(a0); h.arg1 = 32'(a1); h.src_node = 4'd3;
    flit(h);
    if (t != AM_SHORT)
      for (int k = 0; k < (len + 15) / 16; k++) begin
        logic [127:0] w = {$urandom, $urandom, $urandom, $urandom};
        for (int b = 0; b < 16; b++) if (16 * k + b < len) expm[base + addr + 16 * k + b] = w[8*b +: 8];
        flit(w);
      end
  endtask

  initial begin
    rx_valid = 0; rx_data = '0;
    for (int i = 0; i < MB; i++) mem[i] = 8'h00;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // long PUT in two packets
    packet(AM_LONG, H_PUT, 0, 'h100, 64, 0, 0);
    packet(AM_LONG, H_PUT, 1, 'h140, 40, 0, 0);
    // medium PUT
    packet(AM_MEDIUM, H_PUT, 1, 'h200, 33, 0, 0);
    // GET request (short)
    packet(AM_SHORT, H_GET, 1, 'h5000, 0, 'h1230, 4096);
    // COMPUTE with payload (medium) and without (short)
    packet(AM_MEDIUM, H_COMPUTE, 1, 'h400, 48, 'hAAAA, 'hBBBB);
    packet(AM_SHORT, H_COMPUTE, 1, 0, 0, 'h1111, 'h2222);
    repeat (50) @(posedge clk);
    // memory
    foreach (expm[a]) begin
      checks++;
      if (mem[a] !== expm[a]) begin failures++; if (failures < 5) $display("mem[%h]=%h exp %h", a, mem[a], expm[a]); end
    end
    // GET reply
    checks++;
    if (rep_q.size() != 1 || rep_q[0].mtype != AM_LONG || rep_q[0].handler != H_PUT || !rep_q[0].reply ||
        rep_q[0].src_addr != 32'h1230 || rep_q[0].dst_addr != 32'h5000 || rep_q[0].len != 32'd4096) begin
      failures++; $display("bad GET reply (%0d)", rep_q.size());
    end
    // compute commands, the first only after its 3 payload writes
    checks++;
    if (cc_q.size() != 2 || cc_q[0].arg0 != 32'hAAAA || cc_q[0].arg1 != 32'hBBBB || cc_q[0].src_node != 4'd3 ||
        cc_q[1].arg0 != 32'h1111 || cc_q[1].arg1 != 32'h2222) begin
      failures++; $display("bad compute commands (%0d)", cc_q.size());
    end
    checks++;
    if (cc_writes_at.size() < 1 || cc_writes_at[0] != 4 + 3 + 3 + 3) begin
      failures++; $display("compute dispatched after %0d writes", cc_writes_at.size() ? cc_writes_at[0] : -1);
    end
    checks++;
    if (n_done != 5 || n_hdr != 6) begin failures++; $display("msg_done %0d hdr %0d", n_done, n_hdr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
