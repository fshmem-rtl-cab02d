// tb_gasnet_core: the GASNet core with its two DMAs and a memory model, its
// network ports looped back (port 0 out -> port 1 in, port 1 out -> port 0
// in), so the node talks to itself. Checks a multi-packet PUT, a GET (the
// request goes out on one port, the reply returns on the other), an ART
// PUT, a medium COMPUTE message (payload stored, arguments delivered to the
// compute queue) and a host compute command.
module tb_gasnet_core;
  import fshmem_pkg::*;
  localparam int MB = 'h30_0000;
  logic clk = 0, rst_n = 0;
  logic [3:0] node_id = 4'd1;
  logic [15:0] pkt_bytes;
  logic [1:0] host_valid, host_ready;
  am_cmd_t host_cmd, art_cmd;
  logic host_cc_valid, host_cc_ready, art_valid, art_ready, art_port, cc_valid, cc_ready;
  comp_cmd_t host_cc_cmd, cc_cmd;
  logic [1:0] rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  logic [1:0][31:0] rd_req_addr;
  logic [1:0][15:0] rd_req_words;
  logic [127:0] rd_data;
  logic [1:0] wr_desc_valid, wr_desc_ready, wr_valid, wr_ready, wr_done;
  logic [1:0][31:0] wr_desc_addr;
  logic [1:0][15:0] wr_desc_bytes;
  logic [1:0][127:0] wr_data;
  logic [1:0] tx_valid, tx_ready, rx_valid, rx_ready, hdr_seen, msg_done;
  logic [1:0][127:0] tx_data, rx_data;
  // memory masters
  logic rm_req, rm_we, rm_rvalid, wm_req, wm_we;
  logic [31:0] rm_addr, wm_addr;
  logic [127:0] rm_wdata, rm_rdata, wm_wdata;
  logic [15:0] rm_be, wm_be;
  logic [7:0] mem [MB];
  int checks = 0, failures = 0, n_hdr = 0, n_done = 0;
  comp_cmd_t ccq [$];

  gasnet_core dut (.*);
  rd_dma #(.N_CLIENT(2)) u_rd (.clk, .rst_n, .req_valid(rd_req_valid), .req_ready(rd_req_ready),
    .req_addr(rd_req_addr), .req_words(rd_req_words), .d_valid(rd_valid), .d_ready(rd_ready),
    .d_data(rd_data), .m_req(rm_req), .m_we(rm_we), .m_addr(rm_addr), .m_wdata(rm_wdata),
    .m_be(rm_be), .m_gnt(rm_req), .m_rvalid(rm_rvalid), .m_rdata(rm_rdata));
  wr_dma #(.N_CLIENT(2)) u_wr (.clk, .rst_n, .desc_valid(wr_desc_valid), .desc_ready(wr_desc_ready),
    .desc_addr(wr_desc_addr), .desc_bytes(wr_desc_bytes), .d_valid(wr_valid), .d_ready(wr_ready),
    .d_data(wr_data), .done(wr_done), .m_req(wm_req), .m_we(wm_we), .m_addr(wm_addr),
    .m_wdata(wm_wdata), .m_be(wm_be), .m_gnt(wm_req), .m_rvalid(1'b0), .m_rdata('0));
  always #5 clk = ~clk;

  always @(posedge clk) begin
    rm_rvalid <= rm_req;
    for (int b = 0; b < 16; b++) rm_rdata[8*b +: 8] <= mem[int'(rm_addr) + b];
    if (wm_req) for (int b = 0; b < 16; b++) if (wm_be[b]) mem[int'(wm_addr) + b] <= wm_wdata[8*b +: 8];
  end

  // loopback
  assign rx_valid = {tx_valid[0], tx_valid[1]};
  assign rx_data  = {tx_data[0], tx_data[1]};
  assign tx_ready = {rx_ready[0], rx_ready[1]};

  always @(negedge clk) cc_ready <= $urandom % 2;
  always @(posedge clk) if (rst_n) begin
    n_hdr  += $countones(hdr_seen);
    n_done += $countones(msg_done);
    if (cc_valid && cc_ready) ccq.push_back(cc_cmd);
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host(int port, am_type_e t, handler_e h, int src, int dst, int len, int a0, int a1);
    @(negedge clk);
    host_cmd = '{mtype: t, reply: 1'b0, handler: h, src_addr: 32'(src), dst_addr: 32'(dst),
                 len: 32'(len), arg0: 32'(a0), arg1: 32'(a1)};
    host_valid[port] = 1;
    @(posedge clk);
    while (!host_ready[port]) @(posedge clk);
    @(negedge clk); host_valid = 0;
  endtask

  task automatic cmp(string what, int a, int b, int n);
    int bad = 0;
    for (int i = 0; i < n; i++) if (mem[a + i] !== mem[b + i]) bad++;
    checks++;
    if (bad) begin failures++; $display("%s: %0d bytes differ", what, bad); end
  endtask

  initial begin
    host_valid = 0; host_cmd = '0; host_cc_valid = 0; host_cc_cmd = '0;
    art_valid = 0; art_cmd = '0; art_port = 0; pkt_bytes = 16'd512;
    for (int i = 0; i < MB; i++) mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // PUT, 2000 bytes in 512-byte packets, out on port 0, back in on port 1
    host(0, AM_LONG, H_PUT, 'h20_0000, 'h1000, 2000, 0, 0);
    repeat (400) @(posedge clk);
    cmp("PUT", 'h1000, 'h20_0000, 2000);
    // GET: read 500 bytes from 0x1000 into 0x3000
    host(0, AM_SHORT, H_GET, 0, 'h3000, 0, 'h1000, 500);
    repeat (300) @(posedge clk);
    cmp("GET", 'h3000, 'h1000, 500);
    // ART PUT on port 1
    @(negedge clk); art_port = 1;
    art_cmd = '{mtype: AM_LONG, reply: 1'b0, handler: H_PUT, src_addr: 32'h20_1000, dst_addr: 32'h5000,
                len: 32'd256, arg0: 0, arg1: 0};
    art_valid = 1;
    @(posedge clk); while (!art_ready) @(posedge clk);
    @(negedge clk); art_valid = 0;
    repeat (100) @(posedge clk);
    cmp("ART PUT", 'h5000, 'h20_1000, 256);
    // COMPUTE, medium, with 64 bytes of payload to local offset 0x800
    host(1, AM_MEDIUM, H_COMPUTE, 'h20_2000, 'h800, 64, 'h1234, 'h5678);
    // host compute command
    @(negedge clk); host_cc_cmd = '{src_node: 4'd9, arg0: 32'hAA, arg1: 32'hBB}; host_cc_valid = 1;
    @(posedge clk); while (!host_cc_ready) @(posedge clk);
    @(negedge clk); host_cc_valid = 0;
    repeat (100) @(posedge clk);
    cmp("COMPUTE payload", int'(LOCAL_BASE) + 'h800, 'h20_2000, 64);
    checks++;
    if (ccq.size() != 2) begin failures++; $display("compute queue got %0d", ccq.size()); end
    else begin
      checks++;
      if (!((ccq[0].arg0 == 'h1234 && ccq[0].src_node == 4'd1 && ccq[1].arg0 == 'hAA) ||
            (ccq[1].arg0 == 'h1234 && ccq[1].src_node == 4'd1 && ccq[0].arg0 == 'hAA))) begin
        failures++; $display("compute args wrong");
      end
    end
    // headers: PUT 4 packets, GET 1 + reply 1, ART 1, COMPUTE 1; messages: 5
    checks++;
    if (n_hdr != 8 || n_done != 5) begin failures++; $display("headers %0d msgs %0d", n_hdr, n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
