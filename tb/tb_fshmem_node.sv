// tb_fshmem_node: two FSHMEM nodes at full default size, joined port to port
// (node 0 port p <-> node 1 port p), each with a behavioural DLA. The host
// side is played through each node's register and memory ports. Scenarios:
//   1. PUT: node 0 writes 4 KiB into node 1's shared segment (1 KiB packets),
//      with latency and throughput measured;
//   2. GET: node 1 reads 1000 bytes of node 0's shared segment;
//   3. medium message: payload lands in the remote local segment;
//   4. COMPUTE active message from node 1 starts node 0's DLA; ART sends
//      the results to node 1 in chunks of N while the DLA works, plus the
//      remainder, while node 0's host floods the same port with PUTs so the
//      scheduler has competing sources and a full queue;
//   5. the same PUT with 128-byte packets, which must take longer.
// Every mechanism is counted; one that never happens is a failure.
module tb_fshmem_node;
  import fshmem_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] mmio_wr, mmio_rd, hmem_req, hmem_we, hmem_gnt, hmem_rvalid;
  logic [1:0][7:0] mmio_addr;
  logic [1:0][63:0] mmio_wdata, mmio_rdata;
  logic [1:0][31:0] hmem_addr;
  logic [1:0][127:0] hmem_wdata, hmem_rdata;
  logic [1:0][15:0] hmem_be;
  logic [1:0][1:0] tx_valid, tx_ready, rx_valid, rx_ready;
  logic [1:0][1:0][127:0] tx_data, rx_data;
  logic [1:0] dla_valid, dla_ready, dla_done, dmem_req, dmem_we, dmem_gnt, dmem_rvalid;
  comp_cmd_t [1:0] dla_cmd;
  logic [1:0][31:0] dmem_addr;
  logic [1:0][127:0] dmem_wdata, dmem_rdata;
  logic [1:0][15:0] dmem_be;
  int checks = 0, failures = 0;
  // mechanism counters
  int n_multi_pkt = 0, n_contention = 0, n_queue_full = 0, n_get_reply = 0;
  int n_medium = 0, n_compute = 0, n_art = 0, n_art_flush = 0;

  for (genvar n = 0; n < 2; n++) begin : g_node
    fshmem_node u_node (
      .clk, .rst_n,
      .mmio_wr(mmio_wr[n]), .mmio_rd(mmio_rd[n]), .mmio_addr(mmio_addr[n]),
      .mmio_wdata(mmio_wdata[n]), .mmio_rdata(mmio_rdata[n]),
      .hmem_req(hmem_req[n]), .hmem_we(hmem_we[n]), .hmem_addr(hmem_addr[n]),
      .hmem_wdata(hmem_wdata[n]), .hmem_be(hmem_be[n]), .hmem_gnt(hmem_gnt[n]),
      .hmem_rvalid(hmem_rvalid[n]), .hmem_rdata(hmem_rdata[n]),
      .tx_valid(tx_valid[n]), .tx_ready(tx_ready[n]), .tx_data(tx_data[n]),
      .rx_valid(rx_valid[n]), .rx_ready(rx_ready[n]), .rx_data(rx_data[n]),
      .dla_valid(dla_valid[n]), .dla_ready(dla_ready[n]), .dla_cmd(dla_cmd[n]), .dla_done(dla_done[n]),
      .dmem_req(dmem_req[n]), .dmem_we(dmem_we[n]), .dmem_addr(dmem_addr[n]),
      .dmem_wdata(dmem_wdata[n]), .dmem_be(dmem_be[n]), .dmem_gnt(dmem_gnt[n]),
      .dmem_rvalid(dmem_rvalid[n]), .dmem_rdata(dmem_rdata[n])
    );
    dla_model #(.GAP(40)) u_dla (
      .clk, .rst_n, .cmd_valid(dla_valid[n]), .cmd_ready(dla_ready[n]), .cmd(dla_cmd[n]),
      .done(dla_done[n]), .m_req(dmem_req[n]), .m_we(dmem_we[n]), .m_addr(dmem_addr[n]),
      .m_wdata(dmem_wdata[n]), .m_be(dmem_be[n]), .m_gnt(dmem_gnt[n]),
      .m_rvalid(dmem_rvalid[n]), .m_rdata(dmem_rdata[n])
    );
  end
  // cables
  assign rx_valid[1] = tx_valid[0];
  assign rx_data[1]  = tx_data[0];
  assign tx_ready[0] = rx_ready[1];
  assign rx_valid[0] = tx_valid[1];
  assign rx_data[0]  = tx_data[1];
  assign tx_ready[1] = rx_ready[0];

  always #2 clk = ~clk;   // 250 MHz

  // ---- mechanism probes ----
  for (genvar n = 0; n < 2; n++) begin : g_probe
    always @(posedge clk) if (rst_n) begin
      automatic am_hdr_t h;
      if ($countones(g_node[n].u_node.u_gasnet.g_port[0].u_sched.src_valid) > 1) n_contention++;
      if (!g_node[n].u_node.u_gasnet.g_port[0].u_sched.fifo_ready) n_queue_full++;
      for (int p = 0; p < 2; p++)
        if (g_node[n].u_node.hdr_seen[p]) begin
          h = am_hdr_t'(rx_data[n][p]);
          if (!h.last) n_multi_pkt++;
          if (h.reply) n_get_reply++;
          if (h.mtype == AM_MEDIUM) n_medium++;
        end
      if (dla_valid[n] && dla_ready[n]) n_compute++;
      if (g_node[n].u_node.art_sent) begin
        n_art++;
        if (g_node[n].u_node.u_ctrl.u_art.pend < 32'(g_node[n].u_node.art_n)) n_art_flush++;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host helpers ----
  task automatic mw(int n, int a, logic [63:0] d);
    @(negedge clk); mmio_wr[n] = 1; mmio_addr[n] = 8'(a); mmio_wdata[n] = d;
    @(negedge clk); mmio_wr[n] = 0;
  endtask
  task automatic mr(int n, int a, output logic [63:0] d);
    @(negedge clk); mmio_rd[n] = 1; mmio_addr[n] = 8'(a);
    @(negedge clk); mmio_rd[n] = 0; d = mmio_rdata[n];
  endtask
  task automatic hw(int n, int a, logic [127:0] d);
    @(negedge clk); hmem_req[n] = 1; hmem_we[n] = 1; hmem_addr[n] = 32'(a); hmem_wdata[n] = d; hmem_be[n] = '1;
    @(posedge clk); while (!hmem_gnt[n]) @(posedge clk);
    @(negedge clk); hmem_req[n] = 0; hmem_we[n] = 0;
  endtask
  task automatic hr(int n, int a, output logic [127:0] d);
    @(negedge clk); hmem_req[n] = 1; hmem_we[n] = 0; hmem_addr[n] = 32'(a);
    @(posedge clk); while (!hmem_gnt[n]) @(posedge clk);
    @(negedge clk); hmem_req[n] = 0;
    d = hmem_rdata[n];
  endtask
  // command: registers then doorbell
  task automatic cmd(int n, int target, am_type_e t, handler_e h, int src, int dst, int len, int a0, int a1);
    logic [63:0] st;
    do mr(n, 16, st); while (st[0]);
    mw(n, 0, 64'(src)); mw(n, 1, 64'(dst)); mw(n, 2, 64'(len)); mw(n, 3, {32'(a1), 32'(a0)});
    mw(n, 4, 64'({2'(target), 1'b0, 4'(h), 1'b0, 2'(t)}));
  endtask
  task automatic wait_msgs(int n, int reg_i, int count);
    logic [63:0] v;
    do mr(n, reg_i, v); while (int'(v) < count);
  endtask
  function automatic logic [127:0] pattern(int seed, int w);
    return {32'(seed * 1000 + w), 32'(w * 13 + 7), 32'(seed), 32'(w)};
  endfunction
  task automatic expect_words(string what, int n, int a, int seed, int words, int mult);
    int bad = 0;
    for (int w = 0; w < words; w++) begin
      logic [127:0] d, e;
      hr(n, a + 16 * w, d);
      e = pattern(seed, w);
      for (int l = 0; l < 4; l++) e[32*l +: 32] = e[32*l +: 32] * 32'(mult);
      if (d !== e) begin bad++; if (bad < 4) $display("  %s word %0d: %h exp %h", what, w, d, e); end
    end
    checks++;
    if (bad) begin failures++; $display("%s: %0d of %0d words wrong", what, bad, words); end
  endtask

  initial begin
    logic [63:0] v, v1;
    int t0, t_put_1k, t_put_128, lat_put, lat_get;
    mmio_wr = 0; mmio_rd = 0; mmio_addr = '0; mmio_wdata = '0;
    hmem_req = 0; hmem_we = 0; hmem_addr = '0; hmem_wdata = '0; hmem_be = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    mw(0, 9, 0); mw(1, 9, 1);
    // node 0: 4 KiB of source data in its local segment, 1 KiB in its shared segment
    for (int w = 0; w < 256; w++) hw(0, 'h20_0000 + 16 * w, pattern(1, w));
    for (int w = 0; w < 64; w++)  hw(0, 'h8000 + 16 * w, pattern(2, w));

    // 1. PUT 4 KiB node 0 -> node 1 (port 0), 1 KiB packets
    t0 = $time / 4;
    cmd(0, 0, AM_LONG, H_PUT, 'h20_0000, 'h0, 4096, 0, 0);
    wait_msgs(1, 17, 1);
    t_put_1k = $time / 4 - t0;
    expect_words("PUT", 1, 'h0, 1, 256, 1);
    // latency of a one-packet PUT: command issue to header arrival at node 1
    cmd(0, 0, AM_LONG, H_PUT, 'h20_0000, 'h6000, 64, 0, 0);
    wait_msgs(1, 17, 2);
    mr(0, 22, v); mr(1, 23, v1);
    lat_put = int'(v1) - int'(v);

    // 2. GET: node 1 reads 1000 bytes at node 0 0x8000 into its 0x4000 (port 1)
    cmd(1, 1, AM_SHORT, H_GET, 0, 'h4000, 0, 'h8000, 1000);
    wait_msgs(1, 18, 1);
    mr(1, 21, v); lat_get = int'(v);
    expect_words("GET", 1, 'h4000, 2, 62, 1);
    begin
      // the last partial word: 1000 = 62*16 + 8 bytes
      logic [127:0] d, e;
      hr(1, 'h4000 + 16 * 62, d); e = pattern(2, 62);
      checks++;
      if (d[63:0] !== e[63:0]) begin failures++; $display("GET tail wrong"); end
    end

    // 3. medium: node 1 sends 96 bytes of its shared 0x0 to node 0 local offset 0x8000
    cmd(1, 0, AM_MEDIUM, H_PUT, 'h0, 'h8000, 96, 0, 0);
    wait_msgs(0, 17, 1);
    expect_words("medium", 0, 'h20_8000, 1, 6, 1);

    // 4. ART: node 0 sends every 4 results to node 1 shared 0xC000 over port 0
    mw(0, 11, 'h20_4000); mw(0, 12, 'hC000); mw(0, 13, 0); mw(0, 10, 64'h1_0004);
    // node 1 asks node 0 (port 1) to compute 10 results of x*3 from 0x20_0000
    cmd(1, 1, AM_SHORT, H_COMPUTE, 0, 0, 0, 'h20_0000, (3 << 16) | 10);
    // meanwhile node 0's host keeps port 0 busy
    for (int i = 0; i < 12; i++) cmd(0, 0, AM_LONG, H_PUT, 'h20_0000, 'h1_0000, 2048, 0, 0);
    do mr(0, 20, v); while (int'(v) < 3);
    do mr(0, 19, v); while (int'(v) < 1);
    wait_msgs(1, 17, 2 + 12 + 3);
    expect_words("ART results", 1, 'hC000, 1, 10, 3);
    mr(0, 20, v);
    checks++;
    if (v != 64'd3) begin failures++; $display("ART transfers %0d, expected 3", v); end

    // 5. the 4 KiB PUT again with 128-byte packets
    mw(0, 8, 128);
    t0 = $time / 4;
    cmd(0, 0, AM_LONG, H_PUT, 'h20_0000, 'h2000, 4096, 0, 0);
    wait_msgs(1, 17, 2 + 12 + 3 + 1);
    t_put_128 = $time / 4 - t0;
    expect_words("PUT 128B packets", 1, 'h2000, 1, 256, 1);

    $display("PUT 4 KiB: %0d cycles with 1 KiB packets (%0d MB/s at 250 MHz), %0d cycles with 128 B packets",
             t_put_1k, 4096 * 250 / t_put_1k, t_put_128);
    $display("latency: PUT %0d cycles (%0d ns), GET %0d cycles (%0d ns)", lat_put, lat_put * 4, lat_get, lat_get * 4);
    checks++;
    if (!(lat_get > lat_put && lat_put > 0)) begin failures++; $display("latency order wrong"); end
    checks++;
    if (!(t_put_128 > t_put_1k)) begin failures++; $display("small packets not slower"); end
    $display("mechanisms: multi-packet %0d, scheduler contention %0d, queue full %0d, GET reply %0d, medium %0d, compute %0d, ART %0d, ART flush %0d",
             n_multi_pkt, n_contention, n_queue_full, n_get_reply, n_medium, n_compute, n_art, n_art_flush);
    checks += 8;
    if (n_multi_pkt == 0)  begin failures++; $display("no multi-packet message"); end
    if (n_contention == 0) begin failures++; $display("no scheduler contention"); end
    if (n_queue_full == 0) begin failures++; $display("command queue never full"); end
    if (n_get_reply == 0)  begin failures++; $display("no GET reply"); end
    if (n_medium == 0)     begin failures++; $display("no medium message"); end
    if (n_compute == 0)    begin failures++; $display("no compute dispatch"); end
    if (n_art == 0)        begin failures++; $display("no ART transfer"); end
    if (n_art_flush == 0)  begin failures++; $display("no ART remainder flush"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

