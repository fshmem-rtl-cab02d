// tb_bandwidth: the communication benchmark. Two nodes at full default
// size; node 0 performs PUTs into node 1 and GETs from node 1 for transfer
// sizes from 4 B to 2 MiB (factor 4 steps) and packet sizes 128, 256, 512
// and 1024 bytes. The time of a transfer runs from the cycle the host
// command enters the GASNet core to the cycle the last payload word is
// written at the destination. Bandwidth is reported in MB/s for a 250 MHz
// clock; 128 bits x 250 MHz = 4000 MB/s is the link's ceiling. Checks:
// 2 MiB PUT with 1 KiB packets reaches at least 90 % of the ceiling;
// larger packets give more bandwidth; a small GET is slower than a small
// PUT; the first and last 1 KiB of a 2 MiB transfer arrive intact.
module tb_bandwidth;
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
  logic [1:0] dla_valid, dmem_gnt, dmem_rvalid;
  comp_cmd_t [1:0] dla_cmd;
  logic [1:0][127:0] dmem_rdata;
  int checks = 0, failures = 0;
  int issued_at [2], done_at [2], done_cnt [2];

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
      .dla_valid(dla_valid[n]), .dla_ready(1'b0), .dla_cmd(dla_cmd[n]), .dla_done(1'b0),
      .dmem_req(1'b0), .dmem_we(1'b0), .dmem_addr('0), .dmem_wdata('0), .dmem_be('0),
      .dmem_gnt(dmem_gnt[n]), .dmem_rvalid(dmem_rvalid[n]), .dmem_rdata(dmem_rdata[n])
    );
    always @(posedge clk) if (rst_n) begin
      if (u_node.h_issued) issued_at[n] = int'($time / 4);
      if (u_node.msg_done[0]) begin done_at[n] = int'($time / 4); done_cnt[n]++; end
    end
  end
  assign rx_valid[1] = tx_valid[0];
  assign rx_data[1]  = tx_data[0];
  assign tx_ready[0] = rx_ready[1];
  assign rx_valid[0] = tx_valid[1];
  assign rx_data[0]  = tx_data[1];
  assign tx_ready[1] = rx_ready[0];

  always #2 clk = ~clk;   // 250 MHz

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mw(int n, int a, logic [63:0] d);
    @(negedge clk); mmio_wr[n] = 1; mmio_addr[n] = 8'(a); mmio_wdata[n] = d;
    @(negedge clk); mmio_wr[n] = 0;
  endtask
  task automatic hw(int n, int a, logic [127:0] d);
    @(negedge clk); hmem_req[n] = 1; hmem_we[n] = 1; hmem_addr[n] = 32'(a); hmem_wdata[n] = d; hmem_be[n] = '1;
    @(posedge clk); while (!hmem_gnt[n]) @(posedge clk);
    @(negedge clk); hmem_req[n] = 0; hmem_we[n] = 0;
  endtask
  task automatic hr(int n, int a, output logic [127:0] d);
    @(negedge clk); hmem_req[n] = 1; hmem_we[n] = 0; hmem_addr[n] = 32'(a);
    @(posedge clk); while (!hmem_gnt[n]) @(posedge clk);
    @(negedge clk); hmem_req[n] = 0; d = hmem_rdata[n];
  endtask
  function automatic logic [127:0] pattern(int w);
    return {32'(w), ~32'(w), 32'hFACE_0000 ^ 32'(w), 32'(w * 5)};
  endfunction

  // One transfer from node 0 on port 0; returns cycles.
  task automatic xfer(bit get, int bytes, output int cycles);
    int n_done = get ? 0 : 1;
    int prior = done_cnt[n_done];
    mw(0, 0, 64'h0); mw(0, 1, 64'h0); mw(0, 2, 64'(bytes));
    mw(0, 3, {32'(bytes), 32'h0});
    if (get) mw(0, 4, 64'({2'd0, 1'b0, 4'(H_GET), 1'b0, 2'(AM_SHORT)}));
    else     mw(0, 4, 64'({2'd0, 1'b0, 4'(H_PUT), 1'b0, 2'(AM_LONG)}));
    while (done_cnt[n_done] == prior) @(posedge clk);
    cycles = done_at[n_done] - issued_at[0] + 1;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    int pk [4] = '{128, 256, 512, 1024};
    int sz [10] = '{4, 16, 64, 256, 1024, 2048, 8192, 32768, 131072, 2097152};
    int put_bw [4][10], get_bw [4][10];
    int cyc;
    mmio_wr = 0; mmio_rd = 0; mmio_addr = '0; mmio_wdata = '0;
    hmem_req = 0; hmem_we = 0; hmem_addr = '0; hmem_wdata = '0; hmem_be = '0;
    done_cnt[0] = 0; done_cnt[1] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    mw(0, 9, 0); mw(1, 9, 1);
    // recognisable data at both ends of the 2 MiB source region on both nodes
    for (int w = 0; w < 64; w++) begin
      hw(0, 16 * w, pattern(w)); hw(0, 'h20_0000 - 1024 + 16 * w, pattern(1000 + w));
      hw(1, 16 * w, pattern(w)); hw(1, 'h20_0000 - 1024 + 16 * w, pattern(1000 + w));
    end
    for (int p = 0; p < 4; p++) begin
      mw(0, 8, 64'(pk[p])); mw(1, 8, 64'(pk[p]));
      for (int s = 0; s < 10; s++) begin
        xfer(0, sz[s], cyc); put_bw[p][s] = int'(longint'(sz[s]) * 250 / cyc);
        xfer(1, sz[s], cyc); get_bw[p][s] = int'(longint'(sz[s]) * 250 / cyc);
      end
    end
    $display("bandwidth in MB/s at 250 MHz (PUT / GET)");
    $display("   bytes     128 B pkt     256 B pkt     512 B pkt    1024 B pkt");
    for (int s = 0; s < 10; s++)
      $display("%8d  %5d / %5d  %5d / %5d  %5d / %5d  %5d / %5d", sz[s],
        put_bw[0][s], get_bw[0][s], put_bw[1][s], get_bw[1][s],
        put_bw[2][s], get_bw[2][s], put_bw[3][s], get_bw[3][s]);
    checks++;
    if (put_bw[3][9] < 3600) begin failures++; $display("peak PUT bandwidth %0d below 90%%", put_bw[3][9]); end
    for (int p = 1; p < 4; p++) begin
      checks++;
      if (put_bw[p][9] < put_bw[p-1][9]) begin failures++; $display("packet %0d slower than %0d", pk[p], pk[p-1]); end
    end
    checks++;
    if (get_bw[3][5] >= put_bw[3][5]) begin failures++; $display("2 KiB GET not slower than PUT"); end
    // the last transfer was a 2 MiB GET into node 0; the one before a 2 MiB PUT into node 1
    for (int n = 0; n < 2; n++)
      for (int w = 0; w < 64; w++) begin
        logic [127:0] d0, d1;
        hr(n, 16 * w, d0); hr(n, 'h20_0000 - 1024 + 16 * w, d1);
        checks++;
        if (d0 !== pattern(w) || d1 !== pattern(1000 + w)) begin
          failures++; if (failures < 5) $display("node %0d word %0d corrupted", n, w);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
