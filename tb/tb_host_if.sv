// tb_host_if: writes the command registers and rings the doorbell for each
// target; checks the command presented to the target, that it is held until
// taken, that a doorbell while busy is ignored, the configuration outputs,
// and the event counters and read-back registers.
module tb_host_if;
  import fshmem_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mmio_wr, mmio_rd;
  logic [7:0] mmio_addr;
  logic [63:0] mmio_wdata, mmio_rdata;
  logic [1:0] am_valid, am_ready, msg_done;
  am_cmd_t am_cmd;
  logic cc_valid, cc_ready, issued, art_en, comp_done, art_sent;
  comp_cmd_t cc_cmd;
  logic [3:0] node_id;
  logic [15:0] pkt_bytes, art_n;
  logic [31:0] art_src, art_dst, perf_lat, perf_t_start, perf_t_hdr, perf_cycles;
  logic art_port;
  int checks = 0, failures = 0, n_issued = 0;

  host_if dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && issued) n_issued++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [63:0] d);
    @(negedge clk); mmio_wr = 1; mmio_addr = 8'(a); mmio_wdata = d;
    @(negedge clk); mmio_wr = 0;
  endtask
  task automatic rd(int a, output logic [63:0] d);
    @(negedge clk); mmio_rd = 1; mmio_addr = 8'(a);
    @(negedge clk); mmio_rd = 0; d = mmio_rdata;
  endtask
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [63:0] d;
    mmio_wr = 0; mmio_rd = 0; mmio_addr = 0; mmio_wdata = 0;
    am_ready = 0; cc_ready = 0; msg_done = 0; comp_done = 0; art_sent = 0;
    perf_lat = 32'd77; perf_t_start = 32'd10; perf_t_hdr = 32'd87; perf_cycles = 32'd1000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk("reset pkt_bytes", 64'(pkt_bytes), 64'd1024);
    wr(0, 64'h100); wr(1, 64'h2000); wr(2, 64'd4096); wr(3, {32'h0BAD, 32'hCAFE});
    // PUT, long, target port 1
    wr(4, 64'({2'd1, 1'b0, 4'(H_PUT), 1'b0, 2'(AM_LONG)}));
    repeat (3) @(negedge clk);
    chk("held valid", 64'(am_valid), 64'b10);
    chk("cmd", 64'({am_cmd.src_addr, am_cmd.dst_addr}), {32'h100, 32'h2000});
    chk("cmd2", 64'({am_cmd.arg1, am_cmd.arg0}), {32'h0BAD, 32'hCAFE});
    chk("cmd3", 64'({am_cmd.len, 4'(am_cmd.handler), 2'(am_cmd.mtype)}), {32'd4096, 4'(H_PUT), 2'(AM_LONG)});
    // doorbell while busy is ignored
    wr(4, 64'({2'd0, 1'b0, 4'(H_GET), 1'b0, 2'(AM_SHORT)}));
    rd(16, d); chk("busy", d, 64'd1);
    chk("still port 1", 64'(am_valid), 64'b10);
    @(negedge clk); am_ready = 2'b10; @(negedge clk); am_ready = 0;
    chk("taken", 64'(am_valid), 64'd0);
    chk("issued once", 64'(n_issued), 64'd1);
    // compute command to the local compute core
    wr(4, 64'({2'd2, 1'b0, 4'(H_COMPUTE), 1'b0, 2'(AM_SHORT)}));
    @(negedge clk);
    chk("cc valid", 64'(cc_valid), 64'd1);
    chk("cc args", 64'({cc_cmd.arg1, cc_cmd.arg0}), {32'h0BAD, 32'hCAFE});
    cc_ready = 1; @(negedge clk); cc_ready = 0;
    chk("cc taken", 64'(cc_valid), 64'd0);
    // configuration
    wr(8, 64'd256); wr(9, 64'd3); wr(10, 64'h1_0010); wr(11, 64'h2_0000); wr(12, 64'h40); wr(13, 64'd1);
    chk("cfg", {16'(pkt_bytes), 4'(node_id), 1'(art_en), 16'(art_n), 1'(art_port)},
        {16'd256, 4'd3, 1'b1, 16'h10, 1'b1});
    chk("art addr", {art_src, art_dst}, {32'h2_0000, 32'h40});
    // events
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); msg_done = 2'b01; comp_done = 1; art_sent = (i < 2);
    end
    @(negedge clk); msg_done = 2'b10; comp_done = 0; art_sent = 0;
    @(negedge clk); msg_done = 0;
    rd(17, d); chk("rx0", d, 64'd3);
    rd(18, d); chk("rx1", d, 64'd1);
    rd(19, d); chk("comp", d, 64'd3);
    rd(20, d); chk("art", d, 64'd2);
    rd(21, d); chk("lat", d, 64'd77);
    rd(23, d); chk("t_hdr", d, 64'd87);
    rd(1, d);  chk("dst readback", d, 64'h2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
