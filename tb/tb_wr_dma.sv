// tb_wr_dma: two clients write payloads of random byte counts (including
// partial last words) to a memory model with random grant stalls. The
// memory afterwards must hold exactly the payload bytes, the bytes beyond
// each payload must be untouched, and each client must see one done pulse
// per descriptor.
module tb_wr_dma;
  localparam int NC = 2, MW = 512;
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] desc_valid, desc_ready, d_valid, d_ready, done;
  logic [NC-1:0][31:0] desc_addr;
  logic [NC-1:0][15:0] desc_bytes;
  logic [NC-1:0][127:0] d_data;
  logic m_req, m_we, m_gnt, m_rvalid;
  logic [31:0] m_addr;
  logic [127:0] m_wdata, m_rdata;
  logic [15:0] m_be;
  logic [7:0] mem [MW*16];
  logic [7:0] expm [MW*16];
  int checks = 0, failures = 0;
  int dones [NC];

  wr_dma #(.N_CLIENT(NC)) dut (.*);
  always #5 clk = ~clk;
  assign m_rvalid = 1'b0;
  assign m_rdata  = '0;

  bit gnt_ok;
  always @(negedge clk) gnt_ok <= ($urandom % 3 != 0);
  always_comb m_gnt = m_req && gnt_ok;
  always @(posedge clk) if (m_req && m_gnt && m_we)
    for (int b = 0; b < 16; b++) if (m_be[b]) mem[int'(m_addr) + b] <= m_wdata[8*b +: 8];
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NC; c++) if (done[c]) dones[c]++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic xfer(int c, int word0, int nbytes);
    int nw = (nbytes + 15) / 16;
    @(negedge clk);
    desc_valid[c] = 1; desc_addr[c] = 32'(word0 * 16); desc_bytes[c] = 16'(nbytes);
    @(posedge clk);
    while (!desc_ready[c]) @(posedge clk);
    @(negedge clk); desc_valid[c] = 0;
    for (int i = 0; i < nw; i++) begin
      logic [127:0] w;
      w = {$urandom, $urandom, $urandom, $urandom};
      for (int b = 0; b < 16; b++) if (i * 16 + b < nbytes) expm[word0 * 16 + i * 16 + b] = w[8*b +: 8];
      d_valid[c] = ($urandom % 4 != 0);
      while (!d_valid[c]) begin @(negedge clk); d_valid[c] = ($urandom % 2); end
      d_data[c] = w;
      @(posedge clk);
      while (!d_ready[c]) @(posedge clk);
      @(negedge clk); d_valid[c] = 0;
    end
  endtask

  initial begin
    int nd [NC];
    desc_valid = 0; d_valid = 0; desc_addr = '0; desc_bytes = '0; d_data = '0;
    for (int i = 0; i < MW*16; i++) begin mem[i] = 8'hEE; expm[i] = 8'hEE; end
    dones[0] = 0; dones[1] = 0; nd[0] = 0; nd[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      fork
        begin xfer(0, k * 20, 1 + $urandom % 300); end
        begin xfer(1, 256 + k * 20, 1 + $urandom % 300); end
      join
      nd[0]++; nd[1]++;
    end
    // a zero-byte descriptor still completes
    xfer(0, 500, 0); nd[0]++;
    repeat (10) @(posedge clk);
    for (int i = 0; i < MW*16; i++) begin
      checks++;
      if (mem[i] !== expm[i]) begin
        failures++;
        if (failures < 5) $display("byte %0d = %h exp %h", i, mem[i], expm[i]);
      end
    end
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (dones[c] != nd[c]) begin failures++; $display("client %0d done %0d exp %0d", c, dones[c], nd[c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
