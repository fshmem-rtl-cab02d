// tb_mem_interconnect: four masters issue random reads and writes to three
// small banks (and to an address above the banks). A reference memory is
// updated at every write grant; each read must return the reference word
// exactly one cycle after its grant. Also checks that two masters on
// different banks are served in the same cycle.
module tb_mem_interconnect;
  localparam int NM = 4, NB = 3, BW = 16;
  logic clk = 0, rst_n = 0;
  logic [NM-1:0] m_req, m_we, m_gnt, m_rvalid;
  logic [NM-1:0][31:0] m_addr;
  logic [NM-1:0][127:0] m_wdata, m_rdata;
  logic [NM-1:0][15:0] m_be;
  logic [NB-1:0] b_en, b_we;
  logic [NB-1:0][15:0] b_be;
  logic [NB-1:0][3:0] b_addr;
  logic [NB-1:0][127:0] b_wdata, b_rdata;
  int checks = 0, failures = 0, parallel = 0;
  logic [127:0] ref_mem [NB*BW];
  logic [NM-1:0] exp_valid;
  logic [NM-1:0][127:0] exp_data;

  mem_interconnect #(.N_M(NM), .N_BANK(NB), .BANK_WORDS(BW)) dut (.*);
  for (genvar b = 0; b < NB; b++) begin : g_b
    bram_bank #(.WORDS(BW)) u_bank (.clk, .en(b_en[b]), .we(b_we[b]), .be(b_be[b]),
      .addr(b_addr[b]), .wdata(b_wdata[b]), .rdata(b_rdata[b]));
  end
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Check reads one cycle after grant; update the reference on write grants.
  always @(posedge clk) if (rst_n) begin
    automatic int ng = 0;
    for (int m = 0; m < NM; m++) begin
      if (exp_valid[m]) begin
        checks++;
        if (!m_rvalid[m] || m_rdata[m] !== exp_data[m]) begin
          failures++;
          if (failures < 5) $display("m%0d read %h exp %h v=%0d", m, m_rdata[m], exp_data[m], m_rvalid[m]);
        end
      end else if (m_rvalid[m]) begin
        failures++; $display("spurious rvalid m%0d", m);
      end
    end
    for (int m = 0; m < NM; m++) begin
      automatic int w = int'(m_addr[m] >> 4);
      exp_valid[m] <= m_req[m] && m_gnt[m] && !m_we[m];
      if (m_req[m] && m_gnt[m]) begin
        ng++;
        if (w < NB*BW) begin
          if (m_we[m]) begin
            for (int b = 0; b < 16; b++) if (m_be[m][b]) ref_mem[w][8*b +: 8] = m_wdata[m][8*b +: 8];
          end else exp_data[m] <= ref_mem[w];
        end else exp_data[m] <= '0;
      end
    end
    if (ng > 1) parallel++;
  end

  initial begin
    m_req = 0; m_we = 0; m_addr = '0; m_wdata = '0; m_be = '0; exp_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialise through master 0
    for (int w = 0; w < NB*BW; w++) begin
      @(negedge clk);
      m_req[0] = 1; m_we[0] = 1; m_addr[0] = 32'(w * 16); m_be[0] = '1;
      m_wdata[0] = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      while (!m_gnt[0]) @(posedge clk);
    end
    @(negedge clk); m_req = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int m = 0; m < NM; m++) begin
        // a granted request is replaced by a new one
        if (!m_req[m] || m_gnt_q[m]) begin
          m_req[m]   = ($urandom % 4) != 0;
          m_we[m]    = $urandom % 2;
          m_addr[m]  = 32'((($urandom % (NB*BW + 2))) * 16);
          m_be[m]    = 16'($urandom);
          m_wdata[m] = {$urandom, $urandom, $urandom, $urandom};
        end
      end
    end
    @(negedge clk); m_req = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (parallel == 0) begin failures++; $display("no parallel grants"); end
    $display("parallel grant cycles: %0d", parallel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NM-1:0] m_gnt_q;
  always @(posedge clk) m_gnt_q <= m_req & m_gnt;
endmodule
