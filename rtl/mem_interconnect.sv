// mem_interconnect: crossbar between the node's memory masters and banks.
//
// Masters are the host (PCIe), the read DMA, the write DMA and the compute
// core. Each master presents one request per cycle (req, we, byte address,
// write data, byte enables) and holds it until gnt. The bank is chosen by
// the word address divided by the bank size; every bank grants one master
// per cycle, round-robin. A granted read returns rvalid/rdata to that master
// exactly one cycle after gnt. An address above the last bank is granted,
// writes to it are dropped and reads return zero. The paper only names the
// interconnect; the crossbar, the policy and the timing are this design's.
module mem_interconnect #(
  parameter int unsigned N_M        = fshmem_pkg::N_MASTER,
  parameter int unsigned N_BANK     = fshmem_pkg::N_BANK,
  parameter int unsigned BANK_WORDS = fshmem_pkg::BANK_WORDS,
  parameter int unsigned DATA_W     = fshmem_pkg::DATA_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // master side
  input  logic [N_M-1:0]                m_req,
  input  logic [N_M-1:0]                m_we,
  input  logic [N_M-1:0][31:0]          m_addr,
  input  logic [N_M-1:0][DATA_W-1:0]    m_wdata,
  input  logic [N_M-1:0][DATA_W/8-1:0]  m_be,
  output logic [N_M-1:0]                m_gnt,
  output logic [N_M-1:0]                m_rvalid,
  output logic [N_M-1:0][DATA_W-1:0]    m_rdata,
  // bank side
  output logic [N_BANK-1:0]                          b_en,
  output logic [N_BANK-1:0]                          b_we,
  output logic [N_BANK-1:0][DATA_W/8-1:0]            b_be,
  output logic [N_BANK-1:0][$clog2(BANK_WORDS)-1:0]  b_addr,
  output logic [N_BANK-1:0][DATA_W-1:0]              b_wdata,
  input  logic [N_BANK-1:0][DATA_W-1:0]              b_rdata
);
  localparam int unsigned OFF = $clog2(DATA_W/8);
  localparam int unsigned BW  = $clog2(BANK_WORDS);
  localparam int unsigned MI  = $clog2(N_M > 1 ? N_M : 2);

  // Bank number of each master's request; N_BANK means "no bank".
  logic [N_M-1:0][31:0] m_bank;
  logic [N_M-1:0]       m_null;
  always_comb begin
    for (int m = 0; m < N_M; m++) begin
      m_bank[m] = 32'(m_addr[m] >> (OFF + BW));
      m_null[m] = m_req[m] && (m_bank[m] >= N_BANK);
    end
  end

  logic [N_BANK-1:0][N_M-1:0] b_req, b_gnt;
  logic [N_BANK-1:0][MI-1:0]  b_gidx;
  logic [N_BANK-1:0]          rd_pend;
  logic [N_BANK-1:0][MI-1:0]  rd_owner;
  logic [N_M-1:0]             null_rd;

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    always_comb
      for (int m = 0; m < N_M; m++)
        b_req[b][m] = m_req[m] && (m_bank[m] == b);

    rr_arbiter #(.N(N_M)) u_arb (
      .clk, .rst_n, .req(b_req[b]), .advance(1'b1),
      .gnt(b_gnt[b]), .gnt_idx(b_gidx[b])
    );

    assign b_en[b]    = |b_req[b];
    assign b_we[b]    = m_we[b_gidx[b]];
    assign b_be[b]    = m_be[b_gidx[b]];
    assign b_addr[b]  = m_addr[b_gidx[b]][OFF +: BW];
    assign b_wdata[b] = m_wdata[b_gidx[b]];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_pend[b]  <= 1'b0;
        rd_owner[b] <= '0;
      end else begin
        rd_pend[b]  <= b_en[b] && !b_we[b];
        rd_owner[b] <= b_gidx[b];
      end
    end
  end

  always_comb begin
    m_gnt = m_null;
    for (int b = 0; b < N_BANK; b++) m_gnt |= b_gnt[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) null_rd <= '0;
    else        null_rd <= m_null & ~m_we;
  end

  always_comb begin
    m_rvalid = null_rd;
    m_rdata  = '0;
    for (int b = 0; b < N_BANK; b++) begin
      if (rd_pend[b]) begin
        m_rvalid[rd_owner[b]] = 1'b1;
        m_rdata[rd_owner[b]]  = b_rdata[b];
      end
    end
  end

  // A master is granted by at most one bank per cycle.
  assert property (@(posedge clk) disable iff (!rst_n)
    (m_gnt & ~m_req) == '0);
endmodule
