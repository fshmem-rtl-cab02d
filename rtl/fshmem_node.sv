// fshmem_node: one FPGA node of an FSHMEM system.
//
// The node joins a partitioned global address space: its shared memory
// segment can be written and read by other nodes with one-sided PUT and GET
// active messages, without the remote host taking part. Inside are the host
// register interface, the GASNet core (one scheduler, AM sequencer and AM
// receive handler per network port), a read DMA and a write DMA shared by
// the ports, a memory interconnect with three on-chip memory banks, the
// compute core's controller with Automatic Result Transfer, and a latency
// counter. The accelerator itself (the DLA), the PCIe block and the network
// transceivers are outside: their connections are ports of this module.
//
// Ports:
//   mmio_*      host register access (see host_if for the map)
//   hmem_*      host memory master (bulk loads by the host), 1-cycle read
//   tx_*/rx_*   128-bit flit streams of the two network ports, valid/ready
//   dla_*       DLA command port (valid/ready), its done pulse, and its
//               memory master port; every granted DLA write is a result
//               for ART
// Memory map: 0x00_0000-0x1F_FFFF shared segment (banks 0-1),
//             0x20_0000-0x2F_FFFF local segment (bank 2).
module fshmem_node
  import fshmem_pkg::*;
#(
  parameter int unsigned N_PORT     = 2,
  parameter int unsigned BANK_WORDS_P = fshmem_pkg::BANK_WORDS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host MMIO
  input  logic                          mmio_wr,
  input  logic                          mmio_rd,
  input  logic [7:0]                    mmio_addr,
  input  logic [63:0]                   mmio_wdata,
  output logic [63:0]                   mmio_rdata,
  // host memory master
  input  logic                          hmem_req,
  input  logic                          hmem_we,
  input  logic [31:0]                   hmem_addr,
  input  logic [DATA_W-1:0]             hmem_wdata,
  input  logic [DATA_W/8-1:0]           hmem_be,
  output logic                          hmem_gnt,
  output logic                          hmem_rvalid,
  output logic [DATA_W-1:0]             hmem_rdata,
  // network ports
  output logic [N_PORT-1:0]             tx_valid,
  input  logic [N_PORT-1:0]             tx_ready,
  output logic [N_PORT-1:0][DATA_W-1:0] tx_data,
  input  logic [N_PORT-1:0]             rx_valid,
  output logic [N_PORT-1:0]             rx_ready,
  input  logic [N_PORT-1:0][DATA_W-1:0] rx_data,
  // DLA
  output logic                          dla_valid,
  input  logic                          dla_ready,
  output comp_cmd_t                     dla_cmd,
  input  logic                          dla_done,
  input  logic                          dmem_req,
  input  logic                          dmem_we,
  input  logic [31:0]                   dmem_addr,
  input  logic [DATA_W-1:0]             dmem_wdata,
  input  logic [DATA_W/8-1:0]           dmem_be,
  output logic                          dmem_gnt,
  output logic                          dmem_rvalid,
  output logic [DATA_W-1:0]             dmem_rdata
);
  localparam int unsigned PW = $clog2(N_PORT > 1 ? N_PORT : 2);

  // ---------------- host interface ----------------
  logic [N_PORT-1:0] h_valid, h_ready;
  am_cmd_t           h_cmd;
  logic              h_cc_valid, h_cc_ready, h_issued;
  comp_cmd_t         h_cc_cmd;
  logic [NODE_W-1:0] node_id;
  logic [15:0]       pkt_bytes, art_n;
  logic              art_en, art_sent, comp_done;
  logic [31:0]       art_src, art_dst;
  logic [PW-1:0]     art_port;
  logic [N_PORT-1:0] hdr_seen, msg_done;
  logic [31:0]       p_cycles, p_start, p_hdr, p_lat;
  logic              p_armed;

  host_if #(.N_PORT(N_PORT)) u_host (
    .clk, .rst_n,
    .mmio_wr, .mmio_rd, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .am_valid(h_valid), .am_ready(h_ready), .am_cmd(h_cmd),
    .cc_valid(h_cc_valid), .cc_ready(h_cc_ready), .cc_cmd(h_cc_cmd),
    .issued(h_issued),
    .node_id, .pkt_bytes, .art_en, .art_n, .art_src, .art_dst, .art_port,
    .msg_done, .comp_done, .art_sent,
    .perf_lat(p_lat), .perf_t_start(p_start), .perf_t_hdr(p_hdr), .perf_cycles(p_cycles)
  );

  perf_counter u_perf (
    .clk, .rst_n, .start(h_issued), .stop(|hdr_seen),
    .cycles(p_cycles), .t_start(p_start), .t_hdr(p_hdr), .latency(p_lat), .armed(p_armed)
  );

  // ---------------- GASNet core ----------------
  logic              art_valid, art_ready;
  am_cmd_t           art_cmd;
  logic              cc_valid, cc_ready;
  comp_cmd_t         cc_cmd;
  logic [N_PORT-1:0]             rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  logic [N_PORT-1:0][31:0]       rd_req_addr;
  logic [N_PORT-1:0][15:0]       rd_req_words;
  logic [DATA_W-1:0]             rd_data;
  logic [N_PORT-1:0]             wr_desc_valid, wr_desc_ready, wr_valid, wr_ready, wr_done;
  logic [N_PORT-1:0][31:0]       wr_desc_addr;
  logic [N_PORT-1:0][15:0]       wr_desc_bytes;
  logic [N_PORT-1:0][DATA_W-1:0] wr_data;

  gasnet_core #(.N_PORT(N_PORT)) u_gasnet (
    .clk, .rst_n, .node_id, .pkt_bytes,
    .host_valid(h_valid), .host_ready(h_ready), .host_cmd(h_cmd),
    .host_cc_valid(h_cc_valid), .host_cc_ready(h_cc_ready), .host_cc_cmd(h_cc_cmd),
    .art_valid, .art_ready, .art_port, .art_cmd,
    .cc_valid, .cc_ready, .cc_cmd,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_words,
    .rd_valid, .rd_ready, .rd_data,
    .wr_desc_valid, .wr_desc_ready, .wr_desc_addr, .wr_desc_bytes,
    .wr_valid, .wr_ready, .wr_data, .wr_done,
    .tx_valid, .tx_ready, .tx_data, .rx_valid, .rx_ready, .rx_data,
    .hdr_seen, .msg_done
  );

  // ---------------- memory system ----------------
  logic [N_MASTER-1:0]                m_req, m_we, m_gnt, m_rvalid;
  logic [N_MASTER-1:0][31:0]          m_addr;
  logic [N_MASTER-1:0][DATA_W-1:0]    m_wdata, m_rdata;
  logic [N_MASTER-1:0][DATA_W/8-1:0]  m_be;

  rd_dma #(.N_CLIENT(N_PORT)) u_rd_dma (
    .clk, .rst_n,
    .req_valid(rd_req_valid), .req_ready(rd_req_ready),
    .req_addr(rd_req_addr), .req_words(rd_req_words),
    .d_valid(rd_valid), .d_ready(rd_ready), .d_data(rd_data),
    .m_req(m_req[M_RD]), .m_we(m_we[M_RD]), .m_addr(m_addr[M_RD]),
    .m_wdata(m_wdata[M_RD]), .m_be(m_be[M_RD]), .m_gnt(m_gnt[M_RD]),
    .m_rvalid(m_rvalid[M_RD]), .m_rdata(m_rdata[M_RD])
  );

  wr_dma #(.N_CLIENT(N_PORT)) u_wr_dma (
    .clk, .rst_n,
    .desc_valid(wr_desc_valid), .desc_ready(wr_desc_ready),
    .desc_addr(wr_desc_addr), .desc_bytes(wr_desc_bytes),
    .d_valid(wr_valid), .d_ready(wr_ready), .d_data(wr_data), .done(wr_done),
    .m_req(m_req[M_WR]), .m_we(m_we[M_WR]), .m_addr(m_addr[M_WR]),
    .m_wdata(m_wdata[M_WR]), .m_be(m_be[M_WR]), .m_gnt(m_gnt[M_WR]),
    .m_rvalid(m_rvalid[M_WR]), .m_rdata(m_rdata[M_WR])
  );

  assign m_req[M_HOST]   = hmem_req;
  assign m_we[M_HOST]    = hmem_we;
  assign m_addr[M_HOST]  = hmem_addr;
  assign m_wdata[M_HOST] = hmem_wdata;
  assign m_be[M_HOST]    = hmem_be;
  assign hmem_gnt        = m_gnt[M_HOST];
  assign hmem_rvalid     = m_rvalid[M_HOST];
  assign hmem_rdata      = m_rdata[M_HOST];

  assign m_req[M_COMP]   = dmem_req;
  assign m_we[M_COMP]    = dmem_we;
  assign m_addr[M_COMP]  = dmem_addr;
  assign m_wdata[M_COMP] = dmem_wdata;
  assign m_be[M_COMP]    = dmem_be;
  assign dmem_gnt        = m_gnt[M_COMP];
  assign dmem_rvalid     = m_rvalid[M_COMP];
  assign dmem_rdata      = m_rdata[M_COMP];

  logic [N_BANK-1:0]                          b_en, b_we;
  logic [N_BANK-1:0][DATA_W/8-1:0]            b_be;
  logic [N_BANK-1:0][$clog2(BANK_WORDS_P)-1:0]  b_addr;
  logic [N_BANK-1:0][DATA_W-1:0]              b_wdata, b_rdata;

  mem_interconnect #(.N_M(N_MASTER), .N_BANK(N_BANK), .BANK_WORDS(BANK_WORDS_P)) u_xbar (
    .clk, .rst_n,
    .m_req, .m_we, .m_addr, .m_wdata, .m_be, .m_gnt, .m_rvalid, .m_rdata,
    .b_en, .b_we, .b_be, .b_addr, .b_wdata, .b_rdata
  );

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    bram_bank #(.WORDS(BANK_WORDS_P)) u_bank (
      .clk, .en(b_en[b]), .we(b_we[b]), .be(b_be[b]), .addr(b_addr[b]),
      .wdata(b_wdata[b]), .rdata(b_rdata[b])
    );
  end

  // ---------------- compute core controller ----------------
  logic comp_busy;
  compute_controller u_ctrl (
    .clk, .rst_n,
    .cmd_valid(cc_valid), .cmd_ready(cc_ready), .cmd(cc_cmd),
    .dla_valid, .dla_ready, .dla_cmd, .dla_done,
    .res_valid(dmem_req && dmem_we && m_gnt[M_COMP]),
    .art_en, .art_n, .art_src, .art_dst,
    .art_cmd_valid(art_valid), .art_cmd_ready(art_ready), .art_cmd,
    .art_sent, .comp_done, .busy(comp_busy)
  );
endmodule
