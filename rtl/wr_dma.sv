// wr_dma: write DMA that stores received payload into memory.
//
// A client (one AM receive handler per network port) first hands over a
// descriptor, a 16-byte aligned byte address and a byte count, then streams
// the payload words with d_valid / d_ready. Descriptors are taken one at a
// time, round-robin between clients. Each word becomes one write on the
// memory master port; the last word of a count that is not a multiple of 16
// bytes is written with only its valid byte enables. d_ready is the memory
// grant, so a word moves in the cycle it is written. 'done' pulses for the
// owner in the cycle after its last word is written (a zero count: the cycle
// after the descriptor). The paper only names the write DMA; its insides are this design's.
module wr_dma #(
  parameter int unsigned N_CLIENT = 2,
  parameter int unsigned DATA_W   = fshmem_pkg::DATA_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_CLIENT-1:0]           desc_valid,
  output logic [N_CLIENT-1:0]           desc_ready,
  input  logic [N_CLIENT-1:0][31:0]     desc_addr,
  input  logic [N_CLIENT-1:0][15:0]     desc_bytes,
  input  logic [N_CLIENT-1:0]           d_valid,
  output logic [N_CLIENT-1:0]           d_ready,
  input  logic [N_CLIENT-1:0][DATA_W-1:0] d_data,
  output logic [N_CLIENT-1:0]           done,
  // memory master port
  output logic                          m_req,
  output logic                          m_we,
  output logic [31:0]                   m_addr,
  output logic [DATA_W-1:0]             m_wdata,
  output logic [DATA_W/8-1:0]           m_be,
  input  logic                          m_gnt,
  input  logic                          m_rvalid,
  input  logic [DATA_W-1:0]             m_rdata
);
  localparam int unsigned CI  = $clog2(N_CLIENT > 1 ? N_CLIENT : 2);
  localparam int unsigned NB  = DATA_W / 8;
  localparam int unsigned OFF = $clog2(NB);

  logic          busy;
  logic [CI-1:0] owner;
  logic [31:0]   addr;
  logic [15:0]   left;        // bytes still to write
  logic [N_CLIENT-1:0] gnt;
  logic [CI-1:0] gnt_idx;
  logic          take, wr, last_word;
  logic [15:0]   gb;

  rr_arbiter #(.N(N_CLIENT)) u_arb (
    .clk, .rst_n, .req(busy ? '0 : desc_valid), .advance(take),
    .gnt, .gnt_idx
  );

  assign take       = !busy && (desc_valid != '0);
  assign desc_ready = take ? gnt : '0;
  assign gb         = desc_bytes[gnt_idx];

  assign last_word = (left <= 16'(NB));
  assign m_req   = busy && d_valid[owner];
  assign m_we    = 1'b1;
  assign m_addr  = addr;
  assign m_wdata = d_data[owner];
  always_comb begin
    m_be = '1;
    if (last_word && left[OFF-1:0] != '0)
      for (int b = 0; b < NB; b++) m_be[b] = (b < int'(left[OFF-1:0]));
  end
  assign wr = m_req && m_gnt;

  always_comb begin
    d_ready = '0;
    d_ready[owner] = busy && m_gnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      owner <= '0;
      addr  <= '0;
      left  <= '0;
      done  <= '0;
    end else begin
      done <= '0;
      if (take) begin
        owner <= gnt_idx;
        addr  <= desc_addr[gnt_idx];
        left  <= gb;
        busy  <= (gb != 16'd0);
        if (gb == 16'd0) done[gnt_idx] <= 1'b1;
      end else if (wr) begin
        addr <= addr + 32'(NB);
        left <= last_word ? 16'd0 : left - 16'(NB);
        if (last_word) begin
          busy        <= 1'b0;
          done[owner] <= 1'b1;
        end
      end
    end
  end

  // The write port never reads.
  assert property (@(posedge clk) disable iff (!rst_n) !m_rvalid);
endmodule
