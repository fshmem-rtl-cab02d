// rd_dma: read DMA that feeds the AM sequencers with message payload.
//
// A client (one AM sequencer per network port) asks for 'words' 128-bit words
// starting at byte address 'addr' (16-byte aligned). Requests are taken one at
// a time, round-robin between clients. Reads are issued on the memory master
// port at up to one per cycle; returning words go into a buffer tagged with
// the owning client and leave on the shared d_data bus with a per-client
// d_valid / d_ready handshake. A read is issued only when the buffer has room
// for every word in flight, so client backpressure never loses data. The next
// request is accepted as soon as the previous one has issued all its reads,
// so bursts follow each other without a gap. The paper only names the read
// DMA; its insides here are this design's.
module rd_dma #(
  parameter int unsigned N_CLIENT  = 2,
  parameter int unsigned BUF_DEPTH = 8,
  parameter int unsigned DATA_W    = fshmem_pkg::DATA_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // requests
  input  logic [N_CLIENT-1:0]           req_valid,
  output logic [N_CLIENT-1:0]           req_ready,
  input  logic [N_CLIENT-1:0][31:0]     req_addr,
  input  logic [N_CLIENT-1:0][15:0]     req_words,
  // data to clients
  output logic [N_CLIENT-1:0]           d_valid,
  input  logic [N_CLIENT-1:0]           d_ready,
  output logic [DATA_W-1:0]             d_data,
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
  localparam int unsigned CI = $clog2(N_CLIENT > 1 ? N_CLIENT : 2);
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);

  logic          busy;
  logic [CI-1:0] owner, rd_owner;
  logic [31:0]   addr;
  logic [15:0]   left;
  logic [CW:0]   inflight;
  logic [CW-1:0] buf_count;
  logic [N_CLIENT-1:0] gnt;
  logic [CI-1:0] gnt_idx;
  logic          take, issue;
  logic          buf_out_valid, buf_out_ready;
  logic [CI+DATA_W-1:0] buf_out;
  logic          unused_in_ready;

  rr_arbiter #(.N(N_CLIENT)) u_arb (
    .clk, .rst_n, .req(busy ? '0 : req_valid), .advance(take),
    .gnt, .gnt_idx
  );

  assign take      = !busy && (req_valid != '0);
  assign req_ready = take ? gnt : '0;

  // Room for one more word in flight?
  assign m_req   = busy && ((CW+1)'(buf_count) + inflight < (CW+1)'(BUF_DEPTH));
  assign m_we    = 1'b0;
  assign m_addr  = addr;
  assign m_wdata = '0;
  assign m_be    = '0;
  assign issue   = m_req && m_gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      owner    <= '0;
      rd_owner <= '0;
      addr     <= '0;
      left     <= '0;
      inflight <= '0;
    end else begin
      if (take) begin
        busy  <= (req_words[gnt_idx] != 16'd0);
        owner <= gnt_idx;
        addr  <= req_addr[gnt_idx];
        left  <= req_words[gnt_idx];
      end else if (issue) begin
        addr <= addr + 32'(DATA_W/8);
        left <= left - 16'd1;
        if (left == 16'd1) busy <= 1'b0;
      end
      if (issue) rd_owner <= owner;
      inflight <= inflight + (CW+1)'(issue) - (CW+1)'(m_rvalid);
    end
  end

  sync_fifo #(.WIDTH(CI + DATA_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .in_valid (m_rvalid),
    .in_ready (unused_in_ready),
    .in_data  ({rd_owner, m_rdata}),
    .out_valid(buf_out_valid),
    .out_ready(buf_out_ready),
    .out_data (buf_out),
    .count    (buf_count)
  );

  always_comb begin
    d_valid = '0;
    d_valid[buf_out[CI+DATA_W-1 -: CI]] = buf_out_valid;
  end
  assign d_data        = buf_out[DATA_W-1:0];
  assign buf_out_ready = d_ready[buf_out[CI+DATA_W-1 -: CI]];

  // The credit check guarantees the buffer never overflows.
  assert property (@(posedge clk) disable iff (!rst_n) m_rvalid |-> unused_in_ready);
endmodule
