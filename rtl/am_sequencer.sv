// am_sequencer: builds active messages for one network (HSSI) port.
//
// It pops a command from its scheduler queue and sends it as one or more
// packets. Every packet is a 128-bit header flit followed by its payload:
// a short message is a single header; medium and long messages carry up to
// pkt_bytes payload bytes per packet, read from memory through the read DMA.
// The DMA request for a packet goes out together with its header so that
// the payload follows the header with only the memory latency in between.
// Each header repeats the handler opcode and arguments, holds the address of
// its own payload, and marks the last packet so that the receiver invokes
// the handler once. tx uses valid/ready. That the sequencer forms the header
// and reads the body by DMA follows the paper; packetisation details are
// this design's own.
module am_sequencer
  import fshmem_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] node_id,
  input  logic [15:0]       pkt_bytes,     // payload bytes per packet, multiple of 16
  // command queue
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  am_cmd_t           cmd,
  // read DMA
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [31:0]       rd_req_addr,
  output logic [15:0]       rd_req_words,
  input  logic              rd_valid,
  output logic              rd_ready,
  input  logic [DATA_W-1:0] rd_data,
  // network port
  output logic              tx_valid,
  input  logic              tx_ready,
  output logic [DATA_W-1:0] tx_data,
  output logic              busy
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DATA} state_e;
  state_e  state;
  am_cmd_t c;
  logic [31:0] left, src, dst;
  logic [15:0] words_left;
  logic        rd_sent;
  logic [31:0] plen;
  logic        payload, last;
  am_hdr_t     hdr;

  assign plen    = (left > 32'(pkt_bytes)) ? 32'(pkt_bytes) : left;
  assign payload = (c.mtype != AM_SHORT) && (plen != 0);
  assign last    = (c.mtype == AM_SHORT) || (left == plen);

  always_comb begin
    hdr          = '0;
    hdr.arg1     = c.arg1;
    hdr.arg0     = c.arg0;
    hdr.len      = payload ? plen[15:0] : 16'd0;
    hdr.addr     = dst;
    hdr.src_node = node_id;
    hdr.handler  = c.handler;
    hdr.mtype    = c.mtype;
    hdr.reply    = c.reply;
    hdr.last     = last;
  end

  assign cmd_ready    = (state == S_IDLE);
  assign rd_req_valid = (state == S_HDR) && payload && !rd_sent;
  assign rd_req_addr  = src;
  assign rd_req_words = 16'((plen + 32'(BYTES_W - 1)) >> $clog2(BYTES_W));
  assign busy         = (state != S_IDLE);

  always_comb begin
    tx_valid = 1'b0;
    tx_data  = hdr;
    rd_ready = 1'b0;
    if (state == S_HDR) begin
      // The header goes out only together with (or after) its DMA request.
      tx_valid = !payload || rd_sent || rd_req_ready;
    end else if (state == S_DATA) begin
      tx_valid = rd_valid;
      tx_data  = rd_data;
      rd_ready = tx_ready;
    end
  end

  logic hdr_done;
  assign hdr_done = (state == S_HDR) && tx_valid && tx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      c          <= '0;
      left       <= '0;
      src        <= '0;
      dst        <= '0;
      words_left <= '0;
      rd_sent    <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (cmd_valid) begin
          c       <= cmd;
          left    <= (cmd.mtype == AM_SHORT) ? 32'd0 : cmd.len;
          src     <= cmd.src_addr;
          dst     <= cmd.dst_addr;
          rd_sent <= 1'b0;
          state   <= S_HDR;
        end
        S_HDR: begin
          if (rd_req_valid && rd_req_ready) rd_sent <= 1'b1;
          if (hdr_done) begin
            rd_sent <= 1'b0;
            if (payload) begin
              words_left <= rd_req_words;
              state      <= S_DATA;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        S_DATA: if (rd_valid && tx_ready) begin
          words_left <= words_left - 16'd1;
          if (words_left == 16'd1) begin
            left  <= left - plen;
            src   <= src + plen;
            dst   <= dst + plen;
            state <= last ? S_IDLE : S_HDR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Packet size must be a non-zero multiple of the flit size.
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_HDR) |-> (pkt_bytes != 0 && pkt_bytes[$clog2(BYTES_W)-1:0] == 0));
endmodule
