// am_rx_handler: receives active messages on one network (HSSI) port and
// runs their handlers in hardware.
//
// The first flit of a packet is its header. If the packet carries payload,
// a write DMA descriptor is issued in the same cycle the header is taken:
// a long message's address is an offset into the shared (global) segment, a
// medium message's an offset into the local segment. The payload flits then
// go straight to the write DMA. On the last packet of a message the handler
// opcode is executed:
//   PUT     - nothing beyond storing the payload;
//   GET     - a PUT reply command (long, reply=1) is handed to this port's
//             scheduler: read arg1 bytes at arg0, send them to header.addr;
//   COMPUTE - once any payload is in memory, the arguments are queued for
//             the compute core.
// Messages are handled one at a time, which makes every handler atomic with
// respect to the others on this port. hdr_seen pulses when a header is
// accepted, msg_done when a message's handler has finished.
// The three handler actions follow the paper; the encodings, the segment
// mapping and the per-packet flow are this design's choices.
module am_rx_handler
  import fshmem_pkg::*;
#(
  parameter logic [31:0] SHARED_BASE_P = SHARED_BASE,
  parameter logic [31:0] LOCAL_BASE_P  = LOCAL_BASE
) (
  input  logic              clk,
  input  logic              rst_n,
  // network port
  input  logic              rx_valid,
  output logic              rx_ready,
  input  logic [DATA_W-1:0] rx_data,
  // write DMA
  output logic              wr_desc_valid,
  input  logic              wr_desc_ready,
  output logic [31:0]       wr_desc_addr,
  output logic [15:0]       wr_desc_bytes,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [DATA_W-1:0] wr_data,
  input  logic              wr_done,
  // GET reply to the scheduler
  output logic              rep_valid,
  input  logic              rep_ready,
  output am_cmd_t           rep_cmd,
  // compute command to the compute command scheduler
  output logic              cc_valid,
  input  logic              cc_ready,
  output comp_cmd_t         cc_cmd,
  // events
  output logic              hdr_seen,
  output logic              msg_done,
  output handler_e          msg_handler
);
  typedef enum logic [1:0] {S_IDLE, S_DATA, S_WAIT, S_ACT} state_e;
  state_e  state;
  am_hdr_t h, in_h;
  logic [15:0] words_left;
  logic        in_payload, in_act;

  assign in_h       = am_hdr_t'(rx_data);
  assign in_payload = (in_h.mtype != AM_SHORT) && (in_h.len != 16'd0);
  // Handler work beyond storing the payload.
  function automatic logic needs_act(am_hdr_t x);
    return x.last && (x.handler == H_GET || x.handler == H_COMPUTE);
  endfunction
  assign in_act = needs_act(in_h);

  // Header: take it when the write DMA takes the descriptor (if any).
  assign wr_desc_valid = (state == S_IDLE) && rx_valid && in_payload;
  assign wr_desc_addr  = ((in_h.mtype == AM_MEDIUM) ? LOCAL_BASE_P : SHARED_BASE_P) + in_h.addr;
  assign wr_desc_bytes = in_h.len;

  always_comb begin
    rx_ready = 1'b0;
    wr_valid = 1'b0;
    case (state)
      S_IDLE: rx_ready = !in_payload || wr_desc_ready;
      S_DATA: begin
        wr_valid = rx_valid;
        rx_ready = wr_ready;
      end
      default: ;
    endcase
  end
  assign wr_data = rx_data;

  assign hdr_seen = (state == S_IDLE) && rx_valid && rx_ready;

  always_comb begin
    rep_cmd          = '0;
    rep_cmd.mtype    = AM_LONG;
    rep_cmd.reply    = 1'b1;
    rep_cmd.handler  = H_PUT;
    rep_cmd.src_addr = h.arg0;
    rep_cmd.dst_addr = h.addr;
    rep_cmd.len      = h.arg1;
  end
  assign cc_cmd    = '{src_node: h.src_node, arg0: h.arg0, arg1: h.arg1};
  assign rep_valid = (state == S_ACT) && (h.handler == H_GET);
  assign cc_valid  = (state == S_ACT) && (h.handler == H_COMPUTE);

  logic act_done;
  assign act_done = (state == S_ACT) &&
                    ((rep_valid && rep_ready) || (cc_valid && cc_ready));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      h           <= '0;
      words_left  <= '0;
      msg_done    <= 1'b0;
      msg_handler <= H_PUT;
    end else begin
      msg_done <= 1'b0;
      case (state)
        S_IDLE: if (hdr_seen) begin
          h <= in_h;
          if (in_payload) begin
            words_left <= 16'((32'(in_h.len) + 32'(BYTES_W - 1)) >> $clog2(BYTES_W));
            state      <= S_DATA;
          end else if (in_act) begin
            state <= S_ACT;
          end else if (in_h.last) begin
            msg_done    <= 1'b1;
            msg_handler <= in_h.handler;
          end
        end
        S_DATA: if (rx_valid && wr_ready) begin
          words_left <= words_left - 16'd1;
          if (words_left == 16'd1) begin
            if (needs_act(h)) begin
              state <= S_WAIT;
            end else begin
              state <= S_IDLE;
              if (h.last) begin
                msg_done    <= 1'b1;
                msg_handler <= h.handler;
              end
            end
          end
        end
        // The payload must be in memory before the handler runs.
        S_WAIT: if (wr_done) state <= S_ACT;
        S_ACT: if (act_done) begin
          state       <= S_IDLE;
          msg_done    <= 1'b1;
          msg_handler <= h.handler;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
