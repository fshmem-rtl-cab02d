// host_if: the host's view of an FSHMEM node, a set of 64-bit registers.
//
// The host (through PCIe MMIO) fills the command registers and writes the
// doorbell; the command then waits in this block until the chosen target
// takes it: the scheduler of network port 0 or 1, or the compute command
// queue (target 2). While one is waiting, status bit 0 reads 1 and further
// doorbells are ignored. The block also holds the node configuration (node
// id, packet size, ART settings) and counts events for the host to poll:
// messages completed per port, compute acknowledgements, ART transfers.
// Reads return data in the cycle after mmio_rd. 'issued' pulses when a
// command leaves (the start of a latency measurement).
//
// Register index (mmio_addr):
//   0 CMD_SRC   1 CMD_DST   2 CMD_LEN   3 CMD_ARGS {arg1, arg0}
//   4 CMD_GO    write: [1:0] type, [2] reply, [6:3] handler, [9:8] target
//   8 PKT_BYTES 9 NODE_ID   10 ART_CTRL {[16] enable, [15:0] N}
//   11 ART_SRC  12 ART_DST  13 ART_PORT
//   16 STATUS   17 RX_MSG0  18 RX_MSG1  19 COMP_DONE  20 ART_SENT
//   21 PERF_LAT 22 PERF_T_START 23 PERF_T_HDR 24 PERF_CYCLES
// The paper states that the host issues commands and configures ART; this
// register map is this design's own.
module host_if
  import fshmem_pkg::*;
#(
  parameter int unsigned N_PORT = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  // MMIO
  input  logic               mmio_wr,
  input  logic               mmio_rd,
  input  logic [7:0]         mmio_addr,
  input  logic [63:0]        mmio_wdata,
  output logic [63:0]        mmio_rdata,
  // commands out
  output logic [N_PORT-1:0]  am_valid,
  input  logic [N_PORT-1:0]  am_ready,
  output am_cmd_t            am_cmd,
  output logic               cc_valid,
  input  logic               cc_ready,
  output comp_cmd_t          cc_cmd,
  output logic               issued,
  // configuration
  output logic [NODE_W-1:0]  node_id,
  output logic [15:0]        pkt_bytes,
  output logic               art_en,
  output logic [15:0]        art_n,
  output logic [31:0]        art_src,
  output logic [31:0]        art_dst,
  output logic [$clog2(N_PORT > 1 ? N_PORT : 2)-1:0] art_port,
  // events and perf counter
  input  logic [N_PORT-1:0]  msg_done,
  input  logic               comp_done,
  input  logic               art_sent,
  input  logic [31:0]        perf_lat,
  input  logic [31:0]        perf_t_start,
  input  logic [31:0]        perf_t_hdr,
  input  logic [31:0]        perf_cycles
);
  localparam int unsigned PW = $clog2(N_PORT > 1 ? N_PORT : 2);

  logic [31:0] r_src, r_dst, r_len, r_arg0, r_arg1;
  logic        pending;
  logic [1:0]  target;
  logic [N_PORT-1:0][31:0] rx_cnt;
  logic [31:0] comp_cnt, art_cnt;
  logic [1:0]  r_pend_type;
  logic        r_pend_reply;
  logic [3:0]  r_pend_handler;

  assign am_cmd = '{mtype: am_type_e'(r_pend_type), reply: r_pend_reply,
                    handler: handler_e'(r_pend_handler), src_addr: r_src,
                    dst_addr: r_dst, len: r_len, arg0: r_arg0, arg1: r_arg1};
  assign cc_cmd = '{src_node: node_id, arg0: r_arg0, arg1: r_arg1};

  always_comb begin
    am_valid = '0;
    cc_valid = 1'b0;
    if (pending) begin
      if (target == 2'd2)        cc_valid = 1'b1;
      else if (32'(target) < N_PORT)  am_valid[target[PW-1:0]] = 1'b1;
    end
  end
  assign issued = (cc_valid && cc_ready) || ((am_valid & am_ready) != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_src <= '0; r_dst <= '0; r_len <= '0; r_arg0 <= '0; r_arg1 <= '0;
      r_pend_type <= '0; r_pend_reply <= 1'b0; r_pend_handler <= '0;
      pending   <= 1'b0;
      target    <= '0;
      node_id   <= '0;
      pkt_bytes <= 16'd1024;
      art_en    <= 1'b0;
      art_n     <= 16'd1;
      art_src   <= '0;
      art_dst   <= '0;
      art_port  <= '0;
      rx_cnt    <= '0;
      comp_cnt  <= '0;
      art_cnt   <= '0;
    end else begin
      if (issued) pending <= 1'b0;
      // A doorbell for a target that does not exist is dropped.
      if (pending && target != 2'd2 && 32'(target) >= N_PORT) pending <= 1'b0;
      if (mmio_wr) begin
        case (mmio_addr)
          8'd0:  r_src <= mmio_wdata[31:0];
          8'd1:  r_dst <= mmio_wdata[31:0];
          8'd2:  r_len <= mmio_wdata[31:0];
          8'd3:  {r_arg1, r_arg0} <= mmio_wdata;
          8'd4:  if (!pending) begin
            r_pend_type    <= mmio_wdata[1:0];
            r_pend_reply   <= mmio_wdata[2];
            r_pend_handler <= mmio_wdata[6:3];
            target         <= mmio_wdata[9:8];
            pending        <= 1'b1;
          end
          8'd8:  pkt_bytes <= mmio_wdata[15:0];
          8'd9:  node_id   <= mmio_wdata[NODE_W-1:0];
          8'd10: {art_en, art_n} <= mmio_wdata[16:0];
          8'd11: art_src  <= mmio_wdata[31:0];
          8'd12: art_dst  <= mmio_wdata[31:0];
          8'd13: art_port <= mmio_wdata[PW-1:0];
          default: ;
        endcase
      end
      for (int p = 0; p < N_PORT; p++)
        if (msg_done[p]) rx_cnt[p] <= rx_cnt[p] + 32'd1;
      if (comp_done) comp_cnt <= comp_cnt + 32'd1;
      if (art_sent)  art_cnt  <= art_cnt + 32'd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mmio_rdata <= '0;
    else if (mmio_rd) begin
      case (mmio_addr)
        8'd0:  mmio_rdata <= 64'(r_src);
        8'd1:  mmio_rdata <= 64'(r_dst);
        8'd2:  mmio_rdata <= 64'(r_len);
        8'd3:  mmio_rdata <= {r_arg1, r_arg0};
        8'd8:  mmio_rdata <= 64'(pkt_bytes);
        8'd9:  mmio_rdata <= 64'(node_id);
        8'd10: mmio_rdata <= 64'({art_en, art_n});
        8'd11: mmio_rdata <= 64'(art_src);
        8'd12: mmio_rdata <= 64'(art_dst);
        8'd13: mmio_rdata <= 64'(art_port);
        8'd16: mmio_rdata <= 64'(pending);
        8'd17: mmio_rdata <= 64'(rx_cnt[0]);
        8'd18: mmio_rdata <= 64'(rx_cnt[N_PORT-1]);
        8'd19: mmio_rdata <= 64'(comp_cnt);
        8'd20: mmio_rdata <= 64'(art_cnt);
        8'd21: mmio_rdata <= 64'(perf_lat);
        8'd22: mmio_rdata <= 64'(perf_t_start);
        8'd23: mmio_rdata <= 64'(perf_t_hdr);
        8'd24: mmio_rdata <= 64'(perf_cycles);
        default: mmio_rdata <= '0;
      endcase
    end
  end
endmodule
