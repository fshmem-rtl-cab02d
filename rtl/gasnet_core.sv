// gasnet_core: the GASNet core of an FSHMEM node.
//
// It implements the active-message (AM) layer in hardware with one set of
// units per network (HSSI) port:
//   scheduler     round-robin over the host, the compute core (ART) and this
//                 port's receive handler (PUT replies to GETs), with a queue;
//   AM sequencer  turns a command into header + payload packets, fetching
//                 the payload through the read DMA;
//   AM Rx handler stores received payload through the write DMA and runs
//                 the PUT, GET and COMPUTE handlers.
// A compute command scheduler with its own queue merges the COMPUTE
// requests of both receive handlers and of the host for the compute core.
// The read and write DMAs are outside this module and shared by the ports;
// their client interfaces are indexed by port. A GET reply goes out on the
// port the GET came in on, so it returns to the requesting node. The
// per-port structure and the dataflow follow the paper; queue depths and
// the arbitration policy are this design's.
module gasnet_core
  import fshmem_pkg::*;
#(
  parameter int unsigned N_PORT    = 2,
  parameter int unsigned CMD_DEPTH = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NODE_W-1:0]             node_id,
  input  logic [15:0]                   pkt_bytes,
  // host commands
  input  logic [N_PORT-1:0]             host_valid,
  output logic [N_PORT-1:0]             host_ready,
  input  am_cmd_t                       host_cmd,
  input  logic                          host_cc_valid,
  output logic                          host_cc_ready,
  input  comp_cmd_t                     host_cc_cmd,
  // compute core: ART commands in, compute commands out
  input  logic                          art_valid,
  output logic                          art_ready,
  input  logic [$clog2(N_PORT > 1 ? N_PORT : 2)-1:0] art_port,
  input  am_cmd_t                       art_cmd,
  output logic                          cc_valid,
  input  logic                          cc_ready,
  output comp_cmd_t                     cc_cmd,
  // read DMA clients
  output logic [N_PORT-1:0]             rd_req_valid,
  input  logic [N_PORT-1:0]             rd_req_ready,
  output logic [N_PORT-1:0][31:0]       rd_req_addr,
  output logic [N_PORT-1:0][15:0]       rd_req_words,
  input  logic [N_PORT-1:0]             rd_valid,
  output logic [N_PORT-1:0]             rd_ready,
  input  logic [DATA_W-1:0]             rd_data,
  // write DMA clients
  output logic [N_PORT-1:0]             wr_desc_valid,
  input  logic [N_PORT-1:0]             wr_desc_ready,
  output logic [N_PORT-1:0][31:0]       wr_desc_addr,
  output logic [N_PORT-1:0][15:0]       wr_desc_bytes,
  output logic [N_PORT-1:0]             wr_valid,
  input  logic [N_PORT-1:0]             wr_ready,
  output logic [N_PORT-1:0][DATA_W-1:0] wr_data,
  input  logic [N_PORT-1:0]             wr_done,
  // HSSI ports
  output logic [N_PORT-1:0]             tx_valid,
  input  logic [N_PORT-1:0]             tx_ready,
  output logic [N_PORT-1:0][DATA_W-1:0] tx_data,
  input  logic [N_PORT-1:0]             rx_valid,
  output logic [N_PORT-1:0]             rx_ready,
  input  logic [N_PORT-1:0][DATA_W-1:0] rx_data,
  // events
  output logic [N_PORT-1:0]             hdr_seen,
  output logic [N_PORT-1:0]             msg_done
);
  logic [N_PORT-1:0]             cc_req_valid, cc_req_ready;
  comp_cmd_t [N_PORT-1:0]        cc_req;
  logic [N_PORT-1:0]             art_ready_p;

  for (genvar p = 0; p < N_PORT; p++) begin : g_port
    logic             rep_valid, rep_ready;
    am_cmd_t          rep_cmd;
    logic [2:0]       s_valid, s_ready;
    logic [2:0][CMD_W-1:0] s_data;
    logic             q_valid, q_ready;
    logic [CMD_W-1:0] q_data;
    handler_e         unused_handler;
    logic             unused_busy;

    // Scheduler sources: 0 host, 1 compute core (ART), 2 GET reply.
    assign s_valid = {rep_valid, art_valid && (art_port == p), host_valid[p]};
    assign s_data  = {rep_cmd, art_cmd, host_cmd};
    assign host_ready[p]  = s_ready[0];
    assign art_ready_p[p] = s_ready[1];
    assign rep_ready      = s_ready[2];

    am_scheduler #(.N_SRC(3), .WIDTH(CMD_W), .DEPTH(CMD_DEPTH)) u_sched (
      .clk, .rst_n,
      .src_valid(s_valid), .src_ready(s_ready), .src_data(s_data),
      .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data)
    );

    am_sequencer u_seq (
      .clk, .rst_n, .node_id, .pkt_bytes,
      .cmd_valid(q_valid), .cmd_ready(q_ready), .cmd(am_cmd_t'(q_data)),
      .rd_req_valid(rd_req_valid[p]), .rd_req_ready(rd_req_ready[p]),
      .rd_req_addr(rd_req_addr[p]), .rd_req_words(rd_req_words[p]),
      .rd_valid(rd_valid[p]), .rd_ready(rd_ready[p]), .rd_data,
      .tx_valid(tx_valid[p]), .tx_ready(tx_ready[p]), .tx_data(tx_data[p]),
      .busy(unused_busy)
    );

    am_rx_handler u_rx (
      .clk, .rst_n,
      .rx_valid(rx_valid[p]), .rx_ready(rx_ready[p]), .rx_data(rx_data[p]),
      .wr_desc_valid(wr_desc_valid[p]), .wr_desc_ready(wr_desc_ready[p]),
      .wr_desc_addr(wr_desc_addr[p]), .wr_desc_bytes(wr_desc_bytes[p]),
      .wr_valid(wr_valid[p]), .wr_ready(wr_ready[p]), .wr_data(wr_data[p]),
      .wr_done(wr_done[p]),
      .rep_valid, .rep_ready, .rep_cmd,
      .cc_valid(cc_req_valid[p]), .cc_ready(cc_req_ready[p]), .cc_cmd(cc_req[p]),
      .hdr_seen(hdr_seen[p]), .msg_done(msg_done[p]), .msg_handler(unused_handler)
    );
  end

  assign art_ready = art_ready_p[art_port];

  // Compute command scheduler: sources 0..N_PORT-1 receive handlers, N_PORT host.
  logic [N_PORT:0]             c_valid, c_ready;
  logic [N_PORT:0][COMP_W-1:0] c_data;
  logic [COMP_W-1:0]           c_out;
  always_comb begin
    for (int p = 0; p < N_PORT; p++) begin
      c_valid[p] = cc_req_valid[p];
      c_data[p]  = cc_req[p];
    end
    c_valid[N_PORT] = host_cc_valid;
    c_data[N_PORT]  = host_cc_cmd;
  end
  assign cc_req_ready  = c_ready[N_PORT-1:0];
  assign host_cc_ready = c_ready[N_PORT];

  am_scheduler #(.N_SRC(N_PORT + 1), .WIDTH(COMP_W), .DEPTH(CMD_DEPTH)) u_comp_sched (
    .clk, .rst_n,
    .src_valid(c_valid), .src_ready(c_ready), .src_data(c_data),
    .out_valid(cc_valid), .out_ready(cc_ready), .out_data(c_out)
  );
  assign cc_cmd = comp_cmd_t'(c_out);
endmodule
