// am_scheduler: command scheduler with its output queue.
//
// Several sources may hand commands to one consumer at the same time: the
// host, the compute core (ART) and the AM receive handler (the PUT reply of a
// GET) for an AM sequencer, or the two AM receive handlers and the host for
// the compute core. The scheduler grants one source per cycle, round-robin,
// and pushes the granted command into a FIFO; the consumer pops it with a
// valid/ready handshake. A source sees src_ready high in the cycle its command
// is taken. Latency from an accepted command to out_valid is one cycle.
// That a scheduler and a FIFO sit here follows the paper; the round-robin
// policy and the FIFO depth are this design's choices.
module am_scheduler #(
  parameter int unsigned N_SRC = 3,
  parameter int unsigned WIDTH = fshmem_pkg::CMD_W,
  parameter int unsigned DEPTH = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [N_SRC-1:0]            src_valid,
  output logic [N_SRC-1:0]            src_ready,
  input  logic [N_SRC-1:0][WIDTH-1:0] src_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [WIDTH-1:0]            out_data
);
  logic [N_SRC-1:0] gnt;
  logic [$clog2(N_SRC > 1 ? N_SRC : 2)-1:0] gnt_idx;
  logic fifo_ready;
  logic [$clog2(DEPTH+1)-1:0] unused_count;

  rr_arbiter #(.N(N_SRC)) u_arb (
    .clk, .rst_n, .req(src_valid), .advance(fifo_ready),
    .gnt, .gnt_idx
  );

  assign src_ready = fifo_ready ? gnt : '0;

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (|src_valid),
    .in_ready (fifo_ready),
    .in_data  (src_data[gnt_idx]),
    .out_valid, .out_ready, .out_data,
    .count    (unused_count)
  );
endmodule
