// perf_counter: hardware latency counter.
//
// A free-running cycle counter. 'start' (a command given by the host)
// records its time and arms the counter; the first 'stop' afterwards (a
// message header arriving at this node) records its time and the latency
// stop - start in cycles. The time of the most recent header is also kept
// on its own, so the latency of a PUT, whose header arrives at the other
// node, can be read as the remote t_hdr minus the local t_start when both
// nodes run from one clock. The measurement points follow the paper; the
// register set is this design's choice.
module perf_counter (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        stop,
  output logic [31:0] cycles,
  output logic [31:0] t_start,
  output logic [31:0] t_hdr,
  output logic [31:0] latency,
  output logic        armed
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycles  <= '0;
      t_start <= '0;
      t_hdr   <= '0;
      latency <= '0;
      armed   <= 1'b0;
    end else begin
      cycles <= cycles + 32'd1;
      if (stop) t_hdr <= cycles;
      if (start) begin
        t_start <= cycles;
        armed   <= 1'b1;
      end else if (stop && armed) begin
        latency <= cycles - t_start;
        armed   <= 1'b0;
      end
    end
  end
endmodule
