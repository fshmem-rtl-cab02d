// art_unit: Automatic Result Transfer.
//
// Rather than the host sending one large PUT after a computation ends, ART
// lets the compute core push its results while it is still computing: after
// every N valid results it issues a PUT command for those N results, so the
// transfer overlaps the rest of the computation. A valid result is one
// 128-bit word the DLA has written into memory (res_valid is taken from the
// memory write grant, so the word is already stored). Result k lives at
// src_base + 16*k and goes to dst_base + 16*k on the node reached through
// the configured port, as a long PUT message. When the DLA reports done,
// any remainder smaller than N is sent as one final PUT. 'start' clears the
// counters for a new computation. The N-result trigger follows the paper;
// the remainder flush and the address scheme are this design's choices.
module art_unit
  import fshmem_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_en,
  input  logic [15:0] cfg_n,        // results per PUT, >= 1
  input  logic [31:0] cfg_src,      // local byte address of result 0
  input  logic [31:0] cfg_dst,      // remote shared-segment offset of result 0
  input  logic        start,
  input  logic        res_valid,
  input  logic        dla_done,
  output logic        cmd_valid,
  input  logic        cmd_ready,
  output am_cmd_t     cmd,
  output logic        idle,
  output logic        sent         // pulses when a PUT command is taken
);
  logic [31:0] produced, issued, pend, chunk;
  logic        finished;

  assign pend  = produced - issued;
  always_comb begin
    chunk = 32'd0;
    if (pend >= 32'(cfg_n))                 chunk = 32'(cfg_n);
    else if (finished && pend != 32'd0)     chunk = pend;
  end

  assign cmd_valid = cfg_en && (chunk != 32'd0);
  always_comb begin
    cmd          = '0;
    cmd.mtype    = AM_LONG;
    cmd.handler  = H_PUT;
    cmd.src_addr = cfg_src + (issued << $clog2(BYTES_W));
    cmd.dst_addr = cfg_dst + (issued << $clog2(BYTES_W));
    cmd.len      = chunk << $clog2(BYTES_W);
  end
  assign sent = cmd_valid && cmd_ready;
  assign idle = !cfg_en || (pend == 32'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      produced <= '0;
      issued   <= '0;
      finished <= 1'b0;
    end else if (start) begin
      produced <= '0;
      issued   <= '0;
      finished <= 1'b0;
    end else begin
      if (res_valid) produced <= produced + 32'd1;
      if (sent)      issued   <= issued + chunk;
      if (dla_done)  finished <= 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) cfg_en |-> cfg_n != 16'd0);
endmodule
