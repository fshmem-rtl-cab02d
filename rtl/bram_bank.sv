// bram_bank: one on-chip memory bank of the node's memory.
//
// Single port, 128-bit words, a byte-enable per byte. A read issued with en=1,
// we=0 returns the word on rdata in the next cycle; a write updates the bytes
// whose be bit is set. The banks together form the node's part of the
// partitioned global address space plus its private local memory. Bank size
// is this design's choice; the paper does not give it.
module bram_bank #(
  parameter int unsigned WORDS  = fshmem_pkg::BANK_WORDS,
  parameter int unsigned DATA_W = fshmem_pkg::DATA_W
) (
  input  logic                       clk,
  input  logic                       en,
  input  logic                       we,
  input  logic [DATA_W/8-1:0]        be,
  input  logic [$clog2(WORDS)-1:0]   addr,
  input  logic [DATA_W-1:0]          wdata,
  output logic [DATA_W-1:0]          rdata
);
  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < DATA_W/8; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
