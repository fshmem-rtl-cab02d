// dla_model: behavioural stand-in for the deep learning accelerator, for
// simulation only (not synthesizable logic of the node).
//
// It accepts one command at a time on a valid/ready port. arg0 is the byte
// address of an input vector of 128-bit words, arg1[15:0] the number of
// words and arg1[31:16] a multiplier k. For every word it reads the input,
// multiplies each 32-bit lane by k, and writes the result to
// arg0 + RES_OFFSET through its memory master port (one result per write,
// which the node counts as a valid result). A few idle cycles separate the
// results to imitate compute time. It pulses done after the last write.
module dla_model
  import fshmem_pkg::*;
#(
  parameter int unsigned RES_OFFSET = 32'h4000,
  parameter int unsigned GAP        = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  comp_cmd_t         cmd,
  output logic              done,
  output logic              m_req,
  output logic              m_we,
  output logic [31:0]       m_addr,
  output logic [DATA_W-1:0] m_wdata,
  output logic [15:0]       m_be,
  input  logic              m_gnt,
  input  logic              m_rvalid,
  input  logic [DATA_W-1:0] m_rdata
);
  int commands = 0;

  initial begin
    cmd_ready = 0; done = 0; m_req = 0; m_we = 0; m_addr = 0; m_wdata = 0; m_be = '1;
    @(posedge rst_n);
    forever begin
      comp_cmd_t c;
      @(negedge clk);
      cmd_ready = 1;
      @(posedge clk);
      if (!cmd_valid) continue;
      c = cmd;
      @(negedge clk); cmd_ready = 0;
      commands++;
      for (int i = 0; i < int'(c.arg1[15:0]); i++) begin
        logic [127:0] x;
        // read
        m_req = 1; m_we = 0; m_addr = c.arg0 + 32'(16 * i);
        @(posedge clk); while (!m_gnt) @(posedge clk);
        @(negedge clk); m_req = 0;
        while (!m_rvalid) @(negedge clk);
        x = m_rdata;
        repeat (GAP) @(negedge clk);
        // compute and write
        for (int l = 0; l < 4; l++) m_wdata[32*l +: 32] = x[32*l +: 32] * 32'(c.arg1[31:16]);
        m_req = 1; m_we = 1; m_addr = c.arg0 + RES_OFFSET + 32'(16 * i);
        @(posedge clk); while (!m_gnt) @(posedge clk);
        @(negedge clk); m_req = 0; m_we = 0;
      end
      done = 1; @(negedge clk); done = 0;
    end
  end
endmodule
