// compute_controller: controller of the compute core.
//
// It takes compute commands (the arguments of a COMPUTE active message, or
// a host command) from the compute command queue and hands them to the DLA
// one at a time over a valid/ready command port. It waits for the DLA's
// done pulse, then counts an acknowledgement that the host can read. An ART
// unit inside watches the DLA's result writes and sends them to the
// configured remote node in chunks of N results while the DLA still works.
// The next command starts only when ART has sent all results of the
// previous one. The paper names the controller and describes ART; the
// command sequencing here is this design's choice.
module compute_controller
  import fshmem_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // compute command queue
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  comp_cmd_t   cmd,
  // DLA
  output logic        dla_valid,
  input  logic        dla_ready,
  output comp_cmd_t   dla_cmd,
  input  logic        dla_done,
  input  logic        res_valid,     // a DLA result word was written
  // ART configuration and command output
  input  logic        art_en,
  input  logic [15:0] art_n,
  input  logic [31:0] art_src,
  input  logic [31:0] art_dst,
  output logic        art_cmd_valid,
  input  logic        art_cmd_ready,
  output am_cmd_t     art_cmd,
  output logic        art_sent,
  // status
  output logic        comp_done,     // pulses once per finished command
  output logic        busy
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_RUN} state_e;
  state_e state;
  logic   art_idle, start;

  assign cmd_ready = (state == S_IDLE) && art_idle;
  assign start     = cmd_valid && cmd_ready;
  assign dla_valid = (state == S_ISSUE);
  assign busy      = (state != S_IDLE) || !art_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      dla_cmd   <= '0;
      comp_done <= 1'b0;
    end else begin
      comp_done <= 1'b0;
      case (state)
        S_IDLE:  if (start) begin
          dla_cmd <= cmd;
          state   <= S_ISSUE;
        end
        S_ISSUE: if (dla_ready) state <= S_RUN;
        S_RUN:   if (dla_done) begin
          comp_done <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  art_unit u_art (
    .clk, .rst_n,
    .cfg_en(art_en), .cfg_n(art_n), .cfg_src(art_src), .cfg_dst(art_dst),
    .start,
    .res_valid,
    .dla_done  (dla_done && state == S_RUN),
    .cmd_valid (art_cmd_valid),
    .cmd_ready (art_cmd_ready),
    .cmd       (art_cmd),
    .idle      (art_idle),
    .sent      (art_sent)
  );
endmodule
