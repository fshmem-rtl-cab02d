// rr_arbiter: round-robin arbiter.
//
// Combinational one-hot grant among the asserted request bits, searching from
// the requester after the last one served. The pointer moves only when
// 'advance' is high (the granted transfer completed), so a grant stays stable
// while the winner waits for its handshake.
module rr_arbiter #(
  parameter int unsigned N = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] last;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned i;
      i = (int'(last) + k) % N;
      if (req[i] && gnt == '0) begin
        gnt[i]  = 1'b1;
        gnt_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     last <= IW'(N - 1);
    else if (advance && req != '0)  last <= gnt_idx;
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
