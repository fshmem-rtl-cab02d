// tb_sync_fifo: random push/pop traffic against a queue model; checks data
// order, the full/empty flags and the occupancy count.
module tb_sync_fifo;
  localparam int W = 8, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  byte unsigned q[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      out_ready = (cyc < 1000) ? (($urandom % 4) == 0) : (($urandom % 3) != 0);
      in_data   = 8'($urandom);
      #1;
      checks++;
      if (count != q.size() || in_ready != (q.size() < D) || out_valid != (q.size() > 0)) begin
        failures++;
        if (failures < 5) $display("flag mismatch count=%0d model=%0d", count, q.size());
      end
      if (out_valid && out_ready) begin
        checks++;
        if (q.size() == 0 || out_data != q[0]) begin
          failures++;
          if (failures < 5) $display("data mismatch %h", out_data);
        end
      end
      @(posedge clk);
      if (out_valid && out_ready && q.size() > 0) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
