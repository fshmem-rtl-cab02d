// tb_bram_bank: random byte-masked writes and reads against an array
// model; checks the one-cycle read latency.
module tb_bram_bank;
  localparam int WORDS = 64;
  logic clk = 0;
  logic en, we;
  logic [15:0] be;
  logic [5:0] addr;
  logic [127:0] wdata, rdata;
  logic [127:0] model [WORDS];
  int checks = 0, failures = 0;

  bram_bank #(.WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; be = 0; addr = 0; wdata = 0;
    // initialise every word
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      en = 1; we = 1; be = '1; addr = 6'(a);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      model[a] = wdata;
    end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      en = 1; we = $urandom % 2; addr = 6'($urandom);
      be = 16'($urandom); wdata = {$urandom, $urandom, $urandom, $urandom};
      if (we) begin
        for (int b = 0; b < 16; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        automatic logic [127:0] exp = model[addr];
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== exp) begin
          failures++;
          if (failures < 5) $display("read mismatch %h exp %h", rdata, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
