// tb_sram_bank: self-checking test of the SRAM bank model.
// Writes random words to random addresses while keeping a reference copy, then reads
// every written address back and checks the one-cycle read latency and that the read
// value is held while the bank is idle or being written.
module tb_sram_bank;
  localparam int N = 256;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic req = 0, we = 0;
  logic [7:0] addr = 0;
  logic [38:0] wdata = 0, rdata;
  logic [38:0] ref_mem [N];
  bit written [N];

  sram_bank #(.NumWords(N), .Width(39)) dut (.clk_i(clk), .req_i(req), .we_i(we),
    .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int n = 0; n < 600; n++) begin
      int a;
      a = $urandom_range(N - 1);
      req = 1; we = 1; addr = 8'(a); wdata = 39'({$urandom(), $urandom()});
      ref_mem[a] = wdata; written[a] = 1;
      @(negedge clk);
    end
    for (int a = 0; a < N; a++) begin
      if (!written[a]) continue;
      req = 1; we = 0; addr = 8'(a);
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        $display("FAIL addr %0d read %h expected %h", a, rdata, ref_mem[a]);
      end
      // hold: an idle cycle and a write elsewhere keep the read value
      req = 0;
      @(negedge clk);
      req = 1; we = 1; addr = 8'((a + 1) % N); wdata = ref_mem[(a + 1) % N];
      @(negedge clk);
      req = 0; we = 0;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        $display("FAIL hold addr %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
