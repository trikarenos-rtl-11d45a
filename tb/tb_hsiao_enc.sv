// tb_hsiao_enc: self-checking test of the Hsiao encoder.
// Compares the encoder with an independent reference for walking-one patterns and
// random words, and checks that every data bit changes exactly three check bits and
// that the all-zero word encodes to zero.
module tb_hsiao_enc;
  import tb_hsiao_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] d;
  logic [38:0] c;

  hsiao_enc dut (.data_i(d), .code_o(c));

  task automatic check(input logic [31:0] v);
    d = v;
    #1;
    checks++;
    if (c !== ref_encode(v)) begin
      failures++;
      $display("FAIL data=%h code=%h expected=%h", v, c, ref_encode(v));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h0);
    checks++;
    if (c !== 39'h0) failures++;
    for (int i = 0; i < 32; i++) begin
      int w;
      check(32'h1 << i);
      w = 0;
      for (int b = 32; b < 39; b++) w += int'(c[b]);
      checks++;
      if (w != 3) begin
        failures++;
        $display("FAIL column %0d has weight %0d", i, w);
      end
    end
    for (int n = 0; n < 2000; n++) check($urandom());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
