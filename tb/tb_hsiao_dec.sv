// tb_hsiao_dec: self-checking test of the Hsiao decoder.
// Random words are encoded with the reference model, then zero, one or two distinct
// bits of the 39-bit codeword are flipped. Expected: clean words pass unflagged, every
// single flip (data or check bit) is corrected and flagged single_err_o, every double
// flip is flagged multi_err_o and never single_err_o.
module tb_hsiao_dec;
  import tb_hsiao_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [38:0] cin, cout;
  logic [31:0] dout;
  logic [6:0]  syn;
  logic        se, me;

  hsiao_dec dut (.code_i(cin), .data_o(dout), .code_o(cout), .syndrome_o(syn),
                 .single_err_o(se), .multi_err_o(me));

  task automatic expect_ok(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s code=%h", what, cin);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      logic [31:0] d;
      logic [38:0] good;
      d    = $urandom();
      good = ref_encode(d);
      cin  = good;
      #1;
      expect_ok("clean", dout == d && !se && !me && syn == 7'h0);
      // every single-bit flip
      for (int b = 0; b < 39; b++) begin
        cin = good ^ (39'h1 << b);
        #1;
        expect_ok("single", dout == d && cout == good && se && !me);
      end
      // random double flips
      for (int k = 0; k < 20; k++) begin
        int b1, b2;
        b1 = $urandom_range(38);
        b2 = (b1 + 1 + $urandom_range(37)) % 39;
        cin = good ^ (39'h1 << b1) ^ (39'h1 << b2);
        #1;
        expect_ok("double", me && !se);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
