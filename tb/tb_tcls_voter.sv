// tb_tcls_voter: self-checking test of the majority voter.
// With all inputs equal the output must equal them with no mismatch. With one input
// corrupted in random bits the output must still be the original value, mismatch_o must
// be high and fault_id_o must name exactly that input. With two inputs corrupted in
// disjoint bits, the output is still correct bit by bit and both are named.
module tb_tcls_voter;
  localparam int W = 64;
  int checks = 0, failures = 0;
  logic [W-1:0] in [3];
  logic [W-1:0] out;
  logic mm;
  logic [2:0] id;

  tcls_voter #(.Width(W)) dut (.in_i(in), .out_o(out), .mismatch_o(mm), .fault_id_o(id));

  task automatic expect_ok(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s out=%h mm=%b id=%b", what, out, mm, id);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [W-1:0] v, e1, e2;
      int k, j;
      v = {$urandom(), $urandom()};
      in[0] = v; in[1] = v; in[2] = v;
      #1;
      expect_ok("equal", out == v && !mm && id == 3'b000);
      k  = $urandom_range(2);
      e1 = {$urandom(), $urandom()} | 64'h1;
      in[k] = v ^ e1;
      #1;
      expect_ok("one bad", out == v && mm && id == (3'b001 << k));
      j  = (k + 1) % 3;
      e2 = ~e1 & {$urandom(), $urandom()};
      if (e2 == '0) e2 = ~e1 & (e1 + 1);
      in[j] = v ^ e2;
      #1;
      expect_ok("two bad disjoint", out == v && mm && id == ((3'b001 << k) | (3'b001 << j)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
