// tb_ecc_bank: self-checking test of one ECC memory bank with its control unit.
//
// Random reads, full-word writes and byte/half-word writes (with idle gaps and
// back-to-back bursts) are checked against a reference memory while the scrubber runs
// at full rate. Protocol checks on every cycle: a request is granted in the cycle it
// arrives unless the previous accepted request was a sub-word write (then exactly one
// wait cycle), and rvalid follows every grant after one cycle. Error checks: a single
// flipped bit in the SRAM is corrected on read with acc_corr_o, and the scrubber rewrites
// the clean codeword with scrub_corr_o; two flipped bits are reported as uncorrectable
// by both the access path and the scrubber.
module tb_ecc_bank;
  import tb_hsiao_ref_pkg::*;
  localparam int N = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  // reset is asserted with an edge, so that asynchronously reset flops are already
  // reset when the first clock edge arrives
  initial #1 rst_n = 0;
  logic req = 0, we = 0;
  logic [3:0] be = 0;
  logic [5:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic gnt, rvalid;
  logic [31:0] interval = 1;
  logic acc_corr, acc_unc, scrub_corr, scrub_unc;

  logic [31:0] ref_mem [N];
  logic        exp_valid = 0, exp_read = 0, last_partial = 0;
  logic [31:0] exp_data = 0;
  int n_acc_corr = 0, n_acc_unc = 0, n_scrub_corr = 0, n_scrub_unc = 0;
  int n_rmw = 0, n_rmw_stall = 0;
  bit traffic = 0, corrupt = 0;

  ecc_bank #(.NumWords(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .be_i(be), .addr_i(addr),
    .wdata_i(wdata), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata),
    .scrub_interval_i(interval), .acc_corr_o(acc_corr), .acc_unc_o(acc_unc),
    .scrub_corr_o(scrub_corr), .scrub_unc_o(scrub_unc));

  always #5 clk = ~clk;

  task automatic expect_ok(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s @%0t", what, $time);
    end
  endtask

  // cycle monitor: protocol, data and event counting
  always @(posedge clk) if (rst_n) begin
    if (acc_corr) n_acc_corr++;
    if (acc_unc) n_acc_unc++;
    if (scrub_corr) n_scrub_corr++;
    if (scrub_unc) n_scrub_unc++;
    expect_ok("rvalid one cycle after grant", rvalid == exp_valid);
    if (exp_valid && exp_read && !corrupt) expect_ok("read data", rdata == exp_data);
    if (req) begin
      expect_ok("grant rule", gnt == !last_partial);
      if (last_partial) n_rmw_stall++;
    end
    exp_valid <= req && gnt;
    exp_read  <= req && gnt && !we;
    if (req && gnt && !we) exp_data <= ref_mem[addr];
    if (req && gnt && we) begin
      for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      if (be != 4'hF) n_rmw++;
    end
    if (req && gnt) last_partial <= we && (be != 4'hF);
    else if (!req) last_partial <= 0;
    else last_partial <= 0;
  end

  // random traffic generator; holds a request until it is granted
  always @(negedge clk) if (traffic) begin
    if (!(req && !gnt)) begin
      int kind;
      kind = $urandom_range(9);
      req   = (kind != 0);
      we    = (kind >= 5);
      addr  = 6'($urandom_range(7));  // few addresses: many read-after-write hazards
      wdata = $urandom();
      case ($urandom_range(3))
        0: be = 4'hF;
        1: be = 4'b0001 << $urandom_range(3);
        2: be = ($urandom_range(1) != 0) ? 4'b0011 : 4'b1100;
        default: be = 4'hF;
      endcase
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle_bus();
    traffic = 0;
    @(negedge clk);
    while (req && !gnt) @(negedge clk);
    req = 0;
    repeat (3) @(negedge clk);
  endtask

  task automatic read_word(input int a, output logic [31:0] d);
    logic g;
    req = 1; we = 0; addr = 6'(a);
    forever begin
      #1 g = gnt;
      @(posedge clk);
      if (g) break;
    end
    @(negedge clk);
    req = 0;
    d = rdata;
    @(negedge clk);  // let the monitor count this cycle's events
  endtask

  initial begin
    logic [31:0] d;
    // initialise memory through the bus with full-word writes
    repeat (3) @(negedge clk);
    rst_n = 1;
    interval = 0;
    for (int a = 0; a < N; a++) begin
      req = 1; we = 1; be = 4'hF; addr = 6'(a); wdata = $urandom();
      @(negedge clk);
    end
    req = 0;
    @(negedge clk);
    // random traffic with the scrubber at full rate
    interval = 1;
    traffic = 1;
    repeat (4000) @(negedge clk);
    idle_bus();
    expect_ok("sub-word writes happened", n_rmw > 100 && n_rmw_stall > 10);
    expect_ok("no errors on clean memory",
              n_acc_corr == 0 && n_acc_unc == 0 && n_scrub_corr == 0 && n_scrub_unc == 0);
    // single-bit error: corrected on access, then repaired by the scrubber
    interval = 0;
    @(negedge clk);
    dut.u_sram.mem[40] ^= 39'h1 << 17;
    dut.u_sram.mem[41] ^= 39'h1 << 35;
    read_word(40, d);
    expect_ok("single error corrected on read", d == ref_mem[40] && n_acc_corr == 1);
    interval = 1;
    repeat (4 * N) @(negedge clk);
    expect_ok("scrubber repaired words",
              dut.u_sram.mem[40] == ref_encode(ref_mem[40]) &&
              dut.u_sram.mem[41] == ref_encode(ref_mem[41]) && n_scrub_corr == 2);
    // double error: detected on access and by the scrubber, never "corrected"
    interval = 0;
    @(negedge clk);
    dut.u_sram.mem[50] ^= (39'h1 << 3) | (39'h1 << 30);
    corrupt = 1;
    read_word(50, d);
    expect_ok("double error flagged on read", n_acc_unc == 1 && n_acc_corr == 1);
    interval = 1;
    repeat (2 * N + 4) @(negedge clk);
    expect_ok("double error flagged by scrubber", n_scrub_unc >= 1 && n_scrub_corr == 2);
    $display("rmw=%0d rmw_stalls=%0d acc_corr=%0d acc_unc=%0d scrub_corr=%0d scrub_unc=%0d",
             n_rmw, n_rmw_stall, n_acc_corr, n_acc_unc, n_scrub_corr, n_scrub_unc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
