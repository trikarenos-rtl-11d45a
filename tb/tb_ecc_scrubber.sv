// tb_ecc_scrubber: self-checking test of the bank scrubber.
// A 16-word memory model answers the scrubber's reads with the decoder outcome of the
// stored word (clean, one flipped bit, two flipped bits). Checked: no requests with the
// interval at 0; one check every `interval` cycles on an idle port; addresses visited
// in order with wrap-around; every single-bit error written back with the clean
// codeword and counted once; double errors counted and never written; checks wait
// while the port is busy; a pending write-back is dropped when the system writes the
// same word first.
module tb_ecc_scrubber;
  import tb_hsiao_ref_pkg::*;
  localparam int N = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  // reset is asserted with an edge, so that asynchronously reset flops are already
  // reset when the first clock edge arrives
  initial #1 rst_n = 0;
  logic [31:0] interval = 0;
  logic req, we, gnt, busy = 0;
  logic [3:0] addr;
  logic [38:0] wdata;
  logic single = 0, multi = 0;
  logic [38:0] code = 0;
  logic sys_we = 0;
  logic [3:0] sys_addr = 0;
  logic corr, unc;

  logic [38:0] good [N];
  int flips [N];
  int n_corr = 0, n_unc = 0, n_wb = 0, n_rd = 0, last_rd = -1, gaps_bad = 0, cyc = 0;
  int exp_addr = 0;

  ecc_scrubber #(.NumWords(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .interval_i(interval),
    .req_o(req), .we_o(we), .addr_o(addr), .wdata_o(wdata), .gnt_i(gnt),
    .chk_single_i(single), .chk_multi_i(multi), .chk_code_i(code),
    .sys_we_i(sys_we), .sys_addr_i(sys_addr),
    .scrub_corr_o(corr), .scrub_unc_o(unc));

  always #5 clk = ~clk;
  assign gnt = req && !busy;

  task automatic expect_ok(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  // memory model: decoder result one cycle after a read grant
  always @(posedge clk) begin
    cyc++;
    single <= 0; multi <= 0;
    if (corr) n_corr++;
    if (unc) n_unc++;
    if (gnt && !we) begin
      n_rd++;
      expect_ok("address order", int'(addr) == exp_addr);
      exp_addr = (exp_addr + 1) % N;
      if (last_rd >= 0 && !busy && interval >= 2 && (cyc - last_rd) != int'(interval)) gaps_bad++;
      last_rd = cyc;
      single <= (flips[addr] == 1);
      multi  <= (flips[addr] == 2);
      code   <= good[addr];
    end
    if (gnt && we) begin
      n_wb++;
      expect_ok("write-back data", wdata == good[addr] && flips[addr] == 1);
      flips[addr] = 0;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < N; a++) begin
      good[a] = ref_encode($urandom());
      flips[a] = 0;
    end
    flips[3] = 1; flips[7] = 2; flips[12] = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // interval 0: nothing happens
    repeat (50) @(negedge clk);
    expect_ok("off when interval is 0", n_rd == 0);
    // interval 5 over an idle port: two full passes
    interval = 5;
    repeat (5 * 2 * N + 3) @(negedge clk);
    expect_ok("reads at interval 5", n_rd >= 2 * N && gaps_bad == 0);
    expect_ok("singles corrected once", n_corr == 2 && n_wb == 2);
    expect_ok("double reported every pass", n_unc >= 2);
    expect_ok("double left in place", flips[7] == 2);
    // busy port: no grant while busy, work resumes afterwards
    busy = 1;
    begin
      int n_before;
      n_before = n_rd;
      repeat (40) @(negedge clk);
      expect_ok("waits while port busy", n_rd == n_before && req);
      busy = 0;
      repeat (3) @(negedge clk);
      expect_ok("resumes when port free", n_rd > n_before);
    end
    // cancelled write-back: error in the word after the current one, system writes it
    interval = 1;
    wait (dut.state_q == 2'd0);
    @(negedge clk);
    begin
      int tgt, wb0;
      tgt = (int'(addr) + 1) % N;
      flips[tgt] = 1;
      wb0 = n_wb;
      busy = 1;
      @(negedge clk);
      busy = 0;
      // wait for the check of tgt; then write it from the system side
      wait (dut.state_q == 2'd1 && int'(addr) == tgt);
      @(negedge clk);
      busy = 1;
      @(negedge clk);
      expect_ok("write-back pending", dut.state_q == 2'd2 && req && we);
      sys_we = 1; sys_addr = 4'(tgt);
      @(negedge clk);
      busy = 0; sys_we = 0;
      repeat (4) @(negedge clk);
      expect_ok("write-back dropped after system write", n_wb == wb0);
    end
    // interval 1: one check every two cycles on an idle port
    begin
      int r0;
      r0 = n_rd;
      repeat (100) @(negedge clk);
      expect_ok("max rate one word per two cycles", n_rd - r0 >= 48 && n_rd - r0 <= 51);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
