// tb_soc_ctrl_regs: self-checking test of the control and telemetry registers.
// Checks reset values, mode and scrub-interval read/write, the resynchronise pulse,
// the recovery status read-back, and that each error counter adds up the events of all
// banks (several banks in one cycle count separately), can be cleared by a write, and
// saturates at all ones.
module tb_soc_ctrl_regs;
  import trik_pkg::*;
  localparam int NB = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  // reset is asserted with an edge, so that asynchronously reset flops are already
  // reset when the first clock edge arrives
  initial #1 rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  logic locked, resync;
  logic [31:0] interval;
  logic pend = 0;
  logic [2:0] fid = 0;
  logic mm = 0;
  logic [NB-1:0] ac = 0, au = 0, sc = 0, su = 0;
  int exp_cnt [5];

  soc_ctrl_regs #(.NumBanks(NB)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .locked_o(locked), .resync_o(resync), .scrub_interval_o(interval),
    .recovery_pending_i(pend), .fault_id_i(fid), .tcls_mismatch_i(mm),
    .acc_corr_i(ac), .acc_unc_i(au), .scrub_corr_i(sc), .scrub_unc_i(su));

  always #5 clk = ~clk;

  task automatic expect_ok(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s @%0t", what, $time);
    end
  endtask

  task automatic wr(input int r, input logic [31:0] v);
    req = '0; req.req = 1; req.we = 1; req.be = 4'hF; req.addr = CtrlRegBase + 32'(4 * r); req.wdata = v;
    #1 expect_ok("write granted", rsp.gnt);
    @(negedge clk);
    req = '0;
    expect_ok("write response", rsp.rvalid);
  endtask

  task automatic rd(input int r, output logic [31:0] v);
    req = '0; req.req = 1; req.addr = CtrlRegBase + 32'(4 * r);
    #1 expect_ok("read granted", rsp.gnt);
    @(negedge clk);
    req = '0;
    expect_ok("read response", rsp.rvalid);
    v = rsp.rdata;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_ok("reset: lockstep, scrubber at full rate", locked && interval == 1 && !resync);
    rd(int'(RegMode), v);      expect_ok("mode reads 1", v == 1);
    wr(int'(RegMode), 0);      expect_ok("independent mode", !locked);
    wr(int'(RegMode), 1);      expect_ok("lockstep mode", locked);
    wr(int'(RegScrubInt), 6225);
    rd(int'(RegScrubInt), v);  expect_ok("scrub interval", v == 6225 && interval == 6225);
    pend = 1; fid = 3'b010;
    rd(int'(RegRecovery), v);  expect_ok("recovery status", v == {28'b0, 3'b010, 1'b1});
    req = '0; req.req = 1; req.we = 1; req.addr = CtrlRegBase + 32'(4 * RegRecovery); req.wdata = 1;
    #1 expect_ok("resync pulse", resync);
    @(negedge clk);
    req = '0;
    #1 expect_ok("resync one cycle", !resync);
    // random events for a while
    for (int c = 0; c < 5; c++) exp_cnt[c] = 0;
    for (int n = 0; n < 500; n++) begin
      mm = 1'($urandom_range(1));
      ac = NB'($urandom()); au = NB'($urandom()); sc = NB'($urandom()); su = NB'($urandom());
      exp_cnt[0] += int'(mm);
      exp_cnt[1] += $countones(ac);
      exp_cnt[2] += $countones(au);
      exp_cnt[3] += $countones(sc);
      exp_cnt[4] += $countones(su);
      @(negedge clk);
    end
    mm = 0; ac = 0; au = 0; sc = 0; su = 0;
    for (int c = 0; c < 5; c++) begin
      rd(int'(RegTclsCnt) + c, v);
      expect_ok("counter value", v == 32'(exp_cnt[c]));
      wr(int'(RegTclsCnt) + c, 0);
      rd(int'(RegTclsCnt) + c, v);
      expect_ok("counter cleared", v == 0);
    end
    // saturation
    wr(int'(RegScrubCorrCnt), 32'hFFFF_FFFD);
    sc = '1;
    @(negedge clk);
    sc = 0;
    rd(int'(RegScrubCorrCnt), v);
    expect_ok("counter saturates", v == 32'hFFFF_FFFF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
