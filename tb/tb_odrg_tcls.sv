// tb_odrg_tcls: self-checking test of the lockstep/independent core grouping unit.
// Lockstep: with equal core outputs, port 0 carries them and ports 1-2 are idle; with
// one core corrupted, port 0 still carries the correct value, mismatch_o pulses, the
// faulty core is named, and the recovery interrupt reaches all three cores, which all
// receive port 0's inputs. The resynchronise command resets the cores for one cycle
// and clears the pending recovery. Independent: ports map one to one and differing
// cores raise no mismatch. A mode change resets the cores for one cycle.
module tb_odrg_tcls;
  import trik_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, locked = 1, resync = 0;
  // reset is asserted with an edge, so that asynchronously reset flops are already
  // reset when the first clock edge arrives
  initial #1 rst_n = 0;
  core_out_t core_out [3];
  core_in_t  core_in  [3];
  core_in_t  sys_in   [3];
  core_out_t sys_out  [3];
  logic core_rst, mm, pend, ev;
  logic [2:0] fid;
  int n_rec = 0;

  odrg_tcls dut (.clk_i(clk), .rst_ni(rst_n), .locked_i(locked), .resync_i(resync),
    .core_out_i(core_out), .core_in_o(core_in), .core_rst_o(core_rst),
    .sys_in_i(sys_in), .sys_out_o(sys_out), .mismatch_o(mm), .tcls_event_o(ev), .fault_id_o(fid),
    .recovery_pending_o(pend));

  always #5 clk = ~clk;

  function automatic core_out_t rand_out();
    logic [CoreOutWidth-1:0] v;
    for (int b = 0; b < CoreOutWidth; b++) v[b] = 1'($urandom_range(1));
    return core_out_t'(v);
  endfunction

  function automatic core_in_t rand_in();
    logic [$bits(core_in_t)-1:0] v;
    for (int b = 0; b < $bits(core_in_t); b++) v[b] = 1'($urandom_range(1));
    return core_in_t'(v);
  endfunction

  task automatic expect_ok(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s @%0t", what, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    core_out_t good, bad;
    logic [CoreOutWidth-1:0] flip;
    for (int i = 0; i < 3; i++) begin
      core_out[i] = '0;
      sys_in[i]   = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_ok("no reset pulse after reset in lockstep", !core_rst && locked);
    for (int n = 0; n < 300; n++) begin
      int k;
      good = rand_out();
      for (int i = 0; i < 3; i++) begin
        core_out[i] = good;
        sys_in[i]   = rand_in();
      end
      sys_in[0].irq[RecoveryIrq] = 1'b0;
      #1;
      expect_ok("lockstep clean", sys_out[0] == good && sys_out[1] == '0 && sys_out[2] == '0 && !mm && !ev);
      for (int i = 0; i < 3; i++) expect_ok("inputs broadcast", core_in[i] == sys_in[0]);
      // corrupt one core
      k    = $urandom_range(2);
      flip = '0;
      flip[$urandom_range(CoreOutWidth - 1)] = 1'b1;
      core_out[k] = core_out_t'(good ^ flip);
      #1;
      expect_ok("vote masks error", sys_out[0] == good && mm && ev);
      @(negedge clk);
      core_out[k] = good;
      #1;
      expect_ok("fault id and pending", pend && fid == (3'b001 << k) && !mm && !ev);
      // a further mismatch before the resync is not a new event
      core_out[k] = core_out_t'(good ^ flip);
      #1;
      expect_ok("no second event while pending", mm && !ev);
      core_out[k] = good;
      #1;
      for (int i = 0; i < 3; i++) expect_ok("recovery irq", core_in[i].irq[RecoveryIrq]);
      // software recovery finishes: resynchronise
      resync = 1;
      #1;
      expect_ok("reset on resync", core_rst);
      n_rec++;
      @(negedge clk);
      resync = 0;
      #1;
      expect_ok("recovery cleared", !pend && fid == 3'b000 && !core_rst);
    end
    // independent mode
    locked = 0;
    #1;
    expect_ok("reset on mode change", core_rst);
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < 3; i++) begin
        core_out[i] = rand_out();
        sys_in[i]   = rand_in();
      end
      #1;
      for (int i = 0; i < 3; i++)
        expect_ok("independent mapping", sys_out[i] == core_out[i] && core_in[i] == sys_in[i]);
      expect_ok("no mismatch when independent", !mm && !core_rst);
      @(negedge clk);
      expect_ok("no recovery when independent", !pend);
    end
    locked = 1;
    #1;
    expect_ok("reset on return to lockstep", core_rst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
