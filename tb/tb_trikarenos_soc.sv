// tb_trikarenos_soc: end-to-end test of the SoC at its default size (8 banks x 8192
// words), with three behavioural core models, a debug-port driver and a peripheral model.
//
// Sequence: the memory is cleared, the program image is loaded through the debug port
// (as over JTAG), and the cores start in lockstep. An upset is then injected into the
// internal state of core 1: the voter must mask it, count it and trigger the recovery
// routine (state saved through the voters, resynchronising reset, restore). Bit flips
// are injected into the SRAM: one in the program (corrected on fetch), single flips
// elsewhere (repaired by the scrubbers) and one double flip (reported uncorrectable).
// The debug port then switches to independent mode, where the three cores run
// different programs in parallel, and back to lockstep. Finally the telemetry counters
// are read through the bus and compared with the events seen in the design.
// Every mechanism must occur at least once; the cores' own load/fetch checks must pass
// (core 1 is excused only between its upset and its restore).
module tb_trikarenos_soc;
  import trik_pkg::*;
  import tb_hsiao_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  // reset is asserted with an edge, so that asynchronously reset flops are already
  // reset when the first clock edge arrives
  initial #1 rst_n = 0;
  core_out_t   core_out [NumCores];
  core_in_t    core_in  [NumCores];
  logic        core_rst;
  logic [31:0] irq [NumCores];
  logic        dbg_req_core [NumCores];
  logic        fetch_en = 0;
  bus_req_t    dbg_req, dma_req, periph_req;
  bus_rsp_t    dbg_rsp, dma_rsp, periph_rsp;
  logic        locked, mm, pend;
  logic [2:0]  fid;

  int c_err [NumCores], c_ops [NumCores], c_boot [NumCores], c_rest [NumCores];

  trikarenos_soc dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_out_i(core_out), .core_in_o(core_in), .core_rst_o(core_rst),
    .irq_i(irq), .debug_req_i(dbg_req_core), .fetch_enable_i(fetch_en),
    .dbg_req_i(dbg_req), .dbg_rsp_o(dbg_rsp), .dma_req_i(dma_req), .dma_rsp_o(dma_rsp),
    .periph_req_o(periph_req), .periph_rsp_i(periph_rsp),
    .locked_o(locked), .tcls_mismatch_o(mm), .fault_id_o(fid), .recovery_pending_o(pend));

  for (genvar i = 0; i < NumCores; i++) begin : g_core
    tb_core_model u_core (
      .clk_i(clk), .rst_ni(rst_n), .sync_rst_i(core_rst), .in_i(core_in[i]), .out_o(core_out[i]),
      .errors_o(c_err[i]), .ops_o(c_ops[i]), .boots_o(c_boot[i]), .restores_o(c_rest[i]));
  end

  always #5 clk = ~clk;

  // ------------------------------------------------------------------ peripheral model
  logic        p_valid_q = 0;
  logic [31:0] p_data_q = 0;
  int n_periph = 0;
  assign periph_rsp.gnt    = periph_req.req;
  assign periph_rsp.rvalid = p_valid_q;
  assign periph_rsp.rdata  = p_data_q;
  always @(posedge clk) begin
    p_valid_q <= periph_req.req;
    p_data_q  <= periph_req.req ? ~periph_req.addr : '0;
    if (periph_req.req) n_periph++;
  end

  // ------------------------------------------------------------------ event counters
  int n_mm = 0, n_rst = 0, n_par = 0, n_arb_wait = 0, n_dbg = 0;
  int n_rmw = 0, n_rmw_stall = 0, n_acc_corr = 0, n_acc_unc = 0, n_scr_corr = 0, n_scr_unc = 0;
  int n_mode_switch = 0, n_cyc = 0, n_ev = 0;
  logic locked_q = 1;

  always @(posedge clk) if (rst_n) begin
    int g;
    n_cyc++;
    if (mm) n_mm++;
    if (dut.tcls_event) $display("%0t tcls event fault_id=%b", $time, dut.u_odrg.vote_id);
    if (dut.tcls_event) n_ev++;
    if (core_rst) n_rst++;
    if (locked != locked_q) n_mode_switch++;
    locked_q <= locked;
    g = 0;
    for (int i = 0; i < NumCores; i++) if (dut.sys_out[i].data.req && dut.mst_rsp[NumCores + i].gnt) g++;
    if (g > 1) n_par++;
    for (int m = 0; m < 2 * NumCores + 2; m++)
      if (dut.mst_req[m].req && !dut.mst_rsp[m].gnt) n_arb_wait++;
    if (dbg_req.req && dbg_rsp.gnt) n_dbg++;
  end

  for (genvar b = 0; b < 8; b++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_bank[b].u_bank.rmw_q) n_rmw++;
      if (dut.g_bank[b].u_bank.rmw_q && dut.g_bank[b].u_bank.req_i) n_rmw_stall++;
      if (dut.acc_corr[b]) n_acc_corr++;
      if (dut.acc_unc[b]) n_acc_unc++;
      if (dut.scrub_corr[b]) n_scr_corr++;
      if (dut.scrub_unc[b]) n_scr_unc++;
    end
    // the memory starts cleared: all-zero words are valid codewords
    initial for (int i = 0; i < 8192; i++) dut.g_bank[b].u_bank.u_sram.mem[i] = '0;
  end

  // ------------------------------------------------------------------ helpers
  task automatic expect_ok(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s @%0t", what, $time);
    end
  endtask

  task automatic dbg_access(input logic we, input logic [31:0] addr, input logic [31:0] wdata,
                            output logic [31:0] rdata);
    logic g;
    dbg_req = '0; dbg_req.req = 1; dbg_req.we = we; dbg_req.be = 4'hF;
    dbg_req.addr = addr; dbg_req.wdata = wdata;
    forever begin
      #1 g = dbg_rsp.gnt;
      @(posedge clk);
      if (g) break;
      @(negedge clk);
    end
    @(negedge clk);
    dbg_req = '0;
    rdata = dbg_rsp.rdata;
  endtask

  function automatic logic [31:0] prog_word(input logic [31:0] a);
    return {a[15:0], ~a[15:0]} ^ 32'h1357_9BDF;
  endfunction

  // word address -> bank and row, for injecting bit flips
  task automatic flip_bits(input logic [31:0] addr, input logic [38:0] mask);
    logic [31:0] off;
    int b, row;
    off = addr - MemBase;
    b   = int'(off[4:2]);
    row = int'(off[17:5]);
    case (b)
      0: dut.g_bank[0].u_bank.u_sram.mem[row] ^= mask;
      1: dut.g_bank[1].u_bank.u_sram.mem[row] ^= mask;
      2: dut.g_bank[2].u_bank.u_sram.mem[row] ^= mask;
      3: dut.g_bank[3].u_bank.u_sram.mem[row] ^= mask;
      4: dut.g_bank[4].u_bank.u_sram.mem[row] ^= mask;
      5: dut.g_bank[5].u_bank.u_sram.mem[row] ^= mask;
      6: dut.g_bank[6].u_bank.u_sram.mem[row] ^= mask;
      default: dut.g_bank[7].u_bank.u_sram.mem[row] ^= mask;
    endcase
  endtask

  task automatic wait_ops(input int n);
    int start;
    start = c_ops[0];
    while (c_ops[0] < start + n) @(negedge clk);
  endtask

  // ------------------------------------------------------------------ watchdog
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ sequence
  initial begin
    logic [31:0] d;
    int err1_before, recov_cycles, t0;
    dbg_req = '0; dma_req = '0;
    for (int i = 0; i < NumCores; i++) begin
      irq[i] = '0;
      dbg_req_core[i] = 1'b0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // load the program through the debug port
    for (int i = 0; i < 256; i++) dbg_access(1, MemBase + 32'(4 * i), prog_word(MemBase + 32'(4 * i)), d);
    dbg_access(0, MemBase + 32'h20, '0, d);
    expect_ok("program read back through debug port", d == prog_word(MemBase + 32'h20));
    expect_ok("boots in lockstep", locked);

    // ---------------- lockstep run
    fetch_en = 1;
    wait_ops(1500);
    expect_ok("lockstep cores agree", c_ops[0] == c_ops[1] && c_ops[1] == c_ops[2] && n_mm == 0);

    // ---------------- upset in core 1: mask, recover, resynchronise
    err1_before = c_err[1];
    g_core[1].u_core.lfsr ^= 32'h0000_0100;
    t0 = n_cyc;
    while (!pend) @(negedge clk);
    expect_ok("upset detected and attributed to core 1", fid == 3'b010 && n_mm >= 1);
    while (c_rest[0] == 0) @(negedge clk);
    recov_cycles = n_cyc - t0;
    wait_ops(500);
    expect_ok("recovery restored all cores", c_rest[0] == 1 && c_rest[1] == 1 && c_rest[2] == 1);
    expect_ok("cores back in lockstep", g_core[0].u_core.lfsr == g_core[1].u_core.lfsr &&
              g_core[1].u_core.lfsr == g_core[2].u_core.lfsr && !pend);
    err1_before = c_err[1];

    // ---------------- SRAM upsets
    $display("%0t sram flips", $time);
    flip_bits(MemBase + 32'h40, 39'h1 << 9);                  // program word: fetched soon
    flip_bits(MemBase + 32'h3_0000, 39'h1 << 36);             // unused word, check bit
    flip_bits(MemBase + 32'h3_1004, 39'h1 << 20);             // unused word, data bit
    flip_bits(MemBase + 32'h3_2008, (39'h1 << 2) | (39'h1 << 33));  // double flip
    wait_ops(12000);
    d = '0;
    expect_ok("scrubbers repaired the single flips",
              dut.g_bank[0].u_bank.u_sram.mem[32'h3_0000 >> 5] == '0 &&
              dut.g_bank[1].u_bank.u_sram.mem[32'h3_1004 >> 5] == '0);

    // ---------------- independent mode and back
    $display("%0t independent", $time);
    dbg_access(1, CtrlRegBase + 4 * RegMode, 32'h0, d);
    wait_ops(1500);
    expect_ok("independent cores run", c_ops[1] > 100 && c_ops[2] > 100 && !locked);
    $display("%0t lockstep", $time);
    dbg_access(1, CtrlRegBase + 4 * RegMode, 32'h1, d);
    wait_ops(500);
    expect_ok("back in lockstep", locked && c_ops[0] == c_ops[1] && c_ops[1] == c_ops[2]);

    // ---------------- telemetry
    dbg_access(0, CtrlRegBase + 4 * RegTclsCnt, '0, d);
    expect_ok("TCLS counter", d == 32'(n_ev) && n_ev == 1);
    dbg_access(0, CtrlRegBase + 4 * RegAccCorrCnt, '0, d);
    expect_ok("access-correctable counter", d == 32'(n_acc_corr));
    dbg_access(0, CtrlRegBase + 4 * RegAccUncCnt, '0, d);
    expect_ok("access-uncorrectable counter", d == 32'(n_acc_unc));
    dbg_access(0, CtrlRegBase + 4 * RegScrubCorrCnt, '0, d);
    expect_ok("scrub-corrected counter", d == 32'(n_scr_corr));
    dbg_access(0, CtrlRegBase + 4 * RegScrubUncCnt, '0, d);
    expect_ok("scrub-uncorrectable counter", d == 32'(n_scr_unc));

    // ---------------- core checks and mechanism coverage
    expect_ok("core 0 and 2 saw correct data", c_err[0] == 0 && c_err[2] == 0);
    expect_ok("core 1 correct after restore", c_err[1] == err1_before);
    expect_ok("mechanism: lockstep mismatch masked", n_mm > 0);
    expect_ok("mechanism: recovery routine", c_rest[0] > 0);
    expect_ok("mechanism: resynchronising / mode reset", n_rst >= 3);
    expect_ok("mechanism: mode switch", n_mode_switch >= 2);
    expect_ok("mechanism: parallel independent cores", n_par > 0);
    expect_ok("mechanism: read-modify-write", n_rmw > 0);
    expect_ok("mechanism: bank stall after read-modify-write", n_rmw_stall > 0);
    expect_ok("mechanism: correction on access", n_acc_corr > 0);
    expect_ok("mechanism: scrubber correction", n_scr_corr >= 2);
    expect_ok("mechanism: uncorrectable detection", n_scr_unc > 0);
    expect_ok("mechanism: arbitration wait", n_arb_wait > 0);
    expect_ok("mechanism: peripheral access", n_periph > 0);
    $display("cycles=%0d ops=%0d/%0d/%0d mismatch_cycles=%0d recovery_cycles=%0d resets=%0d mode_switches=%0d",
             n_cyc, c_ops[0], c_ops[1], c_ops[2], n_mm, recov_cycles, n_rst, n_mode_switch);
    $display("parallel=%0d arb_wait=%0d rmw=%0d rmw_stall=%0d acc_corr=%0d acc_unc=%0d scrub_corr=%0d scrub_unc=%0d periph=%0d dbg=%0d",
             n_par, n_arb_wait, n_rmw, n_rmw_stall, n_acc_corr, n_acc_unc, n_scr_corr, n_scr_unc, n_periph, n_dbg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
