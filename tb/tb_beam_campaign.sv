// tb_beam_campaign: the radiation-test scenario on the full-size SoC (8 banks x 8192
// words) with three behavioural core models running in lockstep.
//
// Part 1, proton scrub setting: the scrub interval register is set to 6225 cycles and
// the time between two word checks of one bank is measured; it must be 6225 cycles
// when the bank is idle and never shorter.
// Part 2, upset campaign at the fastest scrub rate: in each of NumRounds rounds a random
// bit of a random core's architectural state is flipped (the core must be out-voted,
// named in the fault id, and recovered by save / resynchronise / restore), and
// FlipsPerRound single-bit upsets are put into distinct random words of the unused
// upper 64 KiB of the SRAM. After the last round the scrubbers get time for two full
// passes. The telemetry registers, read through the debug port as the test software
// did, must then report exactly NumRounds lockstep events and one scrubber correction
// per flipped word, no uncorrectable error and no access error; every flipped word must
// hold a clean codeword again, and the cores must have seen correct data throughout
// (the upset core is excused only between its upset and its restore).
module tb_beam_campaign;
  import trik_pkg::*;

  localparam int NumRounds     = 12;
  localparam int FlipsPerRound = 6;
  localparam int ProtonRate    = 6225;

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

  // peripheral space: answers every read with the inverted address
  logic        p_valid_q = 0;
  logic [31:0] p_data_q = 0;
  assign periph_rsp.gnt    = periph_req.req;
  assign periph_rsp.rvalid = p_valid_q;
  assign periph_rsp.rdata  = p_data_q;
  always @(posedge clk) begin
    p_valid_q <= periph_req.req;
    p_data_q  <= periph_req.req ? ~periph_req.addr : '0;
  end

  // ------------------------------------------------------------------ monitors
  int n_cyc = 0, n_ev = 0;
  // scrubber read grants of bank 5, for the rate measurement
  int sc_last = -1, sc_gap_min = 1 << 30, sc_gap_sum = 0, sc_gaps = 0, sc_gap_exact = 0;
  logic measure = 0;

  always @(posedge clk) if (rst_n) begin
    n_cyc++;
    if (dut.tcls_event) n_ev++;
    if (measure && dut.g_bank[5].u_bank.sc_gnt && !dut.g_bank[5].u_bank.sc_we) begin
      if (sc_last >= 0) begin
        sc_gaps++;
        sc_gap_sum += n_cyc - sc_last;
        if (n_cyc - sc_last < sc_gap_min) sc_gap_min = n_cyc - sc_last;
        if (n_cyc - sc_last == ProtonRate) sc_gap_exact++;
      end
      sc_last = n_cyc;
    end
  end

  for (genvar b = 0; b < 8; b++) begin : g_clear
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

  // read or flip the stored codeword of a byte address
  function automatic logic [38:0] stored(input logic [31:0] addr);
    logic [31:0] off;
    off = addr - MemBase;
    case (off[4:2])
      3'd0: return dut.g_bank[0].u_bank.u_sram.mem[off[17:5]];
      3'd1: return dut.g_bank[1].u_bank.u_sram.mem[off[17:5]];
      3'd2: return dut.g_bank[2].u_bank.u_sram.mem[off[17:5]];
      3'd3: return dut.g_bank[3].u_bank.u_sram.mem[off[17:5]];
      3'd4: return dut.g_bank[4].u_bank.u_sram.mem[off[17:5]];
      3'd5: return dut.g_bank[5].u_bank.u_sram.mem[off[17:5]];
      3'd6: return dut.g_bank[6].u_bank.u_sram.mem[off[17:5]];
      default: return dut.g_bank[7].u_bank.u_sram.mem[off[17:5]];
    endcase
  endfunction

  task automatic flip_bits(input logic [31:0] addr, input logic [38:0] mask);
    logic [31:0] off;
    off = addr - MemBase;
    case (off[4:2])
      3'd0: dut.g_bank[0].u_bank.u_sram.mem[off[17:5]] ^= mask;
      3'd1: dut.g_bank[1].u_bank.u_sram.mem[off[17:5]] ^= mask;
      3'd2: dut.g_bank[2].u_bank.u_sram.mem[off[17:5]] ^= mask;
      3'd3: dut.g_bank[3].u_bank.u_sram.mem[off[17:5]] ^= mask;
      3'd4: dut.g_bank[4].u_bank.u_sram.mem[off[17:5]] ^= mask;
      3'd5: dut.g_bank[5].u_bank.u_sram.mem[off[17:5]] ^= mask;
      3'd6: dut.g_bank[6].u_bank.u_sram.mem[off[17:5]] ^= mask;
      default: dut.g_bank[7].u_bank.u_sram.mem[off[17:5]] ^= mask;
    endcase
  endtask

  task automatic wait_ops(input int n);
    int start;
    start = c_ops[0];
    while (c_ops[0] < start + n) @(negedge clk);
  endtask

  task automatic flip_core(input int k, input logic [31:0] mask);
    case (k)
      0: g_core[0].u_core.lfsr ^= mask;
      1: g_core[1].u_core.lfsr ^= mask;
      default: g_core[2].u_core.lfsr ^= mask;
    endcase
  endtask

  // ------------------------------------------------------------------ watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ sequence
  initial begin
    logic [31:0] d;
    logic [31:0] flipped [$];
    bit          used [logic [31:0]];
    int          err_ok [NumCores];
    int          n_flips, rec_before;
    dbg_req = '0; dma_req = '0;
    for (int i = 0; i < NumCores; i++) begin
      irq[i] = '0;
      dbg_req_core[i] = 1'b0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 256; i++) dbg_access(1, MemBase + 32'(4 * i), prog_word(MemBase + 32'(4 * i)), d);

    // ---------------- part 1: proton scrub setting
    dbg_access(1, CtrlRegBase + 4 * RegScrubInt, 32'(ProtonRate), d);
    dbg_access(0, CtrlRegBase + 4 * RegScrubInt, '0, d);
    expect_ok("scrub interval register", d == 32'(ProtonRate));
    fetch_en = 1;
    measure  = 1;
    while (sc_gaps < 4) @(negedge clk);
    measure = 0;
    expect_ok("no word check sooner than the set interval", sc_gap_min >= ProtonRate);
    expect_ok("idle bank checks exactly every 6225 cycles", sc_gap_exact >= 1);
    expect_ok("waiting for the system stays short", sc_gap_sum <= sc_gaps * (ProtonRate + 50));
    $display("scrub gaps: %0d, min %0d, mean %0d cycles", sc_gaps, sc_gap_min, sc_gap_sum / sc_gaps);

    // ---------------- part 2: upset campaign at the fastest scrub rate
    dbg_access(1, CtrlRegBase + 4 * RegScrubInt, 32'd1, d);
    for (int c = 0; c < 8; c++) dbg_access(1, CtrlRegBase + 4 * (RegTclsCnt + c), '0, d);
    n_ev = 0;
    for (int i = 0; i < NumCores; i++) err_ok[i] = c_err[i];
    n_flips = 0;
    for (int r = 0; r < NumRounds; r++) begin
      int k, t0;
      wait_ops(200 + $urandom_range(300));
      expect_ok("cores agree before the upset", c_ops[0] == c_ops[1] && c_ops[1] == c_ops[2] &&
                c_err[0] == err_ok[0] && c_err[1] == err_ok[1] && c_err[2] == err_ok[2]);
      k = $urandom_range(NumCores - 1);
      rec_before = c_rest[0];
      flip_core(k, 32'h1 << $urandom_range(31));
      // memory upsets land while the recovery runs
      for (int f = 0; f < FlipsPerRound; f++) begin
        logic [31:0] a;
        do a = MemBase + 32'h3_0000 + 32'(4 * $urandom_range(16383));
        while (used.exists(a));
        used[a] = 1'b1;
        flipped.push_back(a);
        flip_bits(a, 39'h1 << $urandom_range(38));
        n_flips++;
      end
      t0 = n_cyc;
      while (!pend && n_cyc - t0 < 20000) @(negedge clk);
      expect_ok("upset out-voted and attributed", pend && fid == (3'b001 << k));
      while (c_rest[0] == rec_before && n_cyc - t0 < 40000) @(negedge clk);
      wait_ops(20);
      expect_ok("recovered: all cores restored and aligned",
                c_rest[0] == rec_before + 1 && c_rest[1] == c_rest[0] && c_rest[2] == c_rest[0] &&
                g_core[0].u_core.lfsr == g_core[1].u_core.lfsr &&
                g_core[1].u_core.lfsr == g_core[2].u_core.lfsr && !pend);
      for (int i = 0; i < NumCores; i++) begin
        if (i != k) expect_ok("unaffected cores saw correct data", c_err[i] == err_ok[i]);
        err_ok[i] = c_err[i];
      end
    end
    // two full scrub passes
    repeat (2 * 2 * 8192 + 8000) @(negedge clk);

    // ---------------- telemetry and memory state
    dbg_access(0, CtrlRegBase + 4 * RegTclsCnt, '0, d);
    expect_ok("TCLS events: one per core upset", d == 32'(NumRounds) && n_ev == NumRounds);
    dbg_access(0, CtrlRegBase + 4 * RegScrubCorrCnt, '0, d);
    expect_ok("scrubber corrections: one per flipped word", d == 32'(n_flips));
    $display("scrub corrections %0d of %0d flips", d, n_flips);
    dbg_access(0, CtrlRegBase + 4 * RegScrubUncCnt, '0, d);
    expect_ok("no uncorrectable word", d == 0);
    dbg_access(0, CtrlRegBase + 4 * RegAccCorrCnt, '0, d);
    expect_ok("no access error: flips were outside the program's data", d == 0);
    dbg_access(0, CtrlRegBase + 4 * RegAccUncCnt, '0, d);
    expect_ok("no uncorrectable access error", d == 0);
    foreach (flipped[i]) expect_ok("flipped word repaired", stored(flipped[i]) == '0);
    for (int i = 0; i < NumCores; i++) expect_ok("no core error after the last restore", c_err[i] == err_ok[i]);
    $display("cycles=%0d ops=%0d restores=%0d", n_cyc, c_ops[0], c_rest[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
