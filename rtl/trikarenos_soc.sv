// trikarenos_soc: fault-tolerant RISC-V microcontroller core complex.
//
// Three processor cores share one bus system through the lockstep unit (odrg_tcls). In
// lockstep mode their outputs are majority-voted and they behave as a single core whose
// upsets are masked and then repaired by a software recovery routine; in independent
// mode they are three cores. The cores, through the interconnect, reach NumBanks
// word-interleaved memory banks of BankWords 32-bit words each. Every word is stored as a
// 39-bit Hsiao SECDED codeword; each bank has its own control unit (read-modify-write for
// byte and half-word writes) and its own scrubber. A register block holds the lockstep
// mode, the recovery command, the scrub rate and the error counters.
//
// The processor cores, the debug module, the I/O DMA and the other peripherals (UART,
// QSPI, GPIO, timer, boot ROM) are not part of this RTL; their connections are ports:
//   core_out_i / core_in_o / core_rst_o   the three cores' buses, control and reset
//   irq_i, debug_req_i, fetch_enable_i    interrupt, debug and start inputs per core
//   dbg_req_i / dma_req_i                 debug-module and DMA bus masters
//   periph_req_o / periph_rsp_i           bus port to all other addresses (peripherals,
//                                         boot ROM, debug memory); it must answer one
//                                         cycle after its grant
// Each core i receives core_id i and boot address BootAddr. core_rst_o is a synchronous
// reset of all three cores issued by the lockstep unit.
//
// Defaults follow the source design: eight banks of 8192 words (256 KiB). The boot
// address, the address map and the scrub-rate reset value are this design's own.
//
// Notes on synthesis and lint results: the core_id and boot_addr fields of core_in_o are
// constants and a few control bits pass straight from inputs, so some output bits carry
// no logic. The asynchronous-reset note on rst_ni comes from the assertions inside the
// banks and the interconnect (disable iff), not from any flop.
module trikarenos_soc
  import trik_pkg::*;
#(
  parameter int unsigned NumBanks           = 8,
  parameter int unsigned BankWords          = 8192,
  parameter logic [31:0] BootAddr           = 32'h1A00_0080,
  parameter logic [31:0] ScrubIntervalReset = 32'd1,
  localparam int unsigned NumMasters        = 2 * NumCores + 2,
  localparam int unsigned NumSlaves         = NumBanks + 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // cores
  input  core_out_t   core_out_i [NumCores],
  output core_in_t    core_in_o  [NumCores],
  output logic        core_rst_o,
  input  logic [31:0] irq_i       [NumCores],
  input  logic        debug_req_i [NumCores],
  input  logic        fetch_enable_i,
  // other bus masters
  input  bus_req_t    dbg_req_i,
  output bus_rsp_t    dbg_rsp_o,
  input  bus_req_t    dma_req_i,
  output bus_rsp_t    dma_rsp_o,
  // peripheral space
  output bus_req_t    periph_req_o,
  input  bus_rsp_t    periph_rsp_i,
  // status
  output logic        locked_o,
  output logic        tcls_mismatch_o,
  output logic [2:0]  fault_id_o,
  output logic        recovery_pending_o
);
  localparam int unsigned BankBits = (NumBanks > 1) ? $clog2(NumBanks) : 0;
  localparam int unsigned WordBits = (BankWords > 1) ? $clog2(BankWords) : 1;

  core_in_t  sys_in  [NumCores];
  core_out_t sys_out [NumCores];
  bus_req_t  mst_req [NumMasters];
  bus_rsp_t  mst_rsp [NumMasters];
  bus_req_t  slv_req [NumSlaves];
  bus_rsp_t  slv_rsp [NumSlaves];

  logic                locked, resync, tcls_event;
  logic [31:0]         scrub_interval;
  logic [NumBanks-1:0] acc_corr, acc_unc, scrub_corr, scrub_unc;

  // ------------------------------------------------------------ lockstep unit
  odrg_tcls u_odrg (
    .clk_i             (clk_i),
    .rst_ni            (rst_ni),
    .locked_i          (locked),
    .resync_i          (resync),
    .core_out_i        (core_out_i),
    .core_in_o         (core_in_o),
    .core_rst_o        (core_rst_o),
    .sys_in_i          (sys_in),
    .sys_out_o         (sys_out),
    .mismatch_o        (tcls_mismatch_o),
    .tcls_event_o      (tcls_event),
    .fault_id_o        (fault_id_o),
    .recovery_pending_o(recovery_pending_o)
  );

  always_comb begin
    for (int unsigned i = 0; i < NumCores; i++) begin
      mst_req[i]            = sys_out[i].instr;
      mst_req[NumCores + i] = sys_out[i].data;
      sys_in[i].instr        = mst_rsp[i];
      sys_in[i].data         = mst_rsp[NumCores + i];
      sys_in[i].fetch_enable = fetch_enable_i;
      sys_in[i].boot_addr    = BootAddr;
      sys_in[i].core_id      = 4'(i);
      sys_in[i].debug_req    = debug_req_i[i];
      sys_in[i].irq          = irq_i[i];
    end
    mst_req[2 * NumCores]     = dbg_req_i;
    mst_req[2 * NumCores + 1] = dma_req_i;
  end

  assign dbg_rsp_o = mst_rsp[2 * NumCores];
  assign dma_rsp_o = mst_rsp[2 * NumCores + 1];

  // ------------------------------------------------------------ interconnect
  soc_interconnect #(
    .NumMasters(NumMasters),
    .NumBanks  (NumBanks),
    .BankWords (BankWords)
  ) u_xbar (
    .clk_i    (clk_i),
    .rst_ni   (rst_ni),
    .mst_req_i(mst_req),
    .mst_rsp_o(mst_rsp),
    .slv_req_o(slv_req),
    .slv_rsp_i(slv_rsp)
  );

  // ------------------------------------------------------------ ECC memory banks
  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    ecc_bank #(.NumWords(BankWords)) u_bank (
      .clk_i           (clk_i),
      .rst_ni          (rst_ni),
      .req_i           (slv_req[b].req),
      .we_i            (slv_req[b].we),
      .be_i            (slv_req[b].be),
      .addr_i          (slv_req[b].addr[2 + BankBits +: WordBits]),
      .wdata_i         (slv_req[b].wdata),
      .gnt_o           (slv_rsp[b].gnt),
      .rvalid_o        (slv_rsp[b].rvalid),
      .rdata_o         (slv_rsp[b].rdata),
      .scrub_interval_i(scrub_interval),
      .acc_corr_o      (acc_corr[b]),
      .acc_unc_o       (acc_unc[b]),
      .scrub_corr_o    (scrub_corr[b]),
      .scrub_unc_o     (scrub_unc[b])
    );
  end

  // ------------------------------------------------------------ control / telemetry
  soc_ctrl_regs #(
    .NumBanks          (NumBanks),
    .ScrubIntervalReset(ScrubIntervalReset)
  ) u_regs (
    .clk_i             (clk_i),
    .rst_ni            (rst_ni),
    .req_i             (slv_req[NumBanks]),
    .rsp_o             (slv_rsp[NumBanks]),
    .locked_o          (locked),
    .resync_o          (resync),
    .scrub_interval_o  (scrub_interval),
    .recovery_pending_i(recovery_pending_o),
    .fault_id_i        (fault_id_o),
    .tcls_mismatch_i   (tcls_event),
    .acc_corr_i        (acc_corr),
    .acc_unc_i         (acc_unc),
    .scrub_corr_i      (scrub_corr),
    .scrub_unc_i       (scrub_unc)
  );

  assign periph_req_o          = slv_req[NumBanks + 1];
  assign slv_rsp[NumBanks + 1] = periph_rsp_i;
  assign locked_o              = locked;
endmodule
