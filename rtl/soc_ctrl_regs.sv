// soc_ctrl_regs: system control and telemetry registers.
//
// A bus slave (always granted, response one cycle later) holding the run-time controls
// of the fault-tolerance features and the error counters read by the monitoring
// software. Word offsets are given by trik_pkg::ctrl_reg_e:
//   MODE        bit 0: 1 = three cores in lockstep, 0 = independent (reset: lockstep)
//   RECOVERY    read {fault_id[2:0], pending}; writing bit 0 = 1 resynchronises the cores
//   SCRUB_INT   cycles between two word checks of each bank scrubber, 0 = off
//               (reset: ScrubIntervalReset)
//   TCLS_CNT    lockstep error events (mismatches that started a recovery)
//   ACC_CORR    correctable ECC errors met by system accesses (all banks)
//   ACC_UNC     uncorrectable ECC errors met by system accesses
//   SCRUB_CORR  errors corrected by the scrubbers
//   SCRUB_UNC   uncorrectable errors found by the scrubbers
// Counters are 32 bits, saturate at all ones, and can be written (e.g. cleared). Several
// banks may report in the same cycle; each event counts once.
//
// Source design: mode switching through system control registers; telemetry counters
// for lockstep events, ECC errors on access and scrubber corrections, both correctable and
// uncorrectable; a configurable scrub rate. Offsets, widths, reset values, saturation and
// write behaviour are this design's own.
module soc_ctrl_regs
  import trik_pkg::*;
#(
  parameter int unsigned NumBanks           = 8,
  parameter logic [31:0] ScrubIntervalReset = 32'd1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  bus_req_t            req_i,
  output bus_rsp_t            rsp_o,
  // controls
  output logic                locked_o,
  output logic                resync_o,
  output logic [31:0]         scrub_interval_o,
  // status and events
  input  logic                recovery_pending_i,
  input  logic [2:0]          fault_id_i,
  input  logic                tcls_mismatch_i,
  input  logic [NumBanks-1:0] acc_corr_i,
  input  logic [NumBanks-1:0] acc_unc_i,
  input  logic [NumBanks-1:0] scrub_corr_i,
  input  logic [NumBanks-1:0] scrub_unc_i
);
  localparam int unsigned NumCnt = 5;
  localparam int unsigned CW     = $clog2(NumBanks + 1);

  logic        mode_q;
  logic [31:0] interval_q;
  logic [31:0] cnt_q [NumCnt];
  logic [CW-1:0] inc [NumCnt];
  logic        rvalid_q;
  logic [31:0] rdata_q, rdata_d;
  logic [5:0]  idx;
  logic        wr;

  assign idx = req_i.addr[7:2];
  assign wr  = req_i.req && req_i.we;

  always_comb begin
    inc[0] = CW'(tcls_mismatch_i);
    inc[1] = CW'($countones(acc_corr_i));
    inc[2] = CW'($countones(acc_unc_i));
    inc[3] = CW'($countones(scrub_corr_i));
    inc[4] = CW'($countones(scrub_unc_i));
  end

  always_comb begin
    unique case (idx)
      RegMode:         rdata_d = {31'b0, mode_q};
      RegRecovery:     rdata_d = {28'b0, fault_id_i, recovery_pending_i};
      RegScrubInt:     rdata_d = interval_q;
      RegTclsCnt:      rdata_d = cnt_q[0];
      RegAccCorrCnt:   rdata_d = cnt_q[1];
      RegAccUncCnt:    rdata_d = cnt_q[2];
      RegScrubCorrCnt: rdata_d = cnt_q[3];
      RegScrubUncCnt:  rdata_d = cnt_q[4];
      default:         rdata_d = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mode_q     <= 1'b1;
      interval_q <= ScrubIntervalReset;
      for (int unsigned c = 0; c < NumCnt; c++) cnt_q[c] <= '0;
      rvalid_q   <= 1'b0;
      rdata_q    <= '0;
    end else begin
      rvalid_q <= req_i.req;
      rdata_q  <= (req_i.req && !req_i.we) ? rdata_d : '0;
      for (int unsigned c = 0; c < NumCnt; c++) begin
        if (wr && idx == 6'(c + RegTclsCnt))
          cnt_q[c] <= req_i.wdata;
        else if ({1'b0, cnt_q[c]} + 33'(inc[c]) > 33'hFFFF_FFFF)
          cnt_q[c] <= '1;
        else
          cnt_q[c] <= cnt_q[c] + 32'(inc[c]);
      end
      if (wr && idx == RegMode)     mode_q     <= req_i.wdata[0];
      if (wr && idx == RegScrubInt) interval_q <= req_i.wdata;
    end
  end

  assign resync_o         = wr && idx == RegRecovery && req_i.wdata[0];
  assign locked_o         = mode_q;
  assign scrub_interval_o = interval_q;
  assign rsp_o.gnt        = req_i.req;
  assign rsp_o.rvalid     = rvalid_q;
  assign rsp_o.rdata      = rdata_q;
endmodule
