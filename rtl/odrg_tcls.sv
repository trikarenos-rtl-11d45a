// odrg_tcls: on-demand redundancy grouping of three cores (triple-core lockstep).
//
// Sits between three processor cores and the system. In independent mode each core has
// its own system port: core i's outputs go to system port i and system port i's inputs
// go to core i, so three programs run in parallel. In lockstep mode the inputs of system
// port 0 (bus responses, control, interrupts) are given to all three cores alike, and
// the three cores' outputs (instruction fetch, data request and status) are voted bit by
// bit: system port 0 carries the majority, ports 1 and 2 are idle. The voted value is
// correct as long as at most one core deviates, so the system never sees the error.
//
// Recovery: when the voter sees a mismatch in lockstep mode, mismatch_o is high for that
// cycle and, if no recovery is pending yet, tcls_event_o pulses once (one event per
// recovery, which is what the telemetry counts); the faulty core is recorded in fault_id_o (sticky), and the recovery interrupt
// (irq bit RecoveryIrq) is raised to all cores. The recovery routine, which is software,
// stores the core state to memory (each store passing through the voter, so the stored
// state is the corrected one) and then writes the resynchronise command (resync_i). That
// clears the pending recovery and resets all three cores synchronously (core_rst_o, one
// cycle) so they restart from the same point and restore the saved state. A mode change
// (locked_i toggling) resets the cores the same way. In a cycle in which the cores are
// being reset no mismatch is reported: on entering lockstep the cores still hold the
// diverging state of independent mode until that reset. Software can delay recovery by
// keeping the interrupt masked.
//
// Source design: mode selected at run time through control registers, inputs shared and
// outputs voted in lockstep, mismatch and faulty-core outputs, software recovery saving
// state through the voters followed by a reset. Own choices: the interrupt bit, resetting
// all three cores rather than only the faulty one, and the reset on a mode change.
module odrg_tcls
  import trik_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      locked_i,
  input  logic      resync_i,
  // core side
  input  core_out_t core_out_i [NumCores],
  output core_in_t  core_in_o  [NumCores],
  output logic      core_rst_o,
  // system side
  input  core_in_t  sys_in_i   [NumCores],
  output core_out_t sys_out_o  [NumCores],
  // status
  output logic      mismatch_o,
  output logic      tcls_event_o,
  output logic [2:0] fault_id_o,
  output logic      recovery_pending_o
);
  logic [CoreOutWidth-1:0] vote_in [3];
  logic [CoreOutWidth-1:0] voted;
  logic                    vote_mm;
  logic [2:0]              vote_id;
  logic                    locked_q, pending_q;
  logic [2:0]              fault_q;

  always_comb begin
    for (int unsigned i = 0; i < 3; i++) vote_in[i] = core_out_i[i];
  end

  tcls_voter #(.Width(CoreOutWidth)) u_voter (
    .in_i      (vote_in),
    .out_o     (voted),
    .mismatch_o(vote_mm),
    .fault_id_o(vote_id)
  );

  always_comb begin
    for (int unsigned i = 0; i < NumCores; i++) begin
      if (locked_i) begin
        core_in_o[i]                = sys_in_i[0];
        core_in_o[i].irq[RecoveryIrq] = sys_in_i[0].irq[RecoveryIrq] | pending_q;
        sys_out_o[i]                = (i == 0) ? core_out_t'(voted) : '0;
      end else begin
        core_in_o[i] = sys_in_i[i];
        sys_out_o[i] = core_out_i[i];
      end
    end
  end

  assign mismatch_o         = locked_i && vote_mm && !core_rst_o;
  assign tcls_event_o       = mismatch_o && !pending_q;
  assign fault_id_o         = fault_q;
  assign recovery_pending_o = pending_q;
  assign core_rst_o         = resync_i || (locked_i != locked_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      locked_q  <= 1'b1;
      pending_q <= 1'b0;
      fault_q   <= '0;
    end else begin
      locked_q <= locked_i;
      if (resync_i) begin
        pending_q <= 1'b0;
        fault_q   <= '0;
      end else if (mismatch_o) begin
        pending_q <= 1'b1;
        fault_q   <= fault_q | vote_id;
      end
    end
  end
endmodule
