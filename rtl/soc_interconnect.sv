// soc_interconnect: low-latency crossbar between bus masters and the memory banks.
//
// Masters are the cores' instruction and data ports and the other bus masters of the
// SoC (debug module, I/O DMA). Slaves are NumBanks word-interleaved memory banks, the
// control/telemetry register block and one port leading to the rest of the peripheral
// space. Consecutive 32-bit words of the memory region [MemBase, MemBase + NumBanks *
// BankWords * 4) lie in consecutive banks: byte address bits [3:2] .. select the bank,
// the bits above them the word inside the bank, so sequential code and data spread
// over all banks. The register window is CtrlRegBase/CtrlRegMask; every other address
// goes to the peripheral port.
//
// Each slave has its own round-robin arbiter, so masters that target different slaves
// proceed in the same cycle; a request that loses arbitration, or that a bank does not
// grant (read-modify-write in progress), simply keeps req high. Requests are routed
// combinationally (grant in the cycle of the request when the slave is free); every
// slave answers exactly one cycle after its grant and the response is steered back to
// the master that was granted, remembered in one register per slave.
//
// Source design: a low-latency interconnect joining cores, eight word-interleaved banks,
// peripherals and debug module, with peripherals able to act as masters. Own choices:
// full crossbar with round-robin arbitration, fixed one-cycle response, address map.
// Lint note: rst_ni also appears in the assertion's disable iff, which a linter may flag
// as a signal used both as asynchronous reset and synchronously; the flops use it only
// as their asynchronous reset.
module soc_interconnect
  import trik_pkg::*;
#(
  parameter int unsigned NumMasters = 8,
  parameter int unsigned NumBanks   = 8,
  parameter int unsigned BankWords  = 8192,
  localparam int unsigned NumSlaves = NumBanks + 2,
  localparam int unsigned SlvCtrl   = NumBanks,
  localparam int unsigned SlvPeriph = NumBanks + 1,
  localparam int unsigned MW        = (NumMasters > 1) ? $clog2(NumMasters) : 1,
  localparam int unsigned SW        = $clog2(NumSlaves)
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  bus_req_t mst_req_i [NumMasters],
  output bus_rsp_t mst_rsp_o [NumMasters],
  output bus_req_t slv_req_o [NumSlaves],
  input  bus_rsp_t slv_rsp_i [NumSlaves]
);
  localparam int unsigned BankBits = (NumBanks > 1) ? $clog2(NumBanks) : 0;
  localparam logic [AddrWidth-1:0] MemSize = AddrWidth'(NumBanks * BankWords * 4);

  logic [SW-1:0]         tgt    [NumMasters];
  logic [NumMasters-1:0] want   [NumSlaves];
  logic [MW-1:0]         win    [NumSlaves];
  logic                  any    [NumSlaves];
  logic [MW-1:0]         rr_q   [NumSlaves];
  logic [MW-1:0]         own_q  [NumSlaves];
  logic [NumSlaves-1:0]  taken_q;

  // address decoding
  always_comb begin
    for (int unsigned m = 0; m < NumMasters; m++) begin
      logic [AddrWidth-1:0] off;
      off = mst_req_i[m].addr - MemBase;
      if (mst_req_i[m].addr >= MemBase && off < MemSize)
        tgt[m] = (BankBits == 0) ? '0 : SW'(off[2 +: (BankBits > 0 ? BankBits : 1)] & SW'(NumBanks - 1));
      else if ((mst_req_i[m].addr & CtrlRegMask) == CtrlRegBase)
        tgt[m] = SW'(SlvCtrl);
      else
        tgt[m] = SW'(SlvPeriph);
    end
  end

  // round-robin arbitration per slave, starting the search at rr_q
  always_comb begin
    for (int unsigned s = 0; s < NumSlaves; s++) begin
      for (int unsigned m = 0; m < NumMasters; m++)
        want[s][m] = mst_req_i[m].req && (tgt[m] == SW'(s));
      any[s] = |want[s];
      win[s] = '0;
      for (int unsigned k = NumMasters; k > 0; k--) begin
        int unsigned m;
        m = (int'(rr_q[s]) + k - 1) % NumMasters;
        if (want[s][m]) win[s] = MW'(m);
      end
    end
  end

  // request and response routing
  always_comb begin
    for (int unsigned s = 0; s < NumSlaves; s++) begin
      slv_req_o[s]     = mst_req_i[win[s]];
      slv_req_o[s].req = any[s];
    end
    for (int unsigned m = 0; m < NumMasters; m++) begin
      mst_rsp_o[m] = '0;
      mst_rsp_o[m].gnt = slv_rsp_i[tgt[m]].gnt && any[tgt[m]] && (win[tgt[m]] == MW'(m))
                         && mst_req_i[m].req;
      for (int unsigned s = 0; s < NumSlaves; s++) begin
        if (taken_q[s] && own_q[s] == MW'(m)) begin
          mst_rsp_o[m].rvalid = slv_rsp_i[s].rvalid;
          mst_rsp_o[m].rdata  = slv_rsp_i[s].rdata;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned s = 0; s < NumSlaves; s++) begin
        rr_q[s]  <= '0;
        own_q[s] <= '0;
      end
      taken_q <= '0;
    end else begin
      for (int unsigned s = 0; s < NumSlaves; s++) begin
        taken_q[s] <= any[s] && slv_rsp_i[s].gnt;
        if (any[s] && slv_rsp_i[s].gnt) begin
          own_q[s] <= win[s];
          rr_q[s]  <= (int'(win[s]) == NumMasters - 1) ? '0 : win[s] + 1'b1;
        end
      end
    end
  end

  // every slave answers exactly one cycle after it granted a request
  for (genvar s = 0; s < NumSlaves; s++) begin : g_chk
    a_fixed_latency: assert property (@(posedge clk_i) disable iff (!rst_ni)
      slv_rsp_i[s].rvalid == taken_q[s]);
  end
endmodule
