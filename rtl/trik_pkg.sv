// trik_pkg: constants, bus types and ECC code shared by the fault-tolerant SoC.
//
// The memory system stores every 32-bit word as a 39-bit single-error-correcting,
// double-error-detecting Hsiao codeword: 32 data bits in [31:0] and 7 check bits in
// [38:32]. The word size, codeword size and the use of a Hsiao code follow the source
// design; the particular check matrix is this design's own: data bit i is covered by
// the i-th smallest 7-bit value of Hamming weight three, so every column has odd weight
// and no two columns are equal (the defining property of a Hsiao code).
//
// The bus is a simple request/grant/response-valid protocol in the style of the
// RISC-V cores' native memory interface: a request is accepted in the cycle where
// req and gnt are both high, and its response (rvalid with rdata) arrives exactly one
// cycle later, for reads and writes alike. The fixed one-cycle response latency is a
// choice of this design.
package trik_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DataWidth   = 32;
  localparam int unsigned AddrWidth   = 32;
  localparam int unsigned EccWidth    = 7;
  localparam int unsigned CodeWidth   = DataWidth + EccWidth;  // 39
  localparam int unsigned BeWidth     = DataWidth / 8;
  localparam int unsigned NumCores    = 3;

  // ---------------------------------------------------------------- address map
  // Base addresses follow the usual layout of the microcontroller platform the SoC
  // derives from; they are a choice of this design.
  localparam logic [AddrWidth-1:0] MemBase      = 32'h1C00_0000;
  localparam logic [AddrWidth-1:0] CtrlRegBase  = 32'h1A10_4000;
  localparam logic [AddrWidth-1:0] CtrlRegMask  = 32'hFFFF_F000;  // 4 KiB register window

  // ---------------------------------------------------------------- bus types
  typedef struct packed {
    logic                 req;
    logic                 we;
    logic [BeWidth-1:0]   be;
    logic [AddrWidth-1:0] addr;
    logic [DataWidth-1:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic                 gnt;
    logic                 rvalid;
    logic [DataWidth-1:0] rdata;
  } bus_rsp_t;

  // Everything a core drives (Fig. "TCLS": status, instruction and data outputs).
  typedef struct packed {
    bus_req_t instr;
    bus_req_t data;
    logic     debug_halt;
    logic     irq_ack;
    logic     busy;
  } core_out_t;

  // Everything a core receives (control, instruction and data inputs).
  typedef struct packed {
    bus_rsp_t             instr;
    bus_rsp_t             data;
    logic                 fetch_enable;
    logic [AddrWidth-1:0] boot_addr;
    logic [3:0]           core_id;
    logic                 debug_req;
    logic [31:0]          irq;
  } core_in_t;

  localparam int unsigned CoreOutWidth = $bits(core_out_t);

  // Interrupt line used to ask the lockstep cores to run the recovery routine.
  localparam int unsigned RecoveryIrq = 31;

  // ---------------------------------------------------------------- control registers
  // Word offsets (byte address bits [7:2]) inside the control register window.
  typedef enum logic [5:0] {
    RegMode         = 6'd0,  // bit0: 1 = lockstep, 0 = independent
    RegRecovery     = 6'd1,  // rd: {fault_id[2:0], pending}; wr bit0: resynchronise cores
    RegScrubInt     = 6'd2,  // cycles between scrub checks per bank, 0 = off
    RegTclsCnt      = 6'd3,  // lockstep mismatches seen by the voters
    RegAccCorrCnt   = 6'd4,  // single-bit errors found on system access
    RegAccUncCnt    = 6'd5,  // multi-bit errors found on system access
    RegScrubCorrCnt = 6'd6,  // errors corrected by the scrubbers
    RegScrubUncCnt  = 6'd7   // uncorrectable errors found by the scrubbers
  } ctrl_reg_e;

  // ---------------------------------------------------------------- Hsiao (39,32)
  typedef logic [EccWidth-1:0]  hsiao_cols_t [DataWidth];
  typedef logic [DataWidth-1:0] hsiao_rows_t [EccWidth];

  // Columns of the check matrix: entry i belongs to data bit i.
  function automatic hsiao_cols_t hsiao_make_cols();
    hsiao_cols_t cols;
    int unsigned n;
    n = 0;
    for (int unsigned v = 0; v < (1 << EccWidth); v++) begin
      if ($countones(v[EccWidth-1:0]) == 3 && n < DataWidth) begin
        cols[n] = v[EccWidth-1:0];
        n++;
      end
    end
    return cols;
  endfunction

  localparam hsiao_cols_t HsiaoCol = hsiao_make_cols();

  // Rows of the data part of the check matrix: the data bits each check bit covers.
  function automatic hsiao_rows_t hsiao_make_rows();
    hsiao_rows_t          rows;
    logic [DataWidth-1:0] m;
    logic [EccWidth-1:0]  c;
    for (int unsigned r = 0; r < EccWidth; r++) begin
      for (int unsigned i = 0; i < DataWidth; i++) begin
        c    = HsiaoCol[i];
        m[i] = c[r];
      end
      rows[r] = m;
    end
    return rows;
  endfunction

  localparam hsiao_rows_t HsiaoRow = hsiao_make_rows();

  function automatic logic [EccWidth-1:0] hsiao_checks(input logic [DataWidth-1:0] d);
    logic [EccWidth-1:0] p;
    for (int unsigned r = 0; r < EccWidth; r++) p[r] = ^(d & HsiaoRow[r]);
    return p;
  endfunction

endpackage
