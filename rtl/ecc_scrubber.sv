// ecc_scrubber: background scrubber of one ECC-protected SRAM bank.
//
// The scrubber walks the bank word by word (address 0 .. NumWords-1, then wraps) and
// checks one word every interval_i cycles; interval_i = 0 switches it off. A check is a
// read through the bank's decoder. When the decoder reports a single-bit error the
// corrected codeword is written back and scrub_corr_o pulses; a multi-bit error pulses
// scrub_unc_o and the word is left as it is (it cannot be repaired). Either way the
// scrubber then moves to the next word.
//
// The scrubber never competes with the system: it raises req_o and the bank grants it
// (gnt_i) only in a cycle in which no system access and no read-modify-write uses the
// SRAM port, so a due check simply waits. A pending write-back is dropped if the system
// writes the same word first, because the new word is freshly encoded.
//
// Timing: read granted in cycle t, decoder result (chk_*_i) valid in t+1, write-back
// requested from t+2 on. A check therefore takes at least two cycles, so the highest rate
// is one word every two cycles.
//
// Source design: one scrubber per bank, configurable rate, yields to the system, corrects
// and logs. This design's own choices: the interval register semantics, the address
// order, dropping the write-back on a conflicting system write, and not repairing
// uncorrectable words.
// Lint note: rst_ni also appears in the assertion's disable iff, which a linter may flag
// as a signal used both as asynchronous reset and synchronously; the flops use it only
// as their asynchronous reset.
module ecc_scrubber #(
  parameter int unsigned NumWords = 8192,
  localparam int unsigned AW      = (NumWords > 1) ? $clog2(NumWords) : 1
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  logic [31:0]                     interval_i,
  // SRAM port request, granted only when the port is idle
  output logic                            req_o,
  output logic                            we_o,
  output logic [AW-1:0]                   addr_o,
  output logic [trik_pkg::CodeWidth-1:0]  wdata_o,
  input  logic                            gnt_i,
  // decoder result for the word read in the previous cycle
  input  logic                            chk_single_i,
  input  logic                            chk_multi_i,
  input  logic [trik_pkg::CodeWidth-1:0]  chk_code_i,
  // system write into the SRAM this cycle (to cancel a stale write-back)
  input  logic                            sys_we_i,
  input  logic [AW-1:0]                   sys_addr_i,
  // events and status
  output logic                            scrub_corr_o,
  output logic                            scrub_unc_o
);
  import trik_pkg::*;

  typedef enum logic [1:0] {ScIdle, ScCheck, ScWrite} sc_state_e;

  sc_state_e            state_q, state_d;
  logic [AW-1:0]        addr_q, addr_d;
  logic [31:0]          cnt_q, cnt_d;
  logic [CodeWidth-1:0] fix_q, fix_d;
  logic                 due;

  function automatic logic [AW-1:0] next_addr(input logic [AW-1:0] a);
    return (a == AW'(NumWords - 1)) ? '0 : a + 1'b1;
  endfunction

  assign due = (interval_i != 0) && (cnt_q >= interval_i - 1);

  always_comb begin
    state_d      = state_q;
    addr_d       = addr_q;
    fix_d        = fix_q;
    cnt_d        = (cnt_q != '1) ? cnt_q + 1 : cnt_q;
    req_o        = 1'b0;
    we_o         = 1'b0;
    wdata_o      = fix_q;
    scrub_corr_o = 1'b0;
    scrub_unc_o  = 1'b0;
    unique case (state_q)
      ScIdle: begin
        req_o = due;
        if (due && gnt_i) begin
          state_d = ScCheck;
          cnt_d   = '0;
        end
      end
      ScCheck: begin
        fix_d = chk_code_i;
        if (chk_single_i) begin
          scrub_corr_o = 1'b1;
          if (sys_we_i && sys_addr_i == addr_q) begin
            addr_d  = next_addr(addr_q);
            state_d = ScIdle;
          end else begin
            state_d = ScWrite;
          end
        end else begin
          scrub_unc_o = chk_multi_i;
          addr_d      = next_addr(addr_q);
          state_d     = ScIdle;
        end
      end
      ScWrite: begin
        if (sys_we_i && sys_addr_i == addr_q) begin
          addr_d  = next_addr(addr_q);
          state_d = ScIdle;
        end else begin
          req_o = 1'b1;
          we_o  = 1'b1;
          if (gnt_i) begin
            addr_d  = next_addr(addr_q);
            state_d = ScIdle;
          end
        end
      end
      default: state_d = ScIdle;
    endcase
  end

  assign addr_o       = addr_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= ScIdle;
      addr_q  <= '0;
      cnt_q   <= '0;
      fix_q   <= '0;
    end else begin
      state_q <= state_d;
      addr_q  <= addr_d;
      cnt_q   <= cnt_d;
      fix_q   <= fix_d;
    end
  end

  // A grant is only meaningful while requesting.
  a_gnt_needs_req: assert property (@(posedge clk_i) disable iff (!rst_ni) gnt_i |-> req_o);
endmodule
