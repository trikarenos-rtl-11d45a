// ecc_bank: one ECC-protected memory bank with its control unit.
//
// A 32-bit bus port in front of an SRAM that stores 39-bit Hsiao codewords. The control
// unit routes writes through the encoder and reads through the decoder, performs
// read-modify-write for sub-word writes, and shares the SRAM port with the bank's
// scrubber.
//
// Port protocol (trik_pkg): a request is taken when req_i and gnt_o are high; rvalid_o
// follows one cycle later, with corrected read data for reads. addr_i is the word index
// inside the bank.
//
// Read-modify-write: a write with a byte enable other than all ones is granted at once,
// like any other access, and the old word is read in that cycle. In the next cycle the
// old word, corrected by the decoder, is merged with the new bytes, re-encoded and
// written. That cycle owns the SRAM port, so a request arriving in it sees gnt_o low and
// waits one cycle; every other access is granted in the cycle it arrives.
//
// Port priority per cycle: read-modify-write completion, then the system request, then
// the scrubber. Event outputs pulse for one cycle: acc_corr_o / acc_unc_o when the word
// read for a system read or a read-modify-write holds a correctable / uncorrectable
// error, scrub_corr_o / scrub_unc_o from the scrubber. Errors found on access are
// corrected in the returned data only; repairing the stored word is left to the scrubber.
//
// Source design: encoder and decoder per bank, a control unit doing read-modify-write
// that accepts sub-word writes immediately and delays only a back-to-back access, and a
// scrubber that yields to the system. Own choices: single-cycle SRAM latency, the
// priority order, and that a read-modify-write on an uncorrectable word still writes.
// Lint note: rst_ni also appears in the assertion's disable iff, which a linter may flag
// as a signal used both as asynchronous reset and synchronously; the flops use it only
// as their asynchronous reset.
// The decoder's syndrome output is left open on purpose: the single/multi flags carry
// everything the control unit needs.
module ecc_bank #(
  parameter int unsigned NumWords = 8192,
  localparam int unsigned AW      = (NumWords > 1) ? $clog2(NumWords) : 1
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  // system port
  input  logic                           req_i,
  input  logic                           we_i,
  input  logic [trik_pkg::BeWidth-1:0]   be_i,
  input  logic [AW-1:0]                  addr_i,
  input  logic [trik_pkg::DataWidth-1:0] wdata_i,
  output logic                           gnt_o,
  output logic                           rvalid_o,
  output logic [trik_pkg::DataWidth-1:0] rdata_o,
  // scrubber configuration
  input  logic [31:0]                    scrub_interval_i,
  // error events
  output logic                           acc_corr_o,
  output logic                           acc_unc_o,
  output logic                           scrub_corr_o,
  output logic                           scrub_unc_o
);
  import trik_pkg::*;

  // read-modify-write state
  logic                 rmw_q;
  logic [AW-1:0]        rmw_addr_q;
  logic [BeWidth-1:0]   rmw_be_q;
  logic [DataWidth-1:0] rmw_wdata_q;
  // what was read in the previous cycle
  logic                 rsp_q, sysrd_q, scrd_q;

  // SRAM port
  logic                 sram_req, sram_we;
  logic [AW-1:0]        sram_addr;
  logic [CodeWidth-1:0] sram_wdata, sram_rdata;

  // coding
  logic [DataWidth-1:0] enc_in, dec_data, merged;
  logic [CodeWidth-1:0] enc_out, dec_code;
  logic                 dec_single, dec_multi;

  // scrubber
  logic                 sc_req, sc_we, sc_gnt;
  logic [AW-1:0]        sc_addr;
  logic [CodeWidth-1:0] sc_wdata;

  logic sys_take, partial;

  hsiao_enc u_enc (.data_i(enc_in), .code_o(enc_out));

  hsiao_dec u_dec (
    .code_i      (sram_rdata),
    .data_o      (dec_data),
    .code_o      (dec_code),
    .syndrome_o  (),
    .single_err_o(dec_single),
    .multi_err_o (dec_multi)
  );

  sram_bank #(.NumWords(NumWords), .Width(CodeWidth)) u_sram (
    .clk_i  (clk_i),
    .req_i  (sram_req),
    .we_i   (sram_we),
    .addr_i (sram_addr),
    .wdata_i(sram_wdata),
    .rdata_o(sram_rdata)
  );

  always_comb begin
    for (int unsigned b = 0; b < BeWidth; b++) begin
      merged[8*b +: 8] = rmw_be_q[b] ? rmw_wdata_q[8*b +: 8] : dec_data[8*b +: 8];
    end
  end

  assign partial  = we_i && (be_i != '1);
  assign gnt_o    = req_i && !rmw_q;
  assign sys_take = req_i && gnt_o;
  assign sc_gnt   = sc_req && !rmw_q && !req_i;

  always_comb begin
    sram_req   = 1'b0;
    sram_we    = 1'b0;
    sram_addr  = addr_i;
    enc_in     = wdata_i;
    sram_wdata = enc_out;
    if (rmw_q) begin
      sram_req   = 1'b1;
      sram_we    = 1'b1;
      sram_addr  = rmw_addr_q;
      enc_in     = merged;
    end else if (req_i) begin
      sram_req   = 1'b1;
      sram_we    = we_i && !partial;
    end else if (sc_req) begin
      sram_req   = 1'b1;
      sram_we    = sc_we;
      sram_addr  = sc_addr;
      sram_wdata = sc_wdata;
    end
  end

  ecc_scrubber #(.NumWords(NumWords)) u_scrub (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .interval_i  (scrub_interval_i),
    .req_o       (sc_req),
    .we_o        (sc_we),
    .addr_o      (sc_addr),
    .wdata_o     (sc_wdata),
    .gnt_i       (sc_gnt),
    .chk_single_i(scrd_q && dec_single),
    .chk_multi_i (scrd_q && dec_multi),
    .chk_code_i  (dec_code),
    .sys_we_i    (rmw_q || (req_i && we_i && !partial)),
    .sys_addr_i  (rmw_q ? rmw_addr_q : addr_i),
    .scrub_corr_o(scrub_corr_o),
    .scrub_unc_o (scrub_unc_o)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rmw_q       <= 1'b0;
      rmw_addr_q  <= '0;
      rmw_be_q    <= '0;
      rmw_wdata_q <= '0;
      rsp_q       <= 1'b0;
      sysrd_q     <= 1'b0;
      scrd_q      <= 1'b0;
    end else begin
      rmw_q   <= sys_take && partial;
      rsp_q   <= sys_take;
      sysrd_q <= sys_take && (!we_i || partial);
      scrd_q  <= sc_gnt && !sc_we;
      if (sys_take && partial) begin
        rmw_addr_q  <= addr_i;
        rmw_be_q    <= be_i;
        rmw_wdata_q <= wdata_i;
      end
    end
  end

  assign rvalid_o   = rsp_q;
  assign rdata_o    = (rsp_q && sysrd_q && !rmw_q) ? dec_data : '0;
  assign acc_corr_o = sysrd_q && dec_single;
  assign acc_unc_o  = sysrd_q && dec_multi;

  a_rmw_stalls: assert property (@(posedge clk_i) disable iff (!rst_ni) rmw_q |-> !gnt_o);
endmodule
