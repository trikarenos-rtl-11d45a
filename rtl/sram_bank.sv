// sram_bank: single-port synchronous SRAM bank, NumWords x Width bits.
//
// Stands for one SRAM macro of the memory; written as a plain array so that it
// simulates and synthesises to a memory. One access per cycle: with req_i high the word
// at addr_i is written when we_i is high, otherwise read; read data appears on rdata_o
// in the next cycle and is held until the next read. Whole words only: byte writes are
// handled by the ECC control unit in front of the bank, since every byte change needs
// new check bits. The size (8192 words of 39 bits per bank) follows the source design.
module sram_bank #(
  parameter int unsigned NumWords = 8192,
  parameter int unsigned Width    = 39,
  localparam int unsigned AW      = (NumWords > 1) ? $clog2(NumWords) : 1
) (
  input  logic             clk_i,
  input  logic             req_i,
  input  logic             we_i,
  input  logic [AW-1:0]    addr_i,
  input  logic [Width-1:0] wdata_i,
  output logic [Width-1:0] rdata_o
);
  logic [Width-1:0] mem [NumWords];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) mem[addr_i] <= wdata_i;
      else      rdata_o     <= mem[addr_i];
    end
  end
endmodule
