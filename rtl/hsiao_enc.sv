// hsiao_enc: combinational (39,32) Hsiao SECDED encoder.
//
// Each of the seven check bits is the XOR of the data bits selected by one row of the
// check matrix defined in trik_pkg (every data column has weight three). The output
// codeword is {check[6:0], data[31:0]}. Purely combinational, no latency: it sits on the
// write path between the bank control unit and the SRAM. Using a Hsiao code with 7 check
// bits per 32-bit word follows the source design; the matrix and bit order are this
// design's own.
module hsiao_enc
  import trik_pkg::*;
(
  input  logic [DataWidth-1:0] data_i,
  output logic [CodeWidth-1:0] code_o
);
  always_comb begin
    code_o = {hsiao_checks(data_i), data_i};
  end
endmodule
