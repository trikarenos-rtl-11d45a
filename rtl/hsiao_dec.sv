// hsiao_dec: combinational (39,32) Hsiao SECDED decoder.
//
// The syndrome is the XOR of the stored check bits with the check bits recomputed from
// the stored data. A zero syndrome means a clean word. A syndrome of odd weight that
// equals one column of the check matrix marks a single flipped bit: a data bit is
// inverted back, a flipped check bit needs no data change. Any other non-zero syndrome
// (even weight, or odd weight matching no column) is reported as uncorrectable.
// Outputs: corrected data, the corrected codeword (used by the scrubber for write-back),
// single_err_o (corrected) and multi_err_o (detected, not correctable). No latency.
// The SECDED behaviour follows the source design; the matrix is this design's own.
module hsiao_dec
  import trik_pkg::*;
(
  input  logic [CodeWidth-1:0] code_i,
  output logic [DataWidth-1:0] data_o,
  output logic [CodeWidth-1:0] code_o,
  output logic [EccWidth-1:0]  syndrome_o,
  output logic                 single_err_o,
  output logic                 multi_err_o
);
  logic [EccWidth-1:0] syn;
  logic [CodeWidth-1:0] flip;

  always_comb begin
    syn  = code_i[CodeWidth-1:DataWidth] ^ hsiao_checks(code_i[DataWidth-1:0]);
    flip = '0;
    for (int unsigned i = 0; i < DataWidth; i++) begin
      flip[i] = (syn == HsiaoCol[i]);
    end
    for (int unsigned r = 0; r < EccWidth; r++) begin
      flip[DataWidth+r] = (syn == EccWidth'(1 << r));
    end
    syndrome_o   = syn;
    single_err_o = |flip;
    multi_err_o  = (syn != '0) && !(|flip);
    code_o       = code_i ^ flip;
    data_o       = code_o[DataWidth-1:0];
  end
endmodule
