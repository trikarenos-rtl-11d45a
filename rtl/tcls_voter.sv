// tcls_voter: bitwise two-out-of-three majority voter with error reporting.
//
// Each output bit is the majority of the three input bits. mismatch_o is high when the
// three inputs are not all equal. fault_id_o[i] is high when input i differs from the
// voted value in at least one bit, which names the core that left lockstep (with two
// cores failing in different bits both are named). Purely combinational.
// The voter with mismatch and fault-ID outputs follows the source design; the one-hot
// fault-ID encoding is this design's own.
module tcls_voter #(
  parameter int unsigned Width = 32
) (
  input  logic [Width-1:0] in_i [3],
  output logic [Width-1:0] out_o,
  output logic             mismatch_o,
  output logic [2:0]       fault_id_o
);
  always_comb begin
    out_o = (in_i[0] & in_i[1]) | (in_i[1] & in_i[2]) | (in_i[0] & in_i[2]);
    for (int unsigned i = 0; i < 3; i++) fault_id_o[i] = (in_i[i] != out_o);
    mismatch_o = |fault_id_o;
  end
endmodule
