// tb_hsiao_ref_pkg: reference model of the (39,32) Hsiao code for the testbenches.
//
// Written independently of the RTL: the check-matrix column of data bit i is found by
// counting bits by hand over all 7-bit values in ascending order and keeping those with
// exactly three ones; the check bits are then accumulated column by column.
package tb_hsiao_ref_pkg;
  function automatic logic [6:0] ref_col(input int i);
    int n, w;
    n = 0;
    for (int v = 0; v < 128; v++) begin
      w = 0;
      for (int b = 0; b < 7; b++) w += (v >> b) & 1;
      if (w == 3) begin
        if (n == i) return 7'(v);
        n++;
      end
    end
    return 7'h0;
  endfunction

  function automatic logic [38:0] ref_encode(input logic [31:0] d);
    logic [6:0] c;
    c = 7'h0;
    for (int i = 0; i < 32; i++) if (d[i]) c ^= ref_col(i);
    return {c, d};
  endfunction
endpackage
