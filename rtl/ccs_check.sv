// ccs_check: actual cumulative column signature and comparison.
//
// For each output column the actual signature r0+r4+r8+r12 is formed with
// three nibble XORs (12 XOR gates per column) and compared with the
// predicted signature. A column whose two signatures differ raises
// err_col[c]; err is their OR. The comparison (XOR then OR-reduce) is this
// design's choice: the paper gives the signature, not the comparator.
//
// Interface: r (MixColumn output as computed, possibly faulty), p
// (predicted signatures), err_col, err. Combinational.
module ccs_check
  import mixcol_pkg::*;
(
  input  state_t     r,
  input  csig_t      p,
  output logic [3:0] err_col,
  output logic       err
);

  always_comb begin
    for (int c = 0; c < 4; c++)
      err_col[c] = |(r[c] ^ r[c+4] ^ r[c+8] ^ r[c+12] ^ p[c]);
    err = |err_col;
  end

endmodule
