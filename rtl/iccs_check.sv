// iccs_check: actual interleaved column signatures and comparison.
//
// For each output column the even-row signature r0+r8 and the odd-row
// signature r4+r12 are formed with two nibble XORs (8 XOR gates per column)
// and compared with the two predicted signatures. err_col[c] is raised when
// either differs; err is the OR over columns. The comparator is this
// design's choice.
//
// Interface: r (MixColumn output, possibly faulty), p[c][0]/p[c][1]
// (predicted even/odd signatures), err_col, err. Combinational.
module iccs_check
  import mixcol_pkg::*;
(
  input  state_t     r,
  input  isig_t      p,
  output logic [3:0] err_col,
  output logic       err
);

  always_comb begin
    for (int c = 0; c < 4; c++)
      err_col[c] = |(r[c]   ^ r[c+8]  ^ p[c][0]) | |(r[c+4] ^ r[c+12] ^ p[c][1]);
    err = |err_col;
  end

endmodule
