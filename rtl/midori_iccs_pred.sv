// midori_iccs_pred: predicted interleaved cumulative column signatures for
// the Midori64 M_C MixColumn.
//
// The even rows (0 and 2) and the odd rows (1 and 3) of each output column
// are summed separately. For M_C the coefficients cancel pairwise:
//   r0 + r8  = a0 + a8,     r4 + r12 = a4 + a12   (column 0, likewise others).
// Two signatures per column catch more fault patterns than one: a fault that
// hits an even and an odd row with equal values cancels in the CCS but not
// here.
//
// Interface: a (input state), p[c][0] = even-row prediction, p[c][1] =
// odd-row prediction of column c. Combinational. Formulas from the paper.
module midori_iccs_pred
  import mixcol_pkg::*;
(
  input  state_t a,
  output isig_t  p
);

  always_comb
    for (int c = 0; c < 4; c++) begin
      p[c][0] = a[c]   ^ a[c+8];
      p[c][1] = a[c+4] ^ a[c+12];
    end

endmodule
