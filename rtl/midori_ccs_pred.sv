// midori_ccs_pred: predicted cumulative column signature (CCS) for the
// Midori64 M_C MixColumn.
//
// Adding the four outputs of a column, r0+r4+r8+r12, every input cell
// appears with coefficient 0+1+1+1 = 1, so the signature is predicted from
// the input alone as P = a0 + a4 + a8 + a12 (per column). A fault in the
// MixColumn that changes the XOR of an output column makes the actual
// signature differ from this prediction.
//
// Interface: a (MixColumn input state), p (one predicted nibble per column,
// p[c] for column c). Combinational. Formula from the paper.
module midori_ccs_pred
  import mixcol_pkg::*;
(
  input  state_t a,
  output csig_t  p
);

  always_comb
    for (int c = 0; c < 4; c++)
      p[c] = a[c] ^ a[c+4] ^ a[c+8] ^ a[c+12];

endmodule
