// led_ccs_pred: predicted cumulative column signature (CCS) for the LED
// MixColumn.
//
// Summing the columns of the LED matrix M gives the row vector
// (4+8+B+2, 1+6+E+2, 2+5+A+F, 2+6+9+B) = (5, B, 2, 6), so for each column
//   r0 + r4 + r8 + r12 = 5.a0 + B.a4 + 2.a8 + 6.a12   over GF(2^4).
// The prediction therefore costs one row of constant multipliers per column
// instead of the four rows of the MixColumn itself.
//
// Interface: a (input state), p[c] (prediction for column c). Combinational.
// The coefficients follow the paper.
module led_ccs_pred
  import mixcol_pkg::*;
(
  input  state_t a,
  output csig_t  p
);

  localparam nibble_t K [4] = '{4'h5, 4'hB, 4'h2, 4'h6};

  always_comb
    for (int c = 0; c < 4; c++) begin
      p[c] = '0;
      for (int k = 0; k < 4; k++)
        p[c] ^= gf_mul(K[k], a[4*k + c]);
    end

endmodule
