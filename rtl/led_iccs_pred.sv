// led_iccs_pred: predicted interleaved cumulative column signatures for the
// LED MixColumn.
//
// Adding rows 0 and 2 of the LED matrix and rows 1 and 3 gives
//   r0 + r8  = F.a0 + F.a4 + 8.a8 + B.a12
//   r4 + r12 = A.a0 + 4.a4 + A.a8 + D.a12
// for column 0, and the same coefficients for the other columns.
//
// Interface: a (input state), p[c][0] = even-row prediction, p[c][1] =
// odd-row prediction of column c. Combinational. Coefficients follow the
// paper.
module led_iccs_pred
  import mixcol_pkg::*;
(
  input  state_t a,
  output isig_t  p
);

  localparam nibble_t KE [4] = '{4'hF, 4'hF, 4'h8, 4'hB};
  localparam nibble_t KO [4] = '{4'hA, 4'h4, 4'hA, 4'hD};

  always_comb
    for (int c = 0; c < 4; c++) begin
      p[c][0] = '0;
      p[c][1] = '0;
      for (int k = 0; k < 4; k++) begin
        p[c][0] ^= gf_mul(KE[k], a[4*k + c]);
        p[c][1] ^= gf_mul(KO[k], a[4*k + c]);
      end
    end

endmodule
