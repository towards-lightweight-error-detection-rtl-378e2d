// led_mixcol: LED MixColumn, R = M x A over GF(2^4) mod x^4 + x + 1, with
//   M = [4 1 2 2; 8 6 5 6; B E A 9; 2 2 F B].
//
// Each output cell r_{4*row+c} is the sum over k of M[row][k] * a_{4k+c}.
// The constant multiplications come from gf_mul in mixcol_pkg, which unrolls
// into fixed XOR networks (for example r0 = x^2.a0 + a4 + x.a8 + x.a12).
//
// Interface: a (input state), r (output state). Purely combinational. The
// matrix and the polynomial follow the paper; the cell packing is this
// design's choice.
module led_mixcol
  import mixcol_pkg::*;
(
  input  state_t a,
  output state_t r
);

  // LED MixColumn matrix, row by row: M[row][col].
  localparam nibble_t LED_M [4][4] = '{
    '{4'h4, 4'h1, 4'h2, 4'h2},
    '{4'h8, 4'h6, 4'h5, 4'h6},
    '{4'hB, 4'hE, 4'hA, 4'h9},
    '{4'h2, 4'h2, 4'hF, 4'hB}};

  always_comb begin
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++) begin
        nibble_t acc;
        acc = '0;
        for (int k = 0; k < 4; k++)
          acc ^= gf_mul(LED_M[row][k], a[4*k + c]);
        r[4*row + c] = acc;
      end
  end

endmodule
