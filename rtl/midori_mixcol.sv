// midori_mixcol: Midori64 MixColumn with the involutive almost-MDS matrix
// M_C = circ(0,1,1,1).
//
// Every entry of M_C is 0 or 1, so no field multiplication is needed: each
// output cell is the XOR of the other three cells of its column,
// r_i = a_j + a_k + a_l. It is written here as the column sum s = a0+a4+a8+a12
// followed by r_i = s + a_i, which gives the same function; synthesis is free
// to restructure the XOR network. Because M_C * M_C = I, the same module is
// its own inverse, which the FST unit relies on.
//
// Interface: a (input state, cell a_i in bits [4i+3:4i]) and r (output
// state). Purely combinational, no clock. The matrix follows the paper; the
// cell packing is this design's choice (see mixcol_pkg).
module midori_mixcol
  import mixcol_pkg::*;
(
  input  state_t a,
  output state_t r
);

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      nibble_t s;
      s = a[c] ^ a[c+4] ^ a[c+8] ^ a[c+12];
      for (int row = 0; row < 4; row++)
        r[4*row + c] = s ^ a[4*row + c];
    end
  end

endmodule
