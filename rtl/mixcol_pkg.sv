// mixcol_pkg: types, constants and the GF(2^4) arithmetic shared by the
// MixColumn and error-detection modules.
//
// A 64-bit state holds 16 four-bit cells a0..a15, read row by row as a 4x4
// matrix, so column j is (a_j, a_{j+4}, a_{j+8}, a_{j+12}). Cell a_i sits in
// bits [4i+3:4i] of the packed state; inside a cell bit 3 is the x^3
// coefficient. The field is GF(2^4) reduced by x^4 + x + 1, as used by LED.
// The cell packing is this design's choice; the matrices and the polynomial
// follow the cipher specifications as printed in the source description.
package mixcol_pkg;

  typedef logic [3:0] nibble_t;
  typedef nibble_t [15:0] state_t;            // state[i] = cell a_i
  typedef nibble_t [3:0] csig_t;              // one signature nibble per column
  typedef nibble_t [3:0][1:0] isig_t;         // [column][0: rows 0+2, 1: rows 1+3]

  // MixColumn being protected.
  typedef enum logic [0:0] {MIDORI_MC = 1'b0, LED = 1'b1} cipher_e;
  // Signature scheme: cumulative column signature or its interleaved form.
  typedef enum logic [0:0] {CCS = 1'b0, ICCS = 1'b1} scheme_e;

  // Multiply by x in GF(2^4) mod x^4 + x + 1.
  function automatic nibble_t gf_xtime(input nibble_t v);
    return {v[2:0], 1'b0} ^ (v[3] ? 4'h3 : 4'h0);
  endfunction

  // Multiply a cell by a constant c (shift and add). With a constant c the
  // loop unrolls to a fixed XOR network.
  function automatic nibble_t gf_mul(input nibble_t c, input nibble_t v);
    nibble_t acc = '0;
    nibble_t p = v;
    for (int b = 0; b < 4; b++) begin
      if (c[b]) acc ^= p;
      p = gf_xtime(p);
    end
    return acc;
  endfunction

endpackage
