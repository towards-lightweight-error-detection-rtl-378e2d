// tb_ref_pkg: reference model used by the testbenches.
//
// Holds a plain 4x4 matrix-times-state multiplication over GF(2^4) mod
// x^4 + x + 1, written independently of the design: cells are multiplied as
// polynomials (carry-less) and the 7-bit product is then reduced. The two
// matrices are entered here again from their definitions, and the column
// signatures are formed from the reference result, not from the design's
// closed-form predictions.
package tb_ref_pkg;

  typedef logic [63:0] st_t;
  typedef logic [3:0] mat_t [16];            // row-major 4x4 matrix

  localparam mat_t MAT_MIDORI_MC = '{0,1,1,1, 1,0,1,1, 1,1,0,1, 1,1,1,0};
  localparam mat_t MAT_LED = '{4'h4,4'h1,4'h2,4'h2, 4'h8,4'h6,4'h5,4'h6,
                               4'hB,4'hE,4'hA,4'h9, 4'h2,4'h2,4'hF,4'hB};

  function automatic logic [3:0] cell_of(input st_t s, input int i);
    return s[4*i +: 4];
  endfunction

  function automatic logic [3:0] ref_mul(input logic [3:0] x, input logic [3:0] y);
    logic [6:0] p = '0;
    for (int i = 0; i < 4; i++) if (y[i]) p ^= 7'(x) << i;
    for (int d = 6; d >= 4; d--) if (p[d]) p ^= 7'b0010011 << (d - 4);
    return p[3:0];
  endfunction

  function automatic st_t ref_mix(input mat_t m, input st_t a);
    st_t r = '0;
    for (int row = 0; row < 4; row++)
      for (int col = 0; col < 4; col++) begin
        logic [3:0] acc = '0;
        for (int k = 0; k < 4; k++) acc ^= ref_mul(m[4*row + k], cell_of(a, 4*k + col));
        r[4*(4*row + col) +: 4] = acc;
      end
    return r;
  endfunction

  // Cumulative column signature of a state, one nibble per column.
  function automatic logic [15:0] ref_ccs(input st_t r);
    logic [15:0] s;
    for (int c = 0; c < 4; c++)
      s[4*c +: 4] = cell_of(r, c) ^ cell_of(r, c+4) ^ cell_of(r, c+8) ^ cell_of(r, c+12);
    return s;
  endfunction

  // Interleaved signatures: bits [8c+3:8c] rows 0+2, [8c+7:8c+4] rows 1+3.
  function automatic logic [31:0] ref_iccs(input st_t r);
    logic [31:0] s;
    for (int c = 0; c < 4; c++) begin
      s[8*c +: 4]     = cell_of(r, c) ^ cell_of(r, c+8);
      s[8*c + 4 +: 4] = cell_of(r, c+4) ^ cell_of(r, c+12);
    end
    return s;
  endfunction

  function automatic st_t rand_state();
    return {$urandom(), $urandom()};
  endfunction

endpackage
