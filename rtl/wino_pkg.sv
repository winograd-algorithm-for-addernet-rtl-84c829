// wino_pkg: constants, widths and transform tables shared by the Winograd
// AdderNet layer engine.
//
// The engine computes one adder layer with the F(2x2,3x3) Winograd form
//   Y = A^T [ -| g_hat (-) B^T d B | ] A
// where d is a 4x4 tile of the zero-padded input, g_hat a 4x4 kernel that
// lives directly in the Winograd domain, (-) the element-wise difference and
// |.| the element-wise absolute value.
//
// B is the standard F(2,3) input transform. Every row of B^T holds exactly
// two non-zero entries (+1 or -1), so one element of B^T d B is a signed sum
// of four input pixels; bt_idx/bt_sgn give those two entries per row.
// The output transform uses one of the four balanced matrices A_0..A_3, in
// which each column of A holds the same number of +1 and -1 entries; A_0 is
// the default. Only the element values of B^T and A_i^T are taken from the
// algorithm; word widths are this design's choice and are sized so that no
// intermediate value can overflow (full precision, no rounding).
package wino_pkg;

  // Tile geometry of F(2x2,3x3).
  localparam int unsigned TIN    = 4;            // input tile is 4x4
  localparam int unsigned TELEMS = TIN * TIN;    // 16 Winograd-domain elements

  // Layer engine stage, reported on the top's stage output.
  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,
    ST_PAD    = 3'd1,
    ST_ITRANS = 3'd2,
    ST_CALC   = 3'd3,
    ST_OTRANS = 3'd4
  } stage_e;

  // Word widths derived from the input width dw (two's complement).
  // B^T d B adds four inputs: two extra bits.
  function automatic int unsigned v_width(int unsigned dw);
    return dw + 2;
  endfunction
  // |g_hat - v|, with g_hat of dw bits and v of v_width bits: one more bit
  // than v, held unsigned.
  function automatic int unsigned abs_width(int unsigned dw);
    return dw + 3;
  endfunction
  // -(sum over cin of |g_hat - v|): abs width + log2(cin) + sign bit.
  function automatic int unsigned m_width(int unsigned dw, int unsigned cin);
    return abs_width(dw) + $clog2(cin) + 1;
  endfunction
  // One output pixel is a signed sum of nine m values: four more bits.
  function automatic int unsigned y_width(int unsigned dw, int unsigned cin);
    return m_width(dw, cin) + 4;
  endfunction

  // Column index (0..3) of the p-th (p = 0,1) non-zero entry of row r of B^T.
  //   B^T = [ 1  0 -1  0 ]
  //         [ 0  1  1  0 ]
  //         [ 0 -1  1  0 ]
  //         [ 0  1  0 -1 ]
  function automatic logic [1:0] bt_idx(logic [1:0] r, logic p);
    unique case (r)
      2'd0:    return p ? 2'd2 : 2'd0;
      2'd1:    return p ? 2'd2 : 2'd1;
      2'd2:    return p ? 2'd2 : 2'd1;
      default: return p ? 2'd3 : 2'd1;
    endcase
  endfunction

  // Sign of that entry: 1 means -1, 0 means +1.
  function automatic logic bt_neg(logic [1:0] r, logic p);
    unique case (r)
      2'd0:    return p;          // +1, -1
      2'd1:    return 1'b0;       // +1, +1
      2'd2:    return !p;         // -1, +1
      default: return p;          // +1, -1
    endcase
  endfunction

  // Entry (r, i) of A_sel^T, r = 0..1, i = 0..3, coded as 2'b01 = +1,
  // 2'b11 = -1, 2'b00 = 0.
  //   A_0^T = [-1  1  1  0 ; 0  1 -1  1]
  //   A_1^T = [-1 -1  1  0 ; 0 -1 -1  1]
  //   A_2^T = [ 1 -1 -1  0 ; 0 -1  1 -1]
  //   A_3^T = [ 1  1 -1  0 ; 0  1  1 -1]
  typedef logic [1:0] coef_t;
  localparam coef_t CP = 2'b01;
  localparam coef_t CN = 2'b11;
  localparam coef_t CZ = 2'b00;

  function automatic coef_t at_coef(int unsigned sel, logic r, logic [1:0] i);
    coef_t row0 [4];
    coef_t row1 [4];
    unique case (sel)
      0: begin row0 = '{CN, CP, CP, CZ}; row1 = '{CZ, CP, CN, CP}; end
      1: begin row0 = '{CN, CN, CP, CZ}; row1 = '{CZ, CN, CN, CP}; end
      2: begin row0 = '{CP, CN, CN, CZ}; row1 = '{CZ, CN, CP, CN}; end
      default: begin row0 = '{CP, CP, CN, CZ}; row1 = '{CZ, CP, CP, CN}; end
    endcase
    return r ? row1[i] : row0[i];
  endfunction

  // Product of two coefficients, same coding.
  function automatic coef_t coef_mul(coef_t a, coef_t b);
    if (a == CZ || b == CZ) return CZ;
    return (a == b) ? CP : CN;
  endfunction

endpackage
