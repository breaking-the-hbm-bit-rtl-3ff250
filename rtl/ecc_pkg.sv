// ecc_pkg: shared widths, types and Galois-field arithmetic for the hybrid
// Reed-Solomon / CRC memory-controller ECC.
//
// The data unit of the scheme is a 32-byte chunk. Every chunk that is protected
// travels to the memory with its own 2-byte CRC, so one memory transfer unit is
// 34 bytes (272 bits): {chunk[255:0], crc[15:0]}. Chunk size, CRC size and the
// 34-byte unit follow the paper. The Reed-Solomon code works on 16-bit symbols
// in GF(2^16) so that a codeword of 17 chunks (272 symbols) fits in one field;
// the symbol size, the field polynomial and the symbol order are this design's
// own choices (the paper does not name them).
//
// Symbol order: symbol k of a chunk is chunk[16*k +: 16]; symbol 0 is the first
// symbol of the chunk on the codeword's polynomial, i.e. the one of highest
// degree. Chunk 0 of a codeword holds the highest-degree symbols, parity chunks
// come last.
package ecc_pkg;

  localparam int CHUNK_W  = 256;            // 32 B data or parity chunk
  localparam int CRC_W    = 16;             // 2 B CRC per chunk
  localparam int UNIT_W   = CHUNK_W + CRC_W; // 34 B memory transfer unit
  localparam int SYM_W    = 16;             // RS symbol width, GF(2^16)
  localparam int SYMS     = CHUNK_W / SYM_W; // symbols per chunk (16)
  localparam logic [16:0] GF_POLY = 17'h1100B; // x^16+x^12+x^3+x+1, primitive
  localparam int GF_ORDER = 65535;          // multiplicative group order

  typedef logic [CHUNK_W-1:0] chunk_t;
  typedef logic [CRC_W-1:0]   crc_t;
  typedef logic [UNIT_W-1:0]  unit_t;
  typedef logic [SYM_W-1:0]   sym_t;

  // Host-side request types of the ECC controller.
  typedef enum logic [1:0] {
    OP_SEQ_RD = 2'd0,
    OP_SEQ_WR = 2'd1,
    OP_RND_RD = 2'd2,
    OP_RND_WR = 2'd3
  } ecc_op_e;

  // Multiply by x (alpha) modulo GF_POLY.
  function automatic sym_t gf_xtime(input sym_t a);
    return {a[14:0], 1'b0} ^ (a[15] ? GF_POLY[15:0] : 16'h0000);
  endfunction

  // GF(2^16) multiply, shift-and-add with reduction by GF_POLY. Written out
  // term by term (no loop) so that synthesis front ends unroll less.
  function automatic sym_t gf_mul(input sym_t a, input sym_t b);
    sym_t a1, a2, a3, a4, a5, a6, a7, a8, a9, a10, a11, a12, a13, a14, a15;
    a1  = gf_xtime(a);   a2  = gf_xtime(a1);  a3  = gf_xtime(a2);  a4  = gf_xtime(a3);
    a5  = gf_xtime(a4);  a6  = gf_xtime(a5);  a7  = gf_xtime(a6);  a8  = gf_xtime(a7);
    a9  = gf_xtime(a8);  a10 = gf_xtime(a9);  a11 = gf_xtime(a10); a12 = gf_xtime(a11);
    a13 = gf_xtime(a12); a14 = gf_xtime(a13); a15 = gf_xtime(a14);
    return ({16{b[0]}}  & a)   ^ ({16{b[1]}}  & a1)  ^ ({16{b[2]}}  & a2)  ^ ({16{b[3]}}  & a3)  ^
           ({16{b[4]}}  & a4)  ^ ({16{b[5]}}  & a5)  ^ ({16{b[6]}}  & a6)  ^ ({16{b[7]}}  & a7)  ^
           ({16{b[8]}}  & a8)  ^ ({16{b[9]}}  & a9)  ^ ({16{b[10]}} & a10) ^ ({16{b[11]}} & a11) ^
           ({16{b[12]}} & a12) ^ ({16{b[13]}} & a13) ^ ({16{b[14]}} & a14) ^ ({16{b[15]}} & a15);
  endfunction

  // alpha^e with alpha = x (0x0002), e taken modulo 65535.
  function automatic sym_t gf_alpha_pow(input int unsigned e);
    sym_t r;
    sym_t sq;
    int unsigned ee;
    ee = e % GF_ORDER;
    r  = 16'h0001;
    sq = 16'h0002;
    for (int i = 0; i < 16; i++) begin
      if (ee[i]) r = gf_mul(r, sq);
      sq = gf_mul(sq, sq);
    end
    return r;
  endfunction

  // Multiplicative inverse: a^(2^16-2) = a^2 * a^4 * ... * a^(2^15).
  // Returns 0 for a == 0. Written out without a loop, like gf_mul.
  function automatic sym_t gf_inv(input sym_t a);
    sym_t s1, s2, s3, s4, s5, s6, s7, s8, s9, s10, s11, s12, s13, s14, s15;
    s1  = gf_mul(a, a);     s2  = gf_mul(s1, s1);   s3  = gf_mul(s2, s2);
    s4  = gf_mul(s3, s3);   s5  = gf_mul(s4, s4);   s6  = gf_mul(s5, s5);
    s7  = gf_mul(s6, s6);   s8  = gf_mul(s7, s7);   s9  = gf_mul(s8, s8);
    s10 = gf_mul(s9, s9);   s11 = gf_mul(s10, s10); s12 = gf_mul(s11, s11);
    s13 = gf_mul(s12, s12); s14 = gf_mul(s13, s13); s15 = gf_mul(s14, s14);
    return gf_mul(gf_mul(gf_mul(gf_mul(gf_mul(s1, s2), gf_mul(s3, s4)),
                                gf_mul(gf_mul(s5, s6), gf_mul(s7, s8))),
                         gf_mul(gf_mul(gf_mul(s9, s10), gf_mul(s11, s12)),
                                gf_mul(s13, s14))), s15);
  endfunction

endpackage
