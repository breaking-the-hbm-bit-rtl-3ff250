// rs_encoder: systematic Reed-Solomon encoder for the large cross-channel
// codeword, taking one 32-byte data chunk (16 GF(2^16) symbols) per cycle.
//
// The paper keeps Reed-Solomon codes but stretches them from the 16/32 B on-die
// words to host-side codewords of hundreds of bytes, made of 32 B data chunks
// and one or more 32 B parity chunks. With the default M = 16 data chunks and
// R = 1 parity chunk a codeword holds 512 B of data at code rate 16/17, the
// rate the paper uses in its motivation; it has NP = 16*R = 16 parity symbols
// and corrects up to 8 symbol errors.
//
// How it works: a linear-feedback shift register divides D(x)*x^NP by the
// generator g(x) = prod_{j=0}^{NP-1} (x + alpha^j) (first root alpha^0, this
// design's choice). The 16 symbols of a chunk are folded in one after another
// inside one clock cycle (symbol 0 first, highest degree). The remainder is the
// parity: parity_o[16*k +: 16] of parity chunk r is the symbol of degree
// NP-1-(16*r+k), matching the symbol order of ecc_pkg.
//
// Interface: clear_i empties the remainder (start of a codeword); in_valid_i
// with in_chunk_i folds one chunk in. parity_o is the remainder after the
// chunks seen so far; after M chunks it is the codeword's parity. clear_i and
// in_valid_i together start a new codeword with that chunk.
// Timing: one chunk per cycle, parity valid the cycle after the last chunk.
module rs_encoder
  import ecc_pkg::*;
#(
  parameter int R = 1  // parity chunks per codeword
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear_i,
  input  logic               in_valid_i,
  input  chunk_t             in_chunk_i,
  output logic [R*CHUNK_W-1:0] parity_o
);

  localparam int NP = R * SYMS;

  // Generator polynomial coefficients g_0..g_NP (g_NP = 1), packed.
  function automatic logic [(NP+1)*SYM_W-1:0] gen_poly();
    sym_t g [NP+1];
    logic [(NP+1)*SYM_W-1:0] packed_g;
    for (int i = 0; i <= NP; i++) g[i] = '0;
    g[0] = 16'h0001;
    for (int j = 0; j < NP; j++) begin
      sym_t root;
      root = gf_alpha_pow(j);
      // multiply g(x) by (x + root)
      for (int i = NP; i >= 1; i--) g[i] = g[i-1] ^ gf_mul(g[i], root);
      g[0] = gf_mul(g[0], root);
    end
    for (int i = 0; i <= NP; i++) packed_g[i*SYM_W +: SYM_W] = g[i];
    return packed_g;
  endfunction

  localparam logic [(NP+1)*SYM_W-1:0] GEN = gen_poly();

  sym_t rem_q [NP];   // rem_q[NP-1] is the highest-degree remainder symbol
  sym_t rem_d [NP];

  always_comb begin
    sym_t fb;
    fb = '0;
    for (int j = 0; j < NP; j++) rem_d[j] = clear_i ? '0 : rem_q[j];
    if (in_valid_i) begin
      for (int k = 0; k < SYMS; k++) begin
        fb = in_chunk_i[k*SYM_W +: SYM_W] ^ rem_d[NP-1];
        for (int j = NP - 1; j >= 1; j--)
          rem_d[j] = rem_d[j-1] ^ gf_mul(fb, GEN[j*SYM_W +: SYM_W]);
        rem_d[0] = gf_mul(fb, GEN[0 +: SYM_W]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NP; j++) rem_q[j] <= '0;
    end else begin
      for (int j = 0; j < NP; j++) rem_q[j] <= rem_d[j];
    end
  end

  // Parity chunk r, symbol k  <-  remainder symbol of degree NP-1-(16r+k).
  always_comb begin
    for (int r = 0; r < R; r++)
      for (int k = 0; k < SYMS; k++)
        parity_o[(r*CHUNK_W) + k*SYM_W +: SYM_W] = rem_q[NP-1-(r*SYMS+k)];
  end

endmodule
