// rs_ref_pkg: reference models for the testbenches, written independently of
// the RTL: GF(2^16) multiply by carry-less product and polynomial reduction,
// a CRC-16/CCITT computed byte by byte, and a Reed-Solomon encoder by long
// division of the whole message polynomial.
package rs_ref_pkg;

  function automatic logic [15:0] ref_mul(input logic [15:0] a, input logic [15:0] b);
    logic [31:0] p;
    p = '0;
    for (int i = 0; i < 16; i++) if (b[i]) p = p ^ (32'(a) << i);
    for (int i = 31; i >= 16; i--) if (p[i]) p = p ^ (32'h1100B << (i - 16));
    return p[15:0];
  endfunction

  function automatic logic [15:0] ref_apow(input int e);
    logic [15:0] r;
    r = 16'h1;
    for (int i = 0; i < e; i++) r = ref_mul(r, 16'h2);
    return r;
  endfunction

  // CRC-16/CCITT-FALSE over the 32 bytes of a chunk, byte 31 (bits 255:248)
  // first, MSB first within a byte.
  function automatic logic [15:0] ref_crc(input logic [255:0] d);
    logic [15:0] c;
    c = 16'hFFFF;
    for (int by = 31; by >= 0; by--) begin
      c = c ^ (16'(d[by*8 +: 8]) << 8);
      for (int b = 0; b < 8; b++) c = c[15] ? ((c << 1) ^ 16'h1021) : (c << 1);
    end
    return c;
  endfunction

  // Parity symbols of a message of nsym symbols (msg[0] highest degree) for a
  // code with np parity symbols and roots alpha^0..alpha^(np-1). par[0] is the
  // highest-degree parity symbol.
  function automatic void ref_encode(input logic [15:0] msg[], input int np,
                                     output logic [15:0] par[]);
    logic [15:0] g[];
    logic [15:0] work[];
    int nsym;
    nsym = msg.size();
    g = new[np + 1];
    foreach (g[i]) g[i] = '0;
    g[0] = 16'h1;              // g[i] = coefficient of x^i
    for (int j = 0; j < np; j++) begin
      logic [15:0] root;
      root = ref_apow(j);
      for (int i = np; i >= 1; i--) g[i] = g[i-1] ^ ref_mul(g[i], root);
      g[0] = ref_mul(g[0], root);
    end
    // work = msg * x^np, highest degree first
    work = new[nsym + np];
    foreach (work[i]) work[i] = (i < nsym) ? msg[i] : '0;
    for (int i = 0; i < nsym; i++) begin
      logic [15:0] q;
      q = work[i];
      if (q != 0)
        for (int j = 0; j <= np; j++) work[i + j] = work[i + j] ^ ref_mul(q, g[np - j]);
    end
    par = new[np];
    for (int i = 0; i < np; i++) par[i] = work[nsym + i];
  endfunction

  // Pack chunks -> symbols (symbol k of chunk c = chunk[16k +: 16]).
  function automatic void chunks_to_syms(input logic [255:0] ch[], output logic [15:0] s[]);
    s = new[ch.size() * 16];
    foreach (ch[c]) for (int k = 0; k < 16; k++) s[c*16 + k] = ch[c][k*16 +: 16];
  endfunction

  // Full codeword (data chunks then parity chunks) for m data chunks, r parity chunks.
  function automatic void ref_codeword(input logic [255:0] data[], input int r,
                                       output logic [255:0] cw[]);
    logic [15:0] s[];
    logic [15:0] p[];
    chunks_to_syms(data, s);
    ref_encode(s, 16 * r, p);
    cw = new[data.size() + r];
    foreach (data[i]) cw[i] = data[i];
    for (int j = 0; j < r; j++)
      for (int k = 0; k < 16; k++) cw[data.size() + j][k*16 +: 16] = p[j*16 + k];
  endfunction

  function automatic logic [255:0] rand_chunk();
    logic [255:0] c;
    for (int i = 0; i < 8; i++) c[i*32 +: 32] = $urandom;
    return c;
  endfunction

endpackage
