// rs_decoder: Reed-Solomon decoder for the large cross-channel codeword, with
// early termination when the codeword is clean.
//
// The paper fetches a whole codeword and RS-decodes it for every sequential
// read and whenever a CRC check escalates a random access; it notes that the
// decoder can stop early when there are no errors. The paper does not give the
// decoder's insides. This design uses the textbook structure, one stage after
// another on a single codeword:
//   1. Syndromes  S_j = r(alpha^j), j = 0..NP-1, updated by Horner's rule as
//      the NCH = M+R chunks arrive (one chunk, 16 symbols, per cycle). The
//      chunks are also kept in a codeword buffer.
//   2. If every syndrome is zero the codeword is clean: the M data chunks are
//      streamed straight out of the buffer (early termination).
//   3. Otherwise an inversionless Berlekamp-Massey run (one iteration per
//      cycle, NP cycles) finds the error locator Lambda(x); one more cycle
//      forms the evaluator Omega(x) = S(x)Lambda(x) mod x^NP.
//   4. Chien search and Forney's formula, 16 symbol positions (one chunk) per
//      cycle over all NCH chunks: a position X is in error when
//      Lambda(X^-1) = 0, and its error value is Omega(X^-1)/Lambda_odd(X^-1)
//      (first generator root alpha^0). The corrected data chunks are emitted
//      as they are passed.
// The codeword is uncorrectable (fail_o) when deg Lambda exceeds T = NP/2 or
// the number of roots found differs from it; data is then passed uncorrected.
//
// Interface: in_valid_i/in_ready_o/in_chunk_i take the NCH chunks of one
// codeword in order (data chunks 0..M-1, then parity), CRC already stripped.
// out_valid_o/out_idx_o/out_chunk_o give the M data chunks in order (no back
// pressure). done_o pulses once per codeword: with the last data chunk when
// the codeword is clean, otherwise with the search of the last parity chunk.
// clean_o (early termination), fail_o and nerr_o (symbol errors corrected)
// are valid with done_o.
// Timing: NCH input cycles; then M cycles if clean, or NP + 1 + NCH cycles if
// not. A new codeword is accepted the cycle after done_o.
module rs_decoder
  import ecc_pkg::*;
#(
  parameter int M = 16,  // data chunks per codeword
  parameter int R = 1    // parity chunks per codeword
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid_i,
  output logic               in_ready_o,
  input  chunk_t             in_chunk_i,
  output logic               out_valid_o,
  output logic [$clog2(M+R)-1:0] out_idx_o,
  output chunk_t             out_chunk_o,
  output logic               done_o,
  output logic               clean_o,
  output logic               fail_o,
  output logic [15:0]        nerr_o
);

  localparam int NCH = M + R;
  localparam int NP  = R * SYMS;
  localparam int T   = NP / 2;
  localparam int N   = NCH * SYMS;
  localparam int CW  = $clog2(NCH);

  // ---------------- constant tables ----------------
  function automatic logic [NP*SYM_W-1:0] tab_alpha_j();
    logic [NP*SYM_W-1:0] t;
    for (int j = 0; j < NP; j++) t[j*SYM_W +: SYM_W] = gf_alpha_pow(j);
    return t;
  endfunction
  // alpha^(j*k), j = 0..T, k = 0..SYMS-1
  function automatic logic [(T+1)*SYMS*SYM_W-1:0] tab_pos();
    logic [(T+1)*SYMS*SYM_W-1:0] t;
    for (int j = 0; j <= T; j++)
      for (int k = 0; k < SYMS; k++)
        t[(j*SYMS+k)*SYM_W +: SYM_W] = gf_alpha_pow(j*k);
    return t;
  endfunction
  // alpha^(16 j): advance one chunk
  function automatic logic [(T+1)*SYM_W-1:0] tab_step();
    logic [(T+1)*SYM_W-1:0] t;
    for (int j = 0; j <= T; j++) t[j*SYM_W +: SYM_W] = gf_alpha_pow(SYMS*j);
    return t;
  endfunction
  // alpha^(-(N-1) j): position of symbol 0 of chunk 0
  function automatic logic [(T+1)*SYM_W-1:0] tab_init();
    logic [(T+1)*SYM_W-1:0] t;
    for (int j = 0; j <= T; j++)
      t[j*SYM_W +: SYM_W] = gf_alpha_pow(GF_ORDER - (((N-1)*j) % GF_ORDER));
    return t;
  endfunction

  localparam logic [NP*SYM_W-1:0]            A_J    = tab_alpha_j();
  localparam logic [(T+1)*SYMS*SYM_W-1:0]    C_POS  = tab_pos();
  localparam logic [(T+1)*SYM_W-1:0]         C_STEP = tab_step();
  localparam logic [(T+1)*SYM_W-1:0]         C_INIT = tab_init();

  typedef enum logic [2:0] {S_SYN, S_BM, S_OMEGA, S_CHIEN, S_RAW} state_e;
  state_e state_q;

  chunk_t buf_q [NCH];
  sym_t   syn_q [NP];
  sym_t   syn_d [NP];
  logic [CW-1:0] cnt_q;       // input chunk count / output chunk index
  sym_t   lam_q [NP+1];
  sym_t   b_q   [NP+1];
  sym_t   gam_q;
  int unsigned len_q;         // current LFSR length L
  logic [$clog2(NP+1)-1:0] r_q;
  sym_t   cl_q  [T+1];        // Chien registers for Lambda
  sym_t   co_q  [T];          // Chien registers for Omega
  logic [15:0] roots_q;
  logic   toobig_q;

  assign in_ready_o = (state_q == S_SYN);
  wire in_fire = in_valid_i && in_ready_o;

  // ---------------- syndrome update ----------------
  always_comb begin
    for (int j = 0; j < NP; j++) begin
      sym_t s;
      s = (cnt_q == '0) ? '0 : syn_q[j];
      for (int k = 0; k < SYMS; k++)
        s = gf_mul(s, A_J[j*SYM_W +: SYM_W]) ^ in_chunk_i[k*SYM_W +: SYM_W];
      syn_d[j] = s;
    end
  end

  logic syn_zero;
  always_comb begin
    syn_zero = 1'b1;
    for (int j = 0; j < NP; j++) if (syn_d[j] != '0) syn_zero = 1'b0;
  end

  // ---------------- Berlekamp-Massey step ----------------
  sym_t delta;
  sym_t lam_n [NP+1];
  always_comb begin
    delta = '0;
    for (int j = 0; j <= NP; j++)
      if (j <= int'(r_q)) delta = delta ^ gf_mul(lam_q[j], syn_q[int'(r_q) - j]);
    for (int j = 0; j <= NP; j++)
      lam_n[j] = gf_mul(gam_q, lam_q[j]) ^ ((j == 0) ? '0 : gf_mul(delta, b_q[j-1]));
  end

  // ---------------- Omega ----------------
  sym_t om [T];
  always_comb begin
    for (int i = 0; i < T; i++) begin
      om[i] = '0;
      for (int j = 0; j <= i; j++) om[i] = om[i] ^ gf_mul(lam_q[j], syn_q[i-j]);
    end
  end

  // ---------------- Chien / Forney for one chunk ----------------
  chunk_t evec;
  logic [4:0] nroot_c;
  always_comb begin
    evec    = '0;
    nroot_c = '0;
    for (int k = 0; k < SYMS; k++) begin
      sym_t lv, lodd, ov;
      lv = '0; lodd = '0; ov = '0;
      for (int j = 0; j <= T; j++) begin
        sym_t t;
        t  = gf_mul(cl_q[j], C_POS[(j*SYMS+k)*SYM_W +: SYM_W]);
        lv = lv ^ t;
        if (j % 2 == 1) lodd = lodd ^ t;
      end
      for (int i = 0; i < T; i++)
        ov = ov ^ gf_mul(co_q[i], C_POS[(i*SYMS+k)*SYM_W +: SYM_W]);
      if (lv == '0) begin
        nroot_c = nroot_c + 5'd1;
        evec[k*SYM_W +: SYM_W] = gf_mul(ov, gf_inv(lodd));
      end
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_SYN;
      cnt_q    <= '0;
      r_q      <= '0;
      gam_q    <= '0;
      len_q    <= 0;
      roots_q  <= '0;
      toobig_q <= 1'b0;
      for (int j = 0; j < NP; j++) syn_q[j] <= '0;
      for (int j = 0; j <= NP; j++) begin lam_q[j] <= '0; b_q[j] <= '0; end
      for (int j = 0; j <= T; j++) cl_q[j] <= '0;
      for (int j = 0; j < T; j++) co_q[j] <= '0;
      for (int c = 0; c < NCH; c++) buf_q[c] <= '0;
    end else begin
      unique case (state_q)
        S_SYN: if (in_fire) begin
          buf_q[cnt_q] <= in_chunk_i;
          for (int j = 0; j < NP; j++) syn_q[j] <= syn_d[j];
          if (int'(cnt_q) == NCH - 1) begin
            cnt_q <= '0;
            if (syn_zero) state_q <= S_RAW;
            else begin
              state_q <= S_BM;
              r_q     <= '0;
              gam_q   <= 16'h0001;
              len_q   <= 0;
              for (int j = 0; j <= NP; j++) begin
                lam_q[j] <= (j == 0) ? 16'h0001 : '0;
                b_q[j]   <= (j == 0) ? 16'h0001 : '0;
              end
            end
          end else cnt_q <= cnt_q + 1'b1;
        end
        S_BM: begin
          for (int j = 0; j <= NP; j++) lam_q[j] <= lam_n[j];
          if (delta != '0 && 2 * len_q <= int'(r_q)) begin
            for (int j = 0; j <= NP; j++) b_q[j] <= lam_q[j];
            len_q <= int'(r_q) + 1 - len_q;
            gam_q <= delta;
          end else begin
            for (int j = 0; j <= NP; j++) b_q[j] <= (j == 0) ? '0 : b_q[j-1];
          end
          if (int'(r_q) == NP - 1) state_q <= S_OMEGA;
          r_q <= r_q + 1'b1;
        end
        S_OMEGA: begin
          for (int j = 0; j <= T; j++)
            cl_q[j] <= gf_mul(lam_q[j], C_INIT[j*SYM_W +: SYM_W]);
          for (int i = 0; i < T; i++)
            co_q[i] <= gf_mul(om[i], C_INIT[i*SYM_W +: SYM_W]);
          roots_q  <= '0;
          toobig_q <= (len_q > T);
          state_q  <= S_CHIEN;
          cnt_q    <= '0;
        end
        S_CHIEN: begin
          for (int j = 0; j <= T; j++) cl_q[j] <= gf_mul(cl_q[j], C_STEP[j*SYM_W +: SYM_W]);
          for (int i = 0; i < T; i++)  co_q[i] <= gf_mul(co_q[i], C_STEP[i*SYM_W +: SYM_W]);
          roots_q <= roots_q + 16'(nroot_c);
          if (int'(cnt_q) == NCH - 1) begin
            cnt_q   <= '0;
            state_q <= S_SYN;
          end else cnt_q <= cnt_q + 1'b1;
        end
        S_RAW: begin
          if (int'(cnt_q) == M - 1) begin
            cnt_q   <= '0;
            state_q <= S_SYN;
          end else cnt_q <= cnt_q + 1'b1;
        end
        default: state_q <= S_SYN;
      endcase
    end
  end

  // ---------------- outputs ----------------
  // In S_CHIEN the data chunks are emitted as they are searched; the
  // remaining parity chunks are searched only to count roots, so done_o comes
  // with the last parity chunk.
  always_comb begin
    out_valid_o = 1'b0;
    out_idx_o   = cnt_q;
    out_chunk_o = buf_q[cnt_q];
    done_o      = 1'b0;
    clean_o     = 1'b0;
    fail_o      = 1'b0;
    nerr_o      = '0;
    if (state_q == S_RAW) begin
      out_valid_o = 1'b1;
      if (int'(cnt_q) == M - 1) begin
        done_o  = 1'b1;
        clean_o = 1'b1;
      end
    end else if (state_q == S_CHIEN) begin
      out_valid_o = (int'(cnt_q) < M);
      if (!toobig_q) out_chunk_o = buf_q[cnt_q] ^ evec;
      if (int'(cnt_q) == NCH - 1) begin
        done_o = 1'b1;
        fail_o = toobig_q || ((roots_q + 16'(nroot_c)) != 16'(len_q));
        nerr_o = toobig_q ? '0 : roots_q + 16'(nroot_c);
      end
    end
  end

endmodule
