// ecc_ctrl: the hybrid Reed-Solomon / CRC ECC engine of the memory
// controller. It serves four kinds of host request on one RS codeword of M
// data chunks and R parity chunks, each chunk stored as a 34 B unit
// {chunk, CRC} striped over the HBM channels (stripe_map):
//
//   SEQ_WR  encode all M chunks (RS and per-chunk CRC in one pass) and write
//           the whole codeword.
//   SEQ_RD  fetch the whole codeword and RS-decode it without looking at the
//           CRCs; the decoder stops early on a clean codeword.
//   RND_RD  fetch only the k requested chunks and check their CRCs. All pass:
//           return them at once. Any fails: escalate, i.e. fetch the rest of
//           the codeword, RS-decode and return the k corrected chunks.
//   RND_WR  fetch the k old chunks and the R parity chunks and check CRCs.
//           All pass: differential parity update
//           P_new = P_old ^ RS(D_new) ^ RS(D_old), then write the k new
//           chunks and the new parity. Any fails: escalate to a full
//           read-modify-write: fetch the rest, decode, merge the new data,
//           re-encode and write the whole codeword.
// These four flows are the paper's (its Figs. 3 and 4 and the text on
// sequential accesses). The request format, the buffering, the order of the
// steps within a flow and what happens on an uncorrectable codeword (data is
// returned or written as decoded, and done_fail_o is raised) are this
// design's choices. Escalation reuses the chunks already fetched and reads
// only the missing ones, as the paper describes.
//
// How it works: one request at a time. A codeword buffer holds the M+R
// fetched chunks (CRC stripped) and a second buffer the host's new data. A
// fetch phase sets a bit per wanted unit; the lowest pending unit is read each
// cycle the memory accepts, and the issue order is remembered to place the
// in-order responses. One parity_update_unit (two RS encoders) does both the
// differential update and full encoding; one rs_decoder does all decoding.
//
// Interface (all valid/ready, data moves when both are high, except the
// read-data and response outputs, which the host must take when valid):
//   req_*   op, codeword index, first chunk and chunk count k (1..M,
//           first+k <= M; ignored for the sequential ops).
//   wr_*    the k (or M) new data chunks of a write, in order.
//   rd_*    returned data chunks with their index in the codeword.
//   done_*  one pulse per request: escalated, decoder early-terminated
//           (clean), uncorrectable (fail), symbol errors corrected.
//   mem_*   one 34 B unit per request to the HBM side, channel and row from
//           stripe_map; read responses come back in request order.
// Timing: one unit per cycle on the memory port when it is ready; encoding
// M cycles; decoding as rs_decoder.
// Lint note: rst_n is both the asynchronous reset of the registers and the
// disable condition of the assertions below; a linter may flag that mixed
// use (SYNCASYNCNET). It is intended and affects only the checkers.
module ecc_ctrl
  import ecc_pkg::*;
#(
  parameter int M     = 16,
  parameter int R     = 1,
  parameter int S     = 16,
  parameter int NRAW  = 16,
  parameter int BLK_W = 26,
  parameter int IDX_W = 6,
  parameter int CH_W  = $clog2(S),
  parameter int ROW_W = BLK_W + IDX_W + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // host request
  input  logic             req_valid_i,
  output logic             req_ready_o,
  input  ecc_op_e          req_op_i,
  input  logic [BLK_W-1:0] req_cw_i,
  input  logic [IDX_W-1:0] req_first_i,
  input  logic [IDX_W-1:0] req_cnt_i,
  // host write data
  input  logic             wr_valid_i,
  output logic             wr_ready_o,
  input  chunk_t           wr_data_i,
  // host read data
  output logic             rd_valid_o,
  output logic [IDX_W-1:0] rd_idx_o,
  output chunk_t           rd_data_o,
  // completion
  output logic             done_o,
  output logic             done_escalated_o,
  output logic             done_clean_o,
  output logic             done_fail_o,
  output logic [15:0]      done_nerr_o,
  // memory side
  output logic             mem_req_valid_o,
  input  logic             mem_req_ready_i,
  output logic             mem_req_we_o,
  output logic [CH_W-1:0]  mem_req_ch_o,
  output logic [ROW_W-1:0] mem_req_row_o,
  output unit_t            mem_req_wdata_o,
  input  logic             mem_rsp_valid_i,
  input  unit_t            mem_rsp_rdata_i
);

  localparam int NCH = M + R;
  localparam int CW  = $clog2(NCH);
  localparam int MW  = $clog2(M);

  typedef enum logic [3:0] {
    ST_IDLE, ST_WDATA, ST_FETCH, ST_RET, ST_DEC_FEED, ST_DEC_WAIT,
    ST_ENC, ST_WRITE, ST_DONE
  } state_e;

  state_e           state_q;
  ecc_op_e          op_q;
  logic [BLK_W-1:0] cw_q;
  logic [IDX_W-1:0] first_q, cnt_q;
  chunk_t           ubuf_q [NCH];   // fetched (or to-be-written) codeword
  chunk_t           nbuf_q [M];     // new data of a random write
  logic [NCH-1:0]   have_q;         // unit fetched into ubuf_q
  logic [NCH-1:0]   pend_q;         // units still to issue (read or write)
  logic [CW-1:0]    ord_q [NCH];    // issue order of outstanding reads
  logic [CW:0]      nis_q, nrsp_q, nexp_q;
  logic [CW:0]      ctr_q;          // generic beat counter
  logic             bad_q;          // a CRC failed in this fetch
  logic             esc_q;          // escalated
  logic             full_q;         // full encode (not differential)
  logic             clean_q, fail_q;
  logic [15:0]      nerr_q;

  // ---------------- helpers ----------------
  function automatic logic in_range(input int i, input logic [IDX_W-1:0] f,
                                    input logic [IDX_W-1:0] c);
    return (i >= int'(f)) && (i < int'(f) + int'(c));
  endfunction

  function automatic logic [CW:0] popcnt(input logic [NCH-1:0] v);
    logic [CW:0] n = '0;
    for (int i = 0; i < NCH; i++) n = n + (CW+1)'(v[i]);
    return n;
  endfunction

  // lowest pending unit
  logic [CW-1:0] pick;
  logic          pick_ok;
  always_comb begin
    pick = '0; pick_ok = 1'b0;
    for (int i = NCH - 1; i >= 0; i--)
      if (pend_q[i]) begin pick = CW'(i); pick_ok = 1'b1; end
  end

  // ---------------- submodules ----------------
  logic [IDX_W-1:0] map_idx;
  assign map_idx = IDX_W'(pick);
  stripe_map #(.M(M), .R(R), .S(S), .NRAW(NRAW), .BLK_W(BLK_W), .IDX_W(IDX_W),
               .CH_W(CH_W), .ROW_W(ROW_W)) u_map (
    .region_i(1'b0), .blk_i(cw_q), .idx_i(map_idx), .ch_o(mem_req_ch_o), .row_o(mem_req_row_o)
  );

  // CRC check of the incoming unit
  crc_t rsp_crc_unused;
  logic rsp_crc_ok;
  crc16_chunk u_crc_rd (
    .chunk_i(mem_rsp_rdata_i[UNIT_W-1 -: CHUNK_W]), .crc_i(mem_rsp_rdata_i[CRC_W-1:0]),
    .crc_o(rsp_crc_unused), .crc_ok_o(rsp_crc_ok)
  );

  // parity update / encoder
  logic                 enc_clear, enc_valid;
  chunk_t               enc_old, enc_new;
  logic [R*CHUNK_W-1:0] p_old, p_new;
  parity_update_unit #(.R(R)) u_par (
    .clk, .rst_n, .clear_i(enc_clear), .in_valid_i(enc_valid), .old_i(enc_old),
    .new_i(enc_new), .p_old_i(p_old), .p_new_o(p_new)
  );

  // CRC generation of the outgoing unit
  chunk_t wr_chunk;
  crc_t   wr_crc;
  logic   wr_crc_unused;
  crc16_chunk u_crc_wr (
    .chunk_i(wr_chunk), .crc_i('0), .crc_o(wr_crc), .crc_ok_o(wr_crc_unused)
  );

  // decoder
  logic          dec_in_valid, dec_in_ready;
  chunk_t        dec_in_chunk;
  logic          dec_out_valid, dec_done, dec_clean, dec_fail;
  logic [CW-1:0] dec_out_idx;
  chunk_t        dec_out_chunk;
  logic [15:0]   dec_nerr;
  rs_decoder #(.M(M), .R(R)) u_dec (
    .clk, .rst_n, .in_valid_i(dec_in_valid), .in_ready_o(dec_in_ready),
    .in_chunk_i(dec_in_chunk), .out_valid_o(dec_out_valid), .out_idx_o(dec_out_idx),
    .out_chunk_o(dec_out_chunk), .done_o(dec_done), .clean_o(dec_clean),
    .fail_o(dec_fail), .nerr_o(dec_nerr)
  );

  // ---------------- datapath muxes ----------------
  logic [CW-1:0] rsp_slot;
  assign rsp_slot = ord_q[nrsp_q[CW-1:0]];

  always_comb begin
    // decoder input: streamed from memory on SEQ_RD, from the buffer otherwise
    if (state_q == ST_FETCH) begin
      dec_in_valid = mem_rsp_valid_i && (op_q == OP_SEQ_RD);
      dec_in_chunk = mem_rsp_rdata_i[UNIT_W-1 -: CHUNK_W];
    end else begin
      dec_in_valid = (state_q == ST_DEC_FEED);
      dec_in_chunk = ubuf_q[ctr_q[CW-1:0]];
    end

    // encoder input
    enc_clear = (state_q == ST_ENC) && (ctr_q == '0);
    enc_valid = (state_q == ST_ENC);
    enc_old   = '0;
    enc_new   = '0;
    if (full_q) begin
      enc_new = ubuf_q[ctr_q[CW-1:0]];
    end else if (in_range(int'(ctr_q), first_q, cnt_q)) begin
      enc_old = ubuf_q[ctr_q[CW-1:0]];
      enc_new = nbuf_q[ctr_q[MW-1:0]];
    end
    for (int r = 0; r < R; r++) p_old[r*CHUNK_W +: CHUNK_W] = full_q ? '0 : ubuf_q[M + r];

    // write data
    if (int'(pick) >= M)     wr_chunk = p_new[(int'(pick) - M) * CHUNK_W +: CHUNK_W];
    else if (full_q)         wr_chunk = ubuf_q[pick];
    else                     wr_chunk = nbuf_q[pick[MW-1:0]];
  end

  assign mem_req_valid_o = ((state_q == ST_FETCH) || (state_q == ST_WRITE)) && pick_ok;
  assign mem_req_we_o    = (state_q == ST_WRITE);
  assign mem_req_wdata_o = {wr_chunk, wr_crc};
  wire   mem_fire        = mem_req_valid_o && mem_req_ready_i;

  assign req_ready_o = (state_q == ST_IDLE);
  assign wr_ready_o  = (state_q == ST_WDATA);

  // host read data
  always_comb begin
    rd_valid_o = 1'b0;
    rd_idx_o   = '0;
    rd_data_o  = '0;
    if (state_q == ST_RET) begin
      rd_valid_o = 1'b1;
      rd_idx_o   = IDX_W'(int'(first_q) + int'(ctr_q));
      rd_data_o  = ubuf_q[CW'(int'(first_q) + int'(ctr_q))];
    end else if (state_q == ST_DEC_WAIT && dec_out_valid && op_q != OP_RND_WR &&
                 (op_q == OP_SEQ_RD || in_range(int'(dec_out_idx), first_q, cnt_q))) begin
      rd_valid_o = 1'b1;
      rd_idx_o   = IDX_W'(dec_out_idx);
      rd_data_o  = dec_out_chunk;
    end
  end

  assign done_o           = (state_q == ST_DONE);
  assign done_escalated_o = esc_q;
  assign done_clean_o     = clean_q;
  assign done_fail_o      = fail_q;
  assign done_nerr_o      = nerr_q;

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      op_q    <= OP_SEQ_RD;
      cw_q    <= '0;
      first_q <= '0;
      cnt_q   <= '0;
      have_q  <= '0;
      pend_q  <= '0;
      nis_q   <= '0;
      nrsp_q  <= '0;
      nexp_q  <= '0;
      ctr_q   <= '0;
      bad_q   <= 1'b0;
      esc_q   <= 1'b0;
      full_q  <= 1'b0;
      clean_q <= 1'b0;
      fail_q  <= 1'b0;
      nerr_q  <= '0;
      for (int i = 0; i < NCH; i++) begin ubuf_q[i] <= '0; ord_q[i] <= '0; end
      for (int i = 0; i < M; i++) nbuf_q[i] <= '0;
    end else begin
      unique case (state_q)
        ST_IDLE: if (req_valid_i) begin
          op_q    <= req_op_i;
          cw_q    <= req_cw_i;
          esc_q   <= 1'b0;
          bad_q   <= 1'b0;
          clean_q <= 1'b0;
          fail_q  <= 1'b0;
          nerr_q  <= '0;
          have_q  <= '0;
          nis_q   <= '0;
          nrsp_q  <= '0;
          ctr_q   <= '0;
          if (req_op_i == OP_SEQ_RD || req_op_i == OP_SEQ_WR) begin
            first_q <= '0;
            cnt_q   <= IDX_W'(M);
          end else begin
            first_q <= req_first_i;
            cnt_q   <= req_cnt_i;
          end
          unique case (req_op_i)
            OP_SEQ_WR, OP_RND_WR: state_q <= ST_WDATA;
            OP_SEQ_RD: begin
              pend_q  <= '1;
              nexp_q  <= (CW+1)'(NCH);
              state_q <= ST_FETCH;
            end
            default: begin  // OP_RND_RD
              for (int i = 0; i < NCH; i++) pend_q[i] <= in_range(i, req_first_i, req_cnt_i);
              nexp_q  <= (CW+1)'(req_cnt_i);
              state_q <= ST_FETCH;
            end
          endcase
        end

        ST_WDATA: if (wr_valid_i) begin
          if (op_q == OP_SEQ_WR) ubuf_q[ctr_q[CW-1:0]] <= wr_data_i;
          else                   nbuf_q[MW'(int'(first_q) + int'(ctr_q))] <= wr_data_i;
          if (int'(ctr_q) == int'(cnt_q) - 1) begin
            ctr_q <= '0;
            if (op_q == OP_SEQ_WR) begin
              full_q  <= 1'b1;
              state_q <= ST_ENC;
            end else begin
              // fetch old target chunks and all parity chunks
              for (int i = 0; i < NCH; i++) pend_q[i] <= in_range(i, first_q, cnt_q) || (i >= M);
              nexp_q  <= (CW+1)'(int'(cnt_q) + R);
              state_q <= ST_FETCH;
            end
          end else ctr_q <= ctr_q + 1'b1;
        end

        ST_FETCH: begin
          if (mem_fire) begin
            pend_q[pick]      <= 1'b0;
            ord_q[nis_q[CW-1:0]] <= pick;
            nis_q             <= nis_q + 1'b1;
          end
          if (mem_rsp_valid_i) begin
            ubuf_q[rsp_slot] <= mem_rsp_rdata_i[UNIT_W-1 -: CHUNK_W];
            have_q[rsp_slot] <= 1'b1;
            if (!rsp_crc_ok) bad_q <= 1'b1;
            nrsp_q <= nrsp_q + 1'b1;
            if (nrsp_q + 1'b1 == nexp_q) begin
              nis_q  <= '0;
              nrsp_q <= '0;
              ctr_q  <= '0;
              if (op_q == OP_SEQ_RD) begin
                state_q <= ST_DEC_WAIT;
              end else if (esc_q) begin
                state_q <= ST_DEC_FEED;
              end else if (bad_q || !rsp_crc_ok) begin
                // escalation: fetch every unit not yet in the buffer
                esc_q <= 1'b1;
                for (int i = 0; i < NCH; i++)
                  pend_q[i] <= !(have_q[i] || (CW'(i) == rsp_slot));
                nexp_q <= (CW+1)'(NCH) - popcnt(have_q) - 1'b1;
              end else if (op_q == OP_RND_RD) begin
                state_q <= ST_RET;
              end else begin
                full_q  <= 1'b0;
                state_q <= ST_ENC;
              end
            end
          end
        end

        ST_RET: begin
          if (int'(ctr_q) == int'(cnt_q) - 1) state_q <= ST_DONE;
          ctr_q <= ctr_q + 1'b1;
        end

        ST_DEC_FEED: begin
          if (dec_in_ready) begin
            if (int'(ctr_q) == NCH - 1) begin
              ctr_q   <= '0;
              state_q <= ST_DEC_WAIT;
            end else ctr_q <= ctr_q + 1'b1;
          end
        end

        ST_DEC_WAIT: begin
          if (dec_out_valid && op_q == OP_RND_WR)
            ubuf_q[dec_out_idx] <= in_range(int'(dec_out_idx), first_q, cnt_q)
                                   ? nbuf_q[dec_out_idx[MW-1:0]] : dec_out_chunk;
          if (dec_done) begin
            clean_q <= dec_clean;
            fail_q  <= dec_fail;
            nerr_q  <= dec_nerr;
            ctr_q   <= '0;
            if (op_q == OP_RND_WR) begin
              full_q  <= 1'b1;
              state_q <= ST_ENC;
            end else state_q <= ST_DONE;
          end
        end

        ST_ENC: begin
          if (int'(ctr_q) == M - 1) begin
            ctr_q   <= '0;
            // units to write: all, or the updated ones and the parity
            for (int i = 0; i < NCH; i++)
              pend_q[i] <= full_q || in_range(i, first_q, cnt_q) || (i >= M);
            state_q <= ST_WRITE;
          end else ctr_q <= ctr_q + 1'b1;
        end

        ST_WRITE: begin
          if (mem_fire) pend_q[pick] <= 1'b0;
          if (mem_fire && (pend_q & ~(NCH'(1) << pick)) == '0) state_q <= ST_DONE;
        end

        ST_DONE: state_q <= ST_IDLE;

        default: state_q <= ST_IDLE;
      endcase
    end
  end

  // ---------------- protocol assertions ----------------
  // read responses only arrive while reads are outstanding
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid_i |-> (state_q == ST_FETCH && nrsp_q < nis_q));
  // random requests stay inside one codeword
  a_req_range: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid_i && req_ready_o && (req_op_i == OP_RND_RD || req_op_i == OP_RND_WR))
      |-> (req_cnt_i != '0 && int'(req_first_i) + int'(req_cnt_i) <= M));
  // the decoder is always free when the controller starts feeding it
  a_dec_free: assert property (@(posedge clk) disable iff (!rst_n)
    dec_in_valid |-> dec_in_ready);

endmodule
