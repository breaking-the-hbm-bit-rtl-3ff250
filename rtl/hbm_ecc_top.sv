// hbm_ecc_top: host-side HBM ECC of a memory controller for AI inference,
// with no on-die ECC in the HBM stack.
//
// All fault handling lives here. Data is kept in large Reed-Solomon codewords
// (default 16 x 32 B data chunks + 1 x 32 B parity chunk) whose chunks each
// carry a 2 B CRC and are striped across the HBM channels. The per-chunk CRC
// lets random accesses skip RS decoding unless a chunk is actually bad, and
// random writes update parity differentially (ecc_ctrl). On top of that,
// importance-adaptive protection stores tensors as bit-planes and sends only
// the critical planes (the BF16 exponent by default) through CRC and RS; the
// other planes bypass the ECC and are stored raw (bitplane_xpose).
//
// Two host ports share one ECC engine and one memory port:
//   h_*  chunk port: the four ecc_ctrl requests (sequential/random read and
//        write) on any codeword, k chunks at a time.
//   t_*  tensor port: write or read one block of NV values (NV*VW/256 value
//        words of 32 B). A tensor write transposes the block into bit-planes,
//        sequentially writes the protected plane chunks as NCW codewords
//        (codewords blk*NCW ...), and writes the raw plane chunks as plain
//        units to a separate raw region (CRC field zero, never checked). A
//        tensor read reverses this: sequential RS-decoded read of the
//        protected planes, plain read of the raw planes, then the value words.
// The host port has priority; a tensor operation starts only when the engine
// is idle and no chunk request is waiting. Which host requests exist and how
// the two paths share the engine and the memory port are this design's
// choices; the paper describes the mechanisms, not a host interface.
//
// Memory port: one 34 B unit per request with channel and row, in-order read
// responses, as ecc_ctrl.
// Timing: tensor write = NW load beats + NCW sequential writes + NRAW raw
// writes; tensor read = NCW sequential reads + NRAW raw reads + NW beats out.
// Lint note: rst_n is both the asynchronous reset of the registers and the
// disable condition of the assertions below; a linter may flag that mixed
// use (SYNCASYNCNET). It is intended and affects only the checkers.
module hbm_ecc_top
  import ecc_pkg::*;
#(
  parameter int          M          = 16,        // data chunks per codeword (512 B)
  parameter int          R          = 1,         // parity chunks per codeword
  parameter int          S          = 16,        // HBM channels
  parameter int          NV         = 512,       // values per tensor block
  parameter int          VW         = 16,        // bits per value (BF16)
  parameter logic [15:0] PLANE_MASK = 16'h7F80,  // protected planes: BF16 exponent
  parameter int          BLK_W      = 26,
  parameter int          IDX_W      = 6,
  parameter int          CH_W       = $clog2(S),
  parameter int          ROW_W      = BLK_W + IDX_W + 1,
  parameter int          NW         = NV * VW / CHUNK_W,  // value words per block
  parameter int          NQ         = VW * (NV / CHUNK_W) // plane chunks per block
) (
  input  logic             clk,
  input  logic             rst_n,
  // chunk port
  input  logic             h_req_valid_i,
  output logic             h_req_ready_o,
  input  ecc_op_e          h_req_op_i,
  input  logic [BLK_W-1:0] h_req_cw_i,
  input  logic [IDX_W-1:0] h_req_first_i,
  input  logic [IDX_W-1:0] h_req_cnt_i,
  input  logic             h_wr_valid_i,
  output logic             h_wr_ready_o,
  input  chunk_t           h_wr_data_i,
  output logic             h_rd_valid_o,
  output logic [IDX_W-1:0] h_rd_idx_o,
  output chunk_t           h_rd_data_o,
  output logic             h_done_o,
  output logic             h_done_escalated_o,
  output logic             h_done_clean_o,
  output logic             h_done_fail_o,
  output logic [15:0]      h_done_nerr_o,
  // tensor port
  input  logic             t_req_valid_i,
  output logic             t_req_ready_o,
  input  logic             t_req_wr_i,
  input  logic [BLK_W-1:0] t_req_blk_i,
  input  logic             t_wr_valid_i,
  output logic             t_wr_ready_o,
  input  chunk_t           t_wr_data_i,
  output logic             t_rd_valid_o,
  output logic [$clog2(NW)-1:0] t_rd_idx_o,
  output chunk_t           t_rd_data_o,
  output logic             t_done_o,
  output logic             t_done_fail_o,
  output logic [15:0]      t_done_nerr_o,
  // memory port (to the HBM PHY)
  output logic             mem_req_valid_o,
  input  logic             mem_req_ready_i,
  output logic             mem_req_we_o,
  output logic [CH_W-1:0]  mem_req_ch_o,
  output logic [ROW_W-1:0] mem_req_row_o,
  output unit_t            mem_req_wdata_o,
  input  logic             mem_rsp_valid_i,
  input  unit_t            mem_rsp_rdata_i
);

  localparam int CPP = NV / CHUNK_W;
  function automatic int nprot_f();
    int n = 0;
    for (int p = 0; p < VW; p++) if (PLANE_MASK[p]) n++;
    return n * CPP;
  endfunction
  localparam int NPROT = nprot_f();       // protected plane chunks per block
  localparam int NRAW  = NQ - NPROT;      // raw plane chunks per block
  localparam int NCW   = NPROT / M;       // codewords per block
  localparam int QW    = $clog2(NQ);
  localparam int WW    = $clog2(NW);

  if (NPROT % M != 0 || NCW == 0) begin : g_bad_mask
    $error("protected plane chunks per block (%0d) must be a multiple of M (%0d)", NPROT, M);
  end

  typedef enum logic [3:0] {
    T_IDLE, T_LOAD, T_PWR_REQ, T_PWR_DATA, T_PWR_WAIT, T_RAW_WR,
    T_PRD_REQ, T_PRD_WAIT, T_RAW_RD, T_OUT, T_DONE
  } tstate_e;

  tstate_e          ts_q;
  logic [BLK_W-1:0] blk_q;
  logic [QW:0]      q_q;      // plane chunk being sent / issued
  logic [QW:0]      qr_q;     // raw plane chunk whose response is next
  logic [WW:0]      w_q;      // value word counter
  logic [$clog2(NCW+1)-1:0] j_q; // codeword within the block
  logic             fail_q;
  logic [15:0]      nerr_q;

  // ---------------- ECC engine ----------------
  logic             e_req_valid, e_req_ready;
  ecc_op_e          e_req_op;
  logic [BLK_W-1:0] e_req_cw;
  logic             e_wr_valid, e_wr_ready;
  chunk_t           e_wr_data;
  logic             e_rd_valid;
  logic [IDX_W-1:0] e_rd_idx;
  chunk_t           e_rd_data;
  logic             e_done, e_esc, e_clean, e_fail;
  logic [15:0]      e_nerr;
  logic             e_mem_valid, e_mem_ready, e_mem_we;
  logic [CH_W-1:0]  e_mem_ch;
  logic [ROW_W-1:0] e_mem_row;
  unit_t            e_mem_wdata;
  logic             e_rsp_valid;

  wire tensor_owns = (ts_q != T_IDLE);

  ecc_ctrl #(.M(M), .R(R), .S(S), .NRAW(NRAW), .BLK_W(BLK_W), .IDX_W(IDX_W),
             .CH_W(CH_W), .ROW_W(ROW_W)) u_ecc (
    .clk, .rst_n,
    .req_valid_i(e_req_valid), .req_ready_o(e_req_ready), .req_op_i(e_req_op),
    .req_cw_i(e_req_cw), .req_first_i(tensor_owns ? '0 : h_req_first_i),
    .req_cnt_i(tensor_owns ? IDX_W'(M) : h_req_cnt_i),
    .wr_valid_i(e_wr_valid), .wr_ready_o(e_wr_ready), .wr_data_i(e_wr_data),
    .rd_valid_o(e_rd_valid), .rd_idx_o(e_rd_idx), .rd_data_o(e_rd_data),
    .done_o(e_done), .done_escalated_o(e_esc), .done_clean_o(e_clean),
    .done_fail_o(e_fail), .done_nerr_o(e_nerr),
    .mem_req_valid_o(e_mem_valid), .mem_req_ready_i(e_mem_ready), .mem_req_we_o(e_mem_we),
    .mem_req_ch_o(e_mem_ch), .mem_req_row_o(e_mem_row), .mem_req_wdata_o(e_mem_wdata),
    .mem_rsp_valid_i(e_rsp_valid), .mem_rsp_rdata_i(mem_rsp_rdata_i)
  );

  // ---------------- bit-plane transposer ----------------
  logic             x_val_we, x_pl_we, x_prot;
  logic [WW-1:0]    x_val_idx;
  logic [QW-1:0]    x_pl_q;
  chunk_t           x_val_rdata, x_pl_rdata, x_pl_wdata;

  bitplane_xpose #(.NV(NV), .VW(VW), .PLANE_MASK(PLANE_MASK), .NW(NW), .CPP(CPP), .NQ(NQ)) u_xp (
    .clk, .val_we_i(x_val_we), .val_idx_i(x_val_idx), .val_wdata_i(t_wr_data_i),
    .val_rdata_o(x_val_rdata), .pl_we_i(x_pl_we), .pl_q_i(x_pl_q), .pl_wdata_i(x_pl_wdata),
    .pl_rdata_o(x_pl_rdata), .pl_prot_o(x_prot)
  );

  // raw-region address
  logic [CH_W-1:0]  raw_ch;
  logic [ROW_W-1:0] raw_row;
  logic [IDX_W-1:0] raw_idx;
  assign raw_idx = IDX_W'(int'(q_q) - NPROT);
  stripe_map #(.M(M), .R(R), .S(S), .NRAW(NRAW), .BLK_W(BLK_W), .IDX_W(IDX_W),
               .CH_W(CH_W), .ROW_W(ROW_W)) u_rawmap (
    .region_i(1'b1), .blk_i(blk_q), .idx_i(raw_idx), .ch_o(raw_ch), .row_o(raw_row)
  );

  // ---------------- muxing ----------------
  wire raw_phase = (ts_q == T_RAW_WR) || (ts_q == T_RAW_RD);
  wire raw_issue = raw_phase && (int'(q_q) < NQ);

  always_comb begin
    // engine request
    if (tensor_owns) begin
      e_req_valid = (ts_q == T_PWR_REQ) || (ts_q == T_PRD_REQ);
      e_req_op    = (ts_q == T_PWR_REQ) ? OP_SEQ_WR : OP_SEQ_RD;
      e_req_cw    = BLK_W'(int'(blk_q) * NCW + int'(j_q));
      e_wr_valid  = (ts_q == T_PWR_DATA);
      e_wr_data   = x_pl_rdata;
    end else begin
      e_req_valid = h_req_valid_i;
      e_req_op    = h_req_op_i;
      e_req_cw    = h_req_cw_i;
      e_wr_valid  = h_wr_valid_i;
      e_wr_data   = h_wr_data_i;
    end
    h_req_ready_o = !tensor_owns && e_req_ready;
    h_wr_ready_o  = !tensor_owns && e_wr_ready;
    t_req_ready_o = (ts_q == T_IDLE) && e_req_ready && !h_req_valid_i;
    t_wr_ready_o  = (ts_q == T_LOAD);

    // memory port
    if (raw_phase) begin
      mem_req_valid_o = raw_issue;
      mem_req_we_o    = (ts_q == T_RAW_WR);
      mem_req_ch_o    = raw_ch;
      mem_req_row_o   = raw_row;
      mem_req_wdata_o = {x_pl_rdata, CRC_W'(0)};
      e_mem_ready     = 1'b0;
      e_rsp_valid     = 1'b0;
    end else begin
      mem_req_valid_o = e_mem_valid;
      mem_req_we_o    = e_mem_we;
      mem_req_ch_o    = e_mem_ch;
      mem_req_row_o   = e_mem_row;
      mem_req_wdata_o = e_mem_wdata;
      e_mem_ready     = mem_req_ready_i;
      e_rsp_valid     = mem_rsp_valid_i;
    end

    // transposer
    x_val_we   = (ts_q == T_LOAD) && t_wr_valid_i;
    x_val_idx  = WW'(w_q);
    x_pl_we    = 1'b0;
    x_pl_q     = QW'(q_q);
    x_pl_wdata = e_rd_data;
    if (ts_q == T_PRD_WAIT) begin
      x_pl_we = e_rd_valid;
      x_pl_q  = QW'(int'(j_q) * M + int'(e_rd_idx));
    end else if (ts_q == T_RAW_RD) begin
      x_pl_we    = mem_rsp_valid_i;
      x_pl_q     = QW'(qr_q);
      x_pl_wdata = mem_rsp_rdata_i[UNIT_W-1 -: CHUNK_W];
    end
  end

  // chunk-port outputs (quiet while a tensor operation owns the engine)
  assign h_rd_valid_o       = !tensor_owns && e_rd_valid;
  assign h_rd_idx_o         = e_rd_idx;
  assign h_rd_data_o        = e_rd_data;
  assign h_done_o           = !tensor_owns && e_done;
  assign h_done_escalated_o = e_esc;
  assign h_done_clean_o     = e_clean;
  assign h_done_fail_o      = e_fail;
  assign h_done_nerr_o      = e_nerr;

  // tensor-port outputs
  assign t_rd_valid_o  = (ts_q == T_OUT);
  assign t_rd_idx_o    = WW'(w_q);
  assign t_rd_data_o   = x_val_rdata;
  assign t_done_o      = (ts_q == T_DONE);
  assign t_done_fail_o = fail_q;
  assign t_done_nerr_o = nerr_q;

  // ---------------- tensor sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts_q   <= T_IDLE;
      blk_q  <= '0;
      q_q    <= '0;
      qr_q   <= '0;
      w_q    <= '0;
      j_q    <= '0;
      fail_q <= 1'b0;
      nerr_q <= '0;
    end else begin
      unique case (ts_q)
        T_IDLE: if (t_req_valid_i && t_req_ready_o) begin
          blk_q  <= t_req_blk_i;
          q_q    <= '0;
          w_q    <= '0;
          j_q    <= '0;
          fail_q <= 1'b0;
          nerr_q <= '0;
          ts_q   <= t_req_wr_i ? T_LOAD : T_PRD_REQ;
        end
        T_LOAD: if (t_wr_valid_i) begin
          if (int'(w_q) == NW - 1) begin
            w_q  <= '0;
            ts_q <= T_PWR_REQ;
          end else w_q <= w_q + 1'b1;
        end
        T_PWR_REQ:  if (e_req_ready) ts_q <= T_PWR_DATA;
        T_PWR_DATA: if (e_wr_ready) begin
          q_q <= q_q + 1'b1;
          if (int'(q_q) % M == M - 1) ts_q <= T_PWR_WAIT;
        end
        T_PWR_WAIT: if (e_done) begin
          if (int'(j_q) == NCW - 1) begin
            j_q  <= '0;
            ts_q <= (NRAW > 0) ? T_RAW_WR : T_DONE;
          end else begin
            j_q  <= j_q + 1'b1;
            ts_q <= T_PWR_REQ;
          end
        end
        T_RAW_WR: if (mem_req_ready_i) begin
          q_q <= q_q + 1'b1;
          if (int'(q_q) == NQ - 1) ts_q <= T_DONE;
        end
        T_PRD_REQ:  if (e_req_ready) ts_q <= T_PRD_WAIT;
        T_PRD_WAIT: if (e_done) begin
          if (e_fail) fail_q <= 1'b1;
          nerr_q <= nerr_q + e_nerr;
          if (int'(j_q) == NCW - 1) begin
            j_q  <= '0;
            q_q  <= (QW+1)'(NPROT);
            qr_q <= (QW+1)'(NPROT);
            ts_q <= (NRAW > 0) ? T_RAW_RD : T_OUT;
          end else begin
            j_q  <= j_q + 1'b1;
            ts_q <= T_PRD_REQ;
          end
        end
        T_RAW_RD: begin
          if (raw_issue && mem_req_ready_i) q_q <= q_q + 1'b1;
          if (mem_rsp_valid_i) begin
            qr_q <= qr_q + 1'b1;
            if (int'(qr_q) == NQ - 1) begin
              w_q  <= '0;
              ts_q <= T_OUT;
            end
          end
        end
        T_OUT: begin
          if (int'(w_q) == NW - 1) ts_q <= T_DONE;
          w_q <= w_q + 1'b1;
        end
        T_DONE: ts_q <= T_IDLE;
        default: ts_q <= T_IDLE;
      endcase
    end
  end

  // the raw planes bypass ECC: only the ECC engine may see the memory
  // responses outside the raw phases, and only the sequencer inside them
  a_raw_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_rsp_valid_i && ts_q == T_RAW_RD) |-> !x_prot);

endmodule
