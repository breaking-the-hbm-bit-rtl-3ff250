// tb_hbm_ecc_top: end-to-end test of the whole ECC controller at its default
// parameters (512 B codewords of 16+1 chunks, 16 channels, 512-value BF16
// tensor blocks with the exponent planes protected) against the behavioural
// HBM model, which stalls on some cycles.
//
// Part 1 runs a random mix of chunk-port requests on 8 codewords while
// flipping stored bits as a weak HBM would (at most T symbols per codeword
// between full rewrites). A golden model predicts the data and whether each
// random access must escalate, and the memory traffic of each request is
// checked. Part 2 writes and reads tensor blocks through the bit-plane path:
// an error in an exponent plane must be corrected, an error in a sign or
// mantissa plane must come back as stored (those planes bypass the ECC).
// Every mechanism is counted and must occur at least once.
module tb_hbm_ecc_top;
  import ecc_pkg::*;
  import rs_ref_pkg::*;

  localparam int M = 16, R = 1, NCH = M + R, S = 16, T = 8, NCWS = 8, NOPS = 300;
  localparam int NV = 512, NW = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic h_req_valid, h_req_ready, h_wr_valid, h_wr_ready, h_rd_valid;
  ecc_op_e h_req_op;
  logic [25:0] h_req_cw;
  logic [5:0] h_req_first, h_req_cnt, h_rd_idx;
  chunk_t h_wr_data, h_rd_data;
  logic h_done, h_esc, h_clean, h_fail;
  logic [15:0] h_nerr;
  logic t_req_valid, t_req_ready, t_req_wr, t_wr_valid, t_wr_ready, t_rd_valid, t_done, t_fail;
  logic [25:0] t_req_blk;
  logic [15:0] t_nerr;
  logic [4:0] t_rd_idx;
  chunk_t t_wr_data, t_rd_data;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [3:0] mem_ch;
  logic [32:0] mem_row;
  unit_t mem_wdata, mem_rdata;

  hbm_ecc_top dut (
    .clk, .rst_n,
    .h_req_valid_i(h_req_valid), .h_req_ready_o(h_req_ready), .h_req_op_i(h_req_op),
    .h_req_cw_i(h_req_cw), .h_req_first_i(h_req_first), .h_req_cnt_i(h_req_cnt),
    .h_wr_valid_i(h_wr_valid), .h_wr_ready_o(h_wr_ready), .h_wr_data_i(h_wr_data),
    .h_rd_valid_o(h_rd_valid), .h_rd_idx_o(h_rd_idx), .h_rd_data_o(h_rd_data),
    .h_done_o(h_done), .h_done_escalated_o(h_esc), .h_done_clean_o(h_clean),
    .h_done_fail_o(h_fail), .h_done_nerr_o(h_nerr),
    .t_req_valid_i(t_req_valid), .t_req_ready_o(t_req_ready), .t_req_wr_i(t_req_wr),
    .t_req_blk_i(t_req_blk), .t_wr_valid_i(t_wr_valid), .t_wr_ready_o(t_wr_ready),
    .t_wr_data_i(t_wr_data), .t_rd_valid_o(t_rd_valid), .t_rd_idx_o(t_rd_idx),
    .t_rd_data_o(t_rd_data), .t_done_o(t_done), .t_done_fail_o(t_fail), .t_done_nerr_o(t_nerr),
    .mem_req_valid_o(mem_req_valid), .mem_req_ready_i(mem_req_ready), .mem_req_we_o(mem_req_we),
    .mem_req_ch_o(mem_ch), .mem_req_row_o(mem_row), .mem_req_wdata_o(mem_wdata),
    .mem_rsp_valid_i(mem_rsp_valid), .mem_rsp_rdata_i(mem_rdata)
  );

  hbm_model #(.CH_W(4), .ROW_W(33), .LAT(5), .STALL_PCT(15)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_ch(mem_ch), .req_row(mem_row), .req_wdata(mem_wdata), .rsp_valid(mem_rsp_valid),
    .rsp_rdata(mem_rdata)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int n_seq_wr, n_seq_clean, n_seq_corr, n_rrd_pass, n_rrd_esc, n_rwr_diff, n_rwr_rmw;
  int n_t_wr, n_t_rd, n_t_corr, n_bypass, n_stall, n_uncorr;
  initial begin
    n_seq_wr = 0; n_seq_clean = 0; n_seq_corr = 0; n_rrd_pass = 0; n_rrd_esc = 0;
    n_rwr_diff = 0; n_rwr_rmw = 0; n_t_wr = 0; n_t_rd = 0; n_t_corr = 0; n_bypass = 0;
    n_stall = 0; n_uncorr = 0;
  end

  always @(posedge clk) if (rst_n && mem_req_valid && !mem_req_ready) n_stall++;

  logic [255:0] gold [NCWS][M];
  int           nerrs [NCWS];                 // symbol errors injected since last rewrite
  bit           bad [NCWS][NCH];              // unit holds an injected error
  bit           used [NCWS][NCH][16];         // symbol already hit
  logic [255:0] got [M];
  bit           got_v [M];
  int           nrd, rd0, wr0, nread, nwrite;
  bit           r_esc, r_clean, r_fail;
  int           r_nerr;

  function automatic void unit_addr(input int cw, input int idx, output logic [3:0] ch,
                                    output logic [32:0] row);
    int slot;
    slot = cw * NCH + idx;
    ch  = 4'(slot % S);
    row = 33'(slot / S);
  endfunction

  task automatic inject(input int cw);
    int idx, sym;
    logic [3:0] ch; logic [32:0] row;
    if (nerrs[cw] >= T) return;
    do begin idx = $urandom_range(NCH - 1); sym = $urandom_range(15); end
    while (used[cw][idx][sym] || bad[cw][idx]);
    used[cw][idx][sym] = 1; bad[cw][idx] = 1; nerrs[cw]++;
    unit_addr(cw, idx, ch, row);
    mem.flip(ch, row, 16 + sym * 16 + $urandom_range(15));
  endtask

  task automatic clear_errs(input int cw);
    nerrs[cw] = 0;
    for (int i = 0; i < NCH; i++) begin
      bad[cw][i] = 0;
      for (int k = 0; k < 16; k++) used[cw][i][k] = 0;
    end
  endtask

  task automatic request(input ecc_op_e op, input int cw, input int first, input int cnt,
                         input logic [255:0] wd[$]);
    rd0 = mem.reads; wr0 = mem.writes;
    foreach (got_v[i]) got_v[i] = 0;
    nrd = 0;
    @(negedge clk);
    h_req_valid = 1; h_req_op = op; h_req_cw = 26'(cw); h_req_first = 6'(first);
    h_req_cnt = 6'(cnt);
    @(posedge clk);
    while (!h_req_ready) @(posedge clk);
    @(negedge clk);
    h_req_valid = 0;
    foreach (wd[i]) begin
      h_wr_valid = 1; h_wr_data = wd[i];
      @(posedge clk);
      while (!h_wr_ready) @(posedge clk);
      @(negedge clk);
    end
    h_wr_valid = 0;
    forever begin
      if (h_rd_valid) begin got[h_rd_idx[3:0]] = h_rd_data; got_v[h_rd_idx[3:0]] = 1; nrd++; end
      if (h_done) begin
        r_esc = h_esc; r_clean = h_clean; r_fail = h_fail; r_nerr = int'(h_nerr);
        break;
      end
      @(negedge clk);
    end
    @(negedge clk);
    nread = mem.reads - rd0; nwrite = mem.writes - wr0;
  endtask

  task automatic check_data(input int cw, input int first, input int cnt, input string tag);
    check(nrd == cnt, $sformatf("%s: %0d chunks returned, expected %0d", tag, nrd, cnt));
    for (int i = first; i < first + cnt; i++)
      check(got_v[i] && got[i] == gold[cw][i], $sformatf("%s cw %0d chunk %0d", tag, cw, i));
  endtask

  // ---------------- tensor helpers ----------------
  logic [15:0] tvals [NV];
  logic [15:0] tback [NV];
  int tw0, tr0;

  task automatic tensor_write(input int blk);
    tr0 = mem.reads; tw0 = mem.writes;
    @(negedge clk);
    t_req_valid = 1; t_req_wr = 1; t_req_blk = 26'(blk);
    @(posedge clk);
    while (!t_req_ready) @(posedge clk);
    @(negedge clk);
    t_req_valid = 0;
    for (int w = 0; w < NW; w++) begin
      t_wr_valid = 1;
      for (int k = 0; k < 16; k++) t_wr_data[k*16 +: 16] = tvals[w*16 + k];
      @(posedge clk);
      while (!t_wr_ready) @(posedge clk);
      @(negedge clk);
    end
    t_wr_valid = 0;
    while (!t_done) @(negedge clk);
    @(negedge clk);
    check(mem.writes - tw0 == NCH + 16, $sformatf("tensor write traffic %0d", mem.writes - tw0));
    n_t_wr++;
  endtask

  task automatic tensor_read(input int blk, output bit fail, output int nerr);
    int n;
    tr0 = mem.reads;
    @(negedge clk);
    t_req_valid = 1; t_req_wr = 0; t_req_blk = 26'(blk);
    @(posedge clk);
    while (!t_req_ready) @(posedge clk);
    @(negedge clk);
    t_req_valid = 0;
    n = 0;
    forever begin
      if (t_rd_valid) begin
        for (int k = 0; k < 16; k++) tback[int'(t_rd_idx)*16 + k] = t_rd_data[k*16 +: 16];
        n++;
      end
      if (t_done) begin fail = t_fail; nerr = int'(t_nerr); break; end
      @(negedge clk);
    end
    @(negedge clk);
    check(n == NW, "tensor read beats");
    check(mem.reads - tr0 == NCH + 16, $sformatf("tensor read traffic %0d", mem.reads - tr0));
    n_t_rd++;
  endtask

  initial begin
    logic [255:0] wd[$];
    h_req_valid = 0; h_wr_valid = 0; h_req_op = OP_SEQ_RD; h_req_cw = 0; h_req_first = 0;
    h_req_cnt = 0; h_wr_data = '0; t_req_valid = 0; t_req_wr = 0; t_req_blk = 0;
    t_wr_valid = 0; t_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- part 1: chunk port ----
    for (int cw = 0; cw < NCWS; cw++) begin
      wd.delete();
      for (int i = 0; i < M; i++) begin gold[cw][i] = rand_chunk(); wd.push_back(gold[cw][i]); end
      request(OP_SEQ_WR, cw, 0, M, wd);
      clear_errs(cw);
      n_seq_wr++;
    end
    for (int n = 0; n < NOPS; n++) begin
      int cw, op, first, cnt;
      bit exp_esc;
      cw = $urandom_range(NCWS - 1);
      if ($urandom_range(2) == 0) inject(cw);
      op = $urandom_range(3);
      first = $urandom_range(M - 1);
      cnt = $urandom_range(M - first, 1);
      wd.delete();
      case (op)
        0: begin
          for (int i = 0; i < M; i++) begin gold[cw][i] = rand_chunk(); wd.push_back(gold[cw][i]); end
          request(OP_SEQ_WR, cw, 0, M, wd);
          check(nwrite == NCH && nread == 0, "SEQ_WR traffic");
          clear_errs(cw);
          n_seq_wr++;
        end
        1: begin
          request(OP_SEQ_RD, cw, 0, M, wd);
          check_data(cw, 0, M, "SEQ_RD");
          check(nread == NCH && !r_fail && r_nerr == nerrs[cw] && r_clean == (nerrs[cw] == 0),
                $sformatf("SEQ_RD flags: nerr %0d expected %0d clean %0d", r_nerr, nerrs[cw], r_clean));
          if (r_clean) n_seq_clean++; else n_seq_corr++;
        end
        2: begin
          exp_esc = 0;
          for (int i = first; i < first + cnt; i++) if (bad[cw][i]) exp_esc = 1;
          request(OP_RND_RD, cw, first, cnt, wd);
          check_data(cw, first, cnt, "RND_RD");
          check(r_esc == exp_esc && nread == (exp_esc ? NCH : cnt) && nwrite == 0 && !r_fail,
                $sformatf("RND_RD esc %0d expected %0d, %0d reads", r_esc, exp_esc, nread));
          if (exp_esc) n_rrd_esc++; else n_rrd_pass++;
        end
        default: begin
          exp_esc = 0;
          for (int i = 0; i < NCH; i++)
            if (bad[cw][i] && ((i >= first && i < first + cnt) || i >= M)) exp_esc = 1;
          for (int i = first; i < first + cnt; i++) begin
            gold[cw][i] = rand_chunk(); wd.push_back(gold[cw][i]);
          end
          request(OP_RND_WR, cw, first, cnt, wd);
          check(r_esc == exp_esc && !r_fail &&
                nread == (exp_esc ? NCH : cnt + R) && nwrite == (exp_esc ? NCH : cnt + R),
                $sformatf("RND_WR esc %0d expected %0d, r%0d w%0d", r_esc, exp_esc, nread, nwrite));
          if (exp_esc) begin clear_errs(cw); n_rwr_rmw++; end else n_rwr_diff++;
        end
      endcase
    end
    // every codeword must still read back correctly
    for (int cw = 0; cw < NCWS; cw++) begin
      wd.delete();
      request(OP_SEQ_RD, cw, 0, M, wd);
      check_data(cw, 0, M, "final SEQ_RD");
    end

    // uncorrectable codeword: T+1 symbol errors
    wd.delete();
    for (int i = 0; i < M; i++) begin gold[7][i] = rand_chunk(); wd.push_back(gold[7][i]); end
    request(OP_SEQ_WR, 7, 0, M, wd);
    clear_errs(7);
    for (int e = 0; e <= T; e++) inject(7);
    if (nerrs[7] == T) begin  // inject() stops at T: add one more symbol by hand
      logic [3:0] ch; logic [32:0] row;
      for (int i = 0; i < NCH; i++)
        if (!bad[7][i]) begin
          unit_addr(7, i, ch, row); mem.flip(ch, row, 16 + 3); break;
        end
    end
    wd.delete();
    request(OP_SEQ_RD, 7, 0, M, wd);
    check(r_fail, "T+1 errors not flagged");
    if (r_fail) n_uncorr++;

    // ---- part 2: tensor port, importance-adaptive protection ----
    for (int blk = 100; blk < 102; blk++) begin
      bit f; int ne;
      foreach (tvals[i]) tvals[i] = 16'($urandom);
      tensor_write(blk);
      tensor_read(blk, f, ne);
      check(!f && ne == 0, "clean tensor read flags");
      for (int i = 0; i < NV; i++) check(tback[i] == tvals[i], $sformatf("tensor value %0d", i));
    end
    begin
      bit f; int ne;
      logic [3:0] ch; logic [32:0] row;
      // exponent plane: protected codeword 101, unit 3, symbol 5
      unit_addr(101, 3, ch, row); mem.flip(ch, row, 16 + 5 * 16 + 2);
      // sign plane (raw unit 0): value 5 bit 15; mantissa plane 6 (raw unit 2): value 77 bit 6
      mem.flip(4'((101 * 16 + 0) % 16), 33'(64'h1_0000_0000 + longint'((101 * 16 + 0) / 16)), 16 + 5);
      mem.flip(4'((101 * 16 + 2) % 16), 33'(64'h1_0000_0000 + longint'((101 * 16 + 2) / 16)), 16 + 77);
      tensor_read(101, f, ne);
      check(!f && ne == 1, $sformatf("tensor read with exponent error: fail %0d nerr %0d", f, ne));
      if (!f && ne == 1) n_t_corr++;
      for (int i = 0; i < NV; i++) begin
        logic [15:0] e;
        e = tvals[i];
        if (i == 5)  e[15] = ~e[15];
        if (i == 77) e[6]  = ~e[6];
        check(tback[i] == e, $sformatf("tensor value %0d after errors: %h expected %h", i, tback[i], e));
      end
      if (tback[5] != tvals[5] && tback[77] != tvals[77]) n_bypass++;
    end

    $display("mechanisms: seq_wr %0d seq_rd_clean %0d seq_rd_corrected %0d rnd_rd_crc_pass %0d rnd_rd_escalated %0d rnd_wr_differential %0d rnd_wr_rmw %0d tensor_wr %0d tensor_rd %0d tensor_exp_corrected %0d raw_plane_bypass %0d mem_stall_cycles %0d uncorrectable %0d",
             n_seq_wr, n_seq_clean, n_seq_corr, n_rrd_pass, n_rrd_esc, n_rwr_diff, n_rwr_rmw,
             n_t_wr, n_t_rd, n_t_corr, n_bypass, n_stall, n_uncorr);
    check(n_seq_wr > 0, "no sequential write");
    check(n_seq_clean > 0, "no early-terminated sequential read");
    check(n_seq_corr > 0, "no corrected sequential read");
    check(n_rrd_pass > 0, "no random read served on CRC pass");
    check(n_rrd_esc > 0, "no random read escalation");
    check(n_rwr_diff > 0, "no differential parity update");
    check(n_rwr_rmw > 0, "no read-modify-write fallback");
    check(n_t_wr > 0 && n_t_rd > 0, "no tensor access");
    check(n_t_corr > 0, "no corrected exponent plane");
    check(n_bypass > 0, "no bypassed plane");
    check(n_stall > 0, "no memory stall");
    check(n_uncorr > 0, "no uncorrectable codeword");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
