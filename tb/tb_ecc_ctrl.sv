// tb_ecc_ctrl: end-to-end test of the hybrid RS/CRC engine against the
// behavioural HBM model. A golden copy of every codeword's data is kept here;
// stored units are compared with reference codewords and CRCs. Covered:
// sequential write and read (clean, early-terminated, and with up to T symbol
// errors), random read with CRC pass (only k units read) and with CRC failure
// (escalation, whole codeword read and decoded), random write with CRC pass
// (differential parity, only k+R units read and written) and with CRC failure
// (full read-modify-write), plus an error outside the requested chunks that
// must not escalate. Memory traffic per request is checked exactly.
module tb_ecc_ctrl;
  import ecc_pkg::*;
  import rs_ref_pkg::*;

  localparam int M = 16, R = 1, NCH = M + R, S = 16, T = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, wr_valid, wr_ready, rd_valid;
  ecc_op_e req_op;
  logic [25:0] req_cw;
  logic [5:0] req_first, req_cnt, rd_idx;
  chunk_t wr_data, rd_data;
  logic done, d_esc, d_clean, d_fail;
  logic [15:0] d_nerr;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [3:0] mem_ch;
  logic [32:0] mem_row;
  unit_t mem_wdata, mem_rdata;

  ecc_ctrl dut (
    .clk, .rst_n, .req_valid_i(req_valid), .req_ready_o(req_ready), .req_op_i(req_op),
    .req_cw_i(req_cw), .req_first_i(req_first), .req_cnt_i(req_cnt),
    .wr_valid_i(wr_valid), .wr_ready_o(wr_ready), .wr_data_i(wr_data),
    .rd_valid_o(rd_valid), .rd_idx_o(rd_idx), .rd_data_o(rd_data),
    .done_o(done), .done_escalated_o(d_esc), .done_clean_o(d_clean), .done_fail_o(d_fail),
    .done_nerr_o(d_nerr),
    .mem_req_valid_o(mem_req_valid), .mem_req_ready_i(mem_req_ready), .mem_req_we_o(mem_req_we),
    .mem_req_ch_o(mem_ch), .mem_req_row_o(mem_row), .mem_req_wdata_o(mem_wdata),
    .mem_rsp_valid_i(mem_rsp_valid), .mem_rsp_rdata_i(mem_rdata)
  );

  hbm_model #(.CH_W(4), .ROW_W(33), .LAT(3), .STALL_PCT(20)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_ch(mem_ch), .req_row(mem_row), .req_wdata(mem_wdata), .rsp_valid(mem_rsp_valid),
    .rsp_rdata(mem_rdata)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [255:0] gold [8][M];      // golden data of codewords 0..7
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

  // flip one bit of symbol sym of unit idx of codeword cw in memory
  task automatic hit(input int cw, input int idx, input int sym, input int b);
    logic [3:0] ch; logic [32:0] row;
    unit_addr(cw, idx, ch, row);
    mem.flip(ch, row, 16 + sym * 16 + b);
  endtask

  task automatic request(input ecc_op_e op, input int cw, input int first, input int cnt,
                         input logic [255:0] wd[$]);
    rd0 = mem.reads; wr0 = mem.writes;
    foreach (got_v[i]) got_v[i] = 0;
    nrd = 0;
    @(negedge clk);
    req_valid = 1; req_op = op; req_cw = 26'(cw); req_first = 6'(first); req_cnt = 6'(cnt);
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    foreach (wd[i]) begin
      wr_valid = 1; wr_data = wd[i];
      @(posedge clk);
      while (!wr_ready) @(posedge clk);
      @(negedge clk);
    end
    wr_valid = 0;
    forever begin
      if (rd_valid) begin got[rd_idx[3:0]] = rd_data; got_v[rd_idx[3:0]] = 1; nrd++; end
      if (done) begin
        r_esc = d_esc; r_clean = d_clean; r_fail = d_fail; r_nerr = int'(d_nerr);
        break;
      end
      @(negedge clk);
    end
    @(negedge clk);
    nread = mem.reads - rd0; nwrite = mem.writes - wr0;
  endtask

  // stored codeword must equal the reference encoding of gold[cw] with CRCs
  task automatic check_stored(input int cw, input string tag);
    logic [255:0] d[]; logic [255:0] ref_cw[];
    logic [3:0] ch; logic [32:0] row; logic [271:0] u;
    d = new[M];
    foreach (d[i]) d[i] = gold[cw][i];
    ref_codeword(d, R, ref_cw);
    for (int i = 0; i < NCH; i++) begin
      unit_addr(cw, i, ch, row);
      u = mem.peek(ch, row);
      check(u[271:16] == ref_cw[i] && u[15:0] == ref_crc(ref_cw[i]),
            $sformatf("%s: stored unit %0d of codeword %0d", tag, i, cw));
    end
  endtask

  task automatic check_read(input int cw, input int first, input int cnt, input string tag);
    check(nrd == cnt, $sformatf("%s: %0d chunks returned, expected %0d", tag, nrd, cnt));
    for (int i = first; i < first + cnt; i++)
      check(got_v[i] && got[i] == gold[cw][i], $sformatf("%s: chunk %0d", tag, i));
  endtask

  initial begin
    logic [255:0] wd[$];
    req_valid = 0; wr_valid = 0; req_op = OP_SEQ_RD; req_cw = 0; req_first = 0; req_cnt = 0;
    wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- sequential writes ----
    for (int cw = 0; cw < 8; cw++) begin
      wd.delete();
      for (int i = 0; i < M; i++) begin gold[cw][i] = rand_chunk(); wd.push_back(gold[cw][i]); end
      request(OP_SEQ_WR, cw, 0, M, wd);
      check(nwrite == NCH && nread == 0, $sformatf("SEQ_WR traffic r%0d w%0d", nread, nwrite));
      check_stored(cw, "SEQ_WR");
    end
    wd.delete();

    // ---- sequential read, clean: early termination ----
    request(OP_SEQ_RD, 2, 0, M, wd);
    check_read(2, 0, M, "SEQ_RD clean");
    check(r_clean && !r_fail && !r_esc && nread == NCH, "SEQ_RD clean flags/traffic");

    // ---- sequential read with T symbol errors spread over the codeword ----
    for (int e = 0; e < T; e++) hit(3, (e * 2) % NCH, e, e);
    request(OP_SEQ_RD, 3, 0, M, wd);
    check_read(3, 0, M, "SEQ_RD T errors");
    check(!r_clean && !r_fail && r_nerr == T, $sformatf("SEQ_RD nerr %0d", r_nerr));

    // ---- random read, CRC pass: only k units read ----
    request(OP_RND_RD, 4, 5, 3, wd);
    check_read(4, 5, 3, "RND_RD pass");
    check(!r_esc && nread == 3, $sformatf("RND_RD pass traffic %0d esc %0d", nread, r_esc));

    // ---- random read, error in a chunk that is not requested: no escalation ----
    hit(4, 0, 3, 7);
    request(OP_RND_RD, 4, 9, 2, wd);
    check_read(4, 9, 2, "RND_RD other chunk bad");
    check(!r_esc && nread == 2, "RND_RD other chunk bad: no escalation");

    // ---- random read, CRC fail in a requested chunk: escalation ----
    hit(4, 10, 1, 0); hit(4, 10, 2, 9);
    request(OP_RND_RD, 4, 9, 2, wd);
    check_read(4, 9, 2, "RND_RD escalated");
    check(r_esc && nread == NCH && !r_fail && r_nerr == 3,
          $sformatf("RND_RD escalation traffic %0d esc %0d nerr %0d", nread, r_esc, r_nerr));

    // ---- random write, CRC pass: differential parity ----
    wd.delete();
    for (int i = 6; i < 10; i++) begin gold[5][i] = rand_chunk(); wd.push_back(gold[5][i]); end
    request(OP_RND_WR, 5, 6, 4, wd);
    check(!r_esc && nread == 4 + R && nwrite == 4 + R,
          $sformatf("RND_WR pass traffic r%0d w%0d", nread, nwrite));
    check_stored(5, "RND_WR diff");
    wd.delete();
    request(OP_SEQ_RD, 5, 0, M, wd);
    check_read(5, 0, M, "read after RND_WR");
    check(r_clean, "codeword clean after differential update");

    // ---- random write, single chunk at the end of the codeword ----
    gold[6][M-1] = rand_chunk(); wd.push_back(gold[6][M-1]);
    request(OP_RND_WR, 6, M - 1, 1, wd);
    check(!r_esc && nread == 1 + R && nwrite == 1 + R, "RND_WR k=1 traffic");
    check_stored(6, "RND_WR k=1");

    // ---- random write, CRC fail on the parity: full read-modify-write ----
    wd.delete();
    hit(7, M, 4, 4); hit(7, 2, 0, 0);
    for (int i = 0; i < 2; i++) begin gold[7][i] = rand_chunk(); wd.push_back(gold[7][i]); end
    request(OP_RND_WR, 7, 0, 2, wd);
    check(r_esc && !r_fail && nread == NCH && nwrite == NCH,
          $sformatf("RND_WR escalation traffic r%0d w%0d esc %0d", nread, nwrite, r_esc));
    check_stored(7, "RND_WR rmw");   // also shows the error in chunk 2 was scrubbed

    // ---- uncorrectable codeword is flagged ----
    wd.delete();
    for (int e = 0; e < T + 2; e++) hit(1, e, e, 3);
    request(OP_SEQ_RD, 1, 0, M, wd);
    check(r_fail, "uncorrectable codeword not flagged");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
