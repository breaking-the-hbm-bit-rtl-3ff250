// tb_rs_decoder: self-checking test of rs_decoder at the default codeword
// (16 data + 1 parity chunk, 16 parity symbols, corrects 8 symbols).
// Codewords are built by the reference long-division encoder; 0..T random
// symbol errors (and T+1..T+3 for the failure case) are injected, and the
// corrected data, the error count, the clean/fail flags and the latency
// (M cycles when clean, NP+1+NCH cycles otherwise) are checked.
module tb_rs_decoder;
  import ecc_pkg::*;
  import rs_ref_pkg::*;

  localparam int M = 16, R = 1, NCH = M + R, NP = 16 * R, T = NP / 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, done, clean, fail;
  chunk_t in_chunk, out_chunk;
  logic [$clog2(NCH)-1:0] out_idx;
  logic [15:0] nerr;
  int checks = 0, failures = 0;

  rs_decoder #(.M(M), .R(R)) dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready), .in_chunk_i(in_chunk),
    .out_valid_o(out_valid), .out_idx_o(out_idx), .out_chunk_o(out_chunk),
    .done_o(done), .clean_o(clean), .fail_o(fail), .nerr_o(nerr)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_case(input int nerrs, input bit expect_fail);
    logic [255:0] data[];
    logic [255:0] cw[];
    logic [255:0] rx[];
    logic [255:0] got[];
    int pos[$];
    int cyc, ngot;
    bit d_clean, d_fail;
    logic [15:0] d_nerr;
    data = new[M];
    foreach (data[i]) data[i] = rand_chunk();
    ref_codeword(data, R, cw);
    rx = new[NCH];
    foreach (cw[i]) rx[i] = cw[i];
    while (pos.size() < nerrs) begin
      int p;
      p = $urandom_range(NCH * 16 - 1);
      if (!(p inside {pos})) pos.push_back(p);
    end
    foreach (pos[i]) begin
      logic [15:0] e;
      e = 16'($urandom_range(65535, 1));
      rx[pos[i] / 16][(pos[i] % 16) * 16 +: 16] ^= e;
    end
    // drive
    for (int i = 0; i < NCH; i++) begin
      in_valid <= 1; in_chunk <= rx[i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 0;
    got = new[M];
    ngot = 0; cyc = 0;
    forever begin
      #1;
      if (out_valid) begin
        got[out_idx] = out_chunk;
        ngot++;
      end
      if (done) begin
        d_clean = clean; d_fail = fail; d_nerr = nerr;
        break;
      end
      @(posedge clk);
      cyc++;
    end
    @(posedge clk);
    check(ngot == M, $sformatf("%0d data chunks out, expected %0d", ngot, M));
    if (!expect_fail) begin
      for (int i = 0; i < M; i++)
        check(got[i] == data[i], $sformatf("nerr=%0d chunk %0d wrong", nerrs, i));
      check(d_fail == 0, "unexpected fail flag");
      check(d_nerr == 16'(nerrs), $sformatf("nerr reported %0d, injected %0d", d_nerr, nerrs));
      check(d_clean == (nerrs == 0), "clean flag");
      // latency from the cycle after the last input to done
      check(cyc == ((nerrs == 0) ? M - 1 : NP + 1 + NCH - 1),
            $sformatf("latency %0d for %0d errors", cyc, nerrs));
    end else begin
      check(d_fail == 1, $sformatf("%0d errors not flagged as uncorrectable", nerrs));
    end
  endtask

  initial begin
    in_valid = 0; in_chunk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int rep = 0; rep < 3; rep++)
      for (int e = 0; e <= T; e++) run_case(e, 0);
    for (int e = T + 1; e <= T + 3; e++) run_case(e, 1);
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
