// tb_stripe_map: checks that consecutive units of consecutive codewords walk
// round-robin over the S channels, that a codeword's M+R units land on
// distinct (channel,row) pairs, that no two codewords overlap, and that raw
// units land in the separate region.
module tb_stripe_map;
  localparam int M = 16, R = 1, S = 16, NRAW = 16;
  logic region;
  logic [25:0] blk;
  logic [5:0] idx;
  logic [3:0] ch;
  logic [32:0] row;
  int checks = 0, failures = 0;

  stripe_map #(.M(M), .R(R), .S(S), .NRAW(NRAW)) dut (.region_i(region), .blk_i(blk),
    .idx_i(idx), .ch_o(ch), .row_o(row));

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int seen[longint];
    int n;
    n = 0;
    region = 0;
    for (int b = 0; b < 40; b++)
      for (int i = 0; i < M + R; i++) begin
        longint key;
        blk = 26'(b); idx = 6'(i);
        #1;
        check(int'(ch) == n % S, $sformatf("blk %0d idx %0d on channel %0d", b, i, ch));
        check(int'(row) == n / S, $sformatf("blk %0d idx %0d row %0d", b, i, row));
        key = {32'(row), 32'(ch)};
        check(!seen.exists(key), "two units at one address");
        seen[key] = 1;
        n++;
      end
    #1 region = 1;
    for (int b = 0; b < 10; b++)
      for (int i = 0; i < NRAW; i++) begin
        blk = 26'(b); idx = 6'(i);
        #1;
        check(row[32] == 1'b1, $sformatf("raw unit not in raw region %h reg %b dutreg %b", row, region, dut.region_i));
        check(int'(ch) == (b * NRAW + i) % S && int'(row[31:0]) == (b * NRAW + i) / S, "raw placement");
      end
    blk = '1; idx = 6'(M); region = 0;
    #1;
    check(longint'(row) == (longint'(67108863) * 17 + 16) / 16 &&
          longint'(ch) == (longint'(67108863) * 17 + 16) % 16, "last codeword");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
