// tb_crc16_chunk: checks crc16_chunk against a byte-wise CRC-16/CCITT
// reference on random and corner-case chunks, checks that the checker accepts
// a matching CRC and rejects a chunk or CRC with a flipped bit.
module tb_crc16_chunk;
  import ecc_pkg::*;
  import rs_ref_pkg::*;

  chunk_t chunk;
  crc_t   crc_in, crc_out;
  logic   ok;
  int checks = 0, failures = 0;

  crc16_chunk dut (.chunk_i(chunk), .crc_i(crc_in), .crc_o(crc_out), .crc_ok_o(ok));

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 300; n++) begin
      logic [15:0] exp;
      chunk = (n == 0) ? '0 : (n == 1) ? '1 : rand_chunk();
      exp = ref_crc(chunk);
      crc_in = exp;
      #1;
      check(crc_out == exp, $sformatf("crc %h expected %h", crc_out, exp));
      check(ok, "matching crc rejected");
      chunk[$urandom_range(255)] ^= 1'b1;
      #1;
      check(!ok, "flipped data bit not detected");
      chunk = chunk;
      crc_in = exp ^ (16'h1 << $urandom_range(15));
      #1;
    end
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
