// tb_rs_encoder: feeds random 16-chunk messages to rs_encoder one chunk per
// cycle and compares the parity chunk with a reference encoder that divides
// the whole message polynomial by the generator. Also checks that clear_i
// restarts a codeword and that a codeword can start in the cycle after the
// previous one ended (one chunk per cycle, parity ready the next cycle).
module tb_rs_encoder;
  import ecc_pkg::*;
  import rs_ref_pkg::*;

  localparam int M = 16, R = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid;
  chunk_t in_chunk;
  logic [R*CHUNK_W-1:0] parity;
  int checks = 0, failures = 0;

  rs_encoder #(.R(R)) dut (.clk, .rst_n, .clear_i(clear), .in_valid_i(in_valid),
                           .in_chunk_i(in_chunk), .parity_o(parity));

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    clear = 0; in_valid = 0; in_chunk = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // garbage into the register first, so that clear_i matters
    in_valid <= 1; in_chunk <= rand_chunk();
    @(posedge clk);
    for (int n = 0; n < 20; n++) begin
      logic [255:0] data[];
      logic [255:0] cw[];
      data = new[M];
      foreach (data[i]) data[i] = (n == 0) ? '0 : rand_chunk();
      if (n == 1) data[5] = '0;
      ref_codeword(data, R, cw);
      for (int i = 0; i < M; i++) begin
        clear <= (i == 0); in_valid <= 1; in_chunk <= data[i];
        @(posedge clk);
      end
      clear <= 0; in_valid <= 0;
      #1;
      for (int j = 0; j < R; j++)
        check(parity[j*CHUNK_W +: CHUNK_W] == cw[M + j],
              $sformatf("codeword %0d parity chunk %0d mismatch", n, j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
