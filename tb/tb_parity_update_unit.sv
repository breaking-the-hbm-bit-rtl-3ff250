// tb_parity_update_unit: checks the differential parity update. For random
// codewords and random runs of k updated chunks, P_old ^ RS(D_new) ^
// RS(D_old) from the unit must equal the reference parity of the updated
// codeword. Also checks the full-encode use (D_old = 0, P_old = 0).
module tb_parity_update_unit;
  import ecc_pkg::*;
  import rs_ref_pkg::*;

  localparam int M = 16, R = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid;
  chunk_t old_c, new_c;
  logic [R*CHUNK_W-1:0] p_old, p_new;
  int checks = 0, failures = 0;

  parity_update_unit #(.R(R)) dut (.clk, .rst_n, .clear_i(clear), .in_valid_i(in_valid),
    .old_i(old_c), .new_i(new_c), .p_old_i(p_old), .p_new_o(p_new));

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    clear = 0; in_valid = 0; old_c = '0; new_c = '0; p_old = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      logic [255:0] data[], upd[], cw_old[], cw_new[];
      int first, k;
      bit full;
      full = (n % 5 == 0);
      data = new[M]; upd = new[M];
      foreach (data[i]) data[i] = rand_chunk();
      ref_codeword(data, R, cw_old);
      first = full ? 0 : $urandom_range(M - 1);
      k = full ? M : $urandom_range(M - first, 1);
      foreach (upd[i]) upd[i] = (i >= first && i < first + k) ? rand_chunk() : data[i];
      ref_codeword(upd, R, cw_new);
      for (int j = 0; j < R; j++) p_old[j*CHUNK_W +: CHUNK_W] = full ? '0 : cw_old[M + j];
      for (int i = 0; i < M; i++) begin
        bit hit;
        hit = (i >= first && i < first + k);
        clear <= (i == 0); in_valid <= 1;
        old_c <= (hit && !full) ? data[i] : '0;
        new_c <= hit ? upd[i] : '0;
        @(posedge clk);
      end
      clear <= 0; in_valid <= 0;
      #1;
      for (int j = 0; j < R; j++)
        check(p_new[j*CHUNK_W +: CHUNK_W] == cw_new[M + j],
              $sformatf("update %0d (first %0d k %0d) parity %0d mismatch", n, first, k, j));
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
