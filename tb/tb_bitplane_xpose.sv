// tb_bitplane_xpose: loads a block of 512 random BF16 values through the
// value port and checks every plane chunk against planes computed here: the
// 16 protected chunks must be the exponent planes 14..7 (two parts each), the
// 16 raw chunks the sign and mantissa planes. Then writes random plane chunks
// and checks the values read back.
module tb_bitplane_xpose;
  import ecc_pkg::*;
  import rs_ref_pkg::*;

  localparam int NV = 512, VW = 16, NW = 32, NQ = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic val_we, pl_we, prot;
  logic [4:0] val_idx, pl_q;
  chunk_t val_wdata, val_rdata, pl_wdata, pl_rdata;
  int checks = 0, failures = 0;

  bitplane_xpose dut (.clk, .val_we_i(val_we), .val_idx_i(val_idx), .val_wdata_i(val_wdata),
    .val_rdata_o(val_rdata), .pl_we_i(pl_we), .pl_q_i(pl_q), .pl_wdata_i(pl_wdata),
    .pl_rdata_o(pl_rdata), .pl_prot_o(prot));

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected plane order: protected 14..7, raw 15, 6..0
  function automatic int plane_of(input int q);
    int prot_planes[8] = '{14, 13, 12, 11, 10, 9, 8, 7};
    int raw_planes[8]  = '{15, 6, 5, 4, 3, 2, 1, 0};
    return (q < 16) ? prot_planes[q / 2] : raw_planes[(q - 16) / 2];
  endfunction

  logic [15:0] v [NV];

  initial begin
    val_we = 0; pl_we = 0; val_idx = 0; pl_q = 0; val_wdata = '0; pl_wdata = '0;
    @(posedge clk);
    foreach (v[i]) v[i] = 16'($urandom);
    for (int w = 0; w < NW; w++) begin
      val_we <= 1; val_idx <= 5'(w);
      for (int k = 0; k < 16; k++) val_wdata[k*16 +: 16] <= v[w*16 + k];
      @(posedge clk);
    end
    val_we <= 0;
    @(posedge clk);
    for (int q = 0; q < NQ; q++) begin
      logic [255:0] e;
      int p, part;
      p = plane_of(q); part = q % 2;
      for (int b = 0; b < 256; b++) e[b] = v[part * 256 + b][p];
      pl_q = 5'(q);
      #1;
      check(pl_rdata == e, $sformatf("plane chunk %0d (plane %0d part %0d)", q, p, part));
      check(prot == (q < 16), $sformatf("protect flag of %0d", q));
    end
    // write planes, read values
    for (int q = 0; q < NQ; q++) begin
      logic [255:0] c;
      int p, part;
      c = rand_chunk();
      p = plane_of(q); part = q % 2;
      for (int b = 0; b < 256; b++) v[part * 256 + b][p] = c[b];
      @(negedge clk);
      pl_we = 1; pl_q = 5'(q); pl_wdata = c;
      @(posedge clk);
      #1 pl_we = 0;
    end
    for (int w = 0; w < NW; w++) begin
      logic [255:0] e;
      for (int k = 0; k < 16; k++) e[k*16 +: 16] = v[w*16 + k];
      val_idx = 5'(w);
      #1;
      check(val_rdata == e, $sformatf("value word %0d", w));
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
