// hbm_model: behavioural model of a low-cost HBM stack seen through the
// controller's unit port, for testbenches only (not synthesizable). Each
// (channel,row) holds one 34 B unit. Reads are answered in order LAT cycles
// after they are accepted; the port stalls (ready low) on a pseudo-random
// STALL_PCT percent of cycles. Faults are injected with flip(), which flips a
// stored bit as a weak cell would, and every access is counted so that a
// testbench can measure read and write amplification.
module hbm_model #(
  parameter int CH_W      = 4,
  parameter int ROW_W     = 23,
  parameter int LAT       = 4,
  parameter int STALL_PCT = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  logic [CH_W-1:0]  req_ch,
  input  logic [ROW_W-1:0] req_row,
  input  logic [271:0]     req_wdata,
  output logic             rsp_valid,
  output logic [271:0]     rsp_rdata
);
  logic [271:0] mem [longint];
  logic [271:0] pipe_d [LAT];
  logic         pipe_v [LAT];
  int reads = 0, writes = 0;

  function automatic longint key(input logic [CH_W-1:0] ch, input logic [ROW_W-1:0] row);
    return (longint'(row) << CH_W) | longint'(ch);
  endfunction

  task automatic flip(input logic [CH_W-1:0] ch, input logic [ROW_W-1:0] row, input int bitpos);
    longint k;
    k = key(ch, row);
    if (!mem.exists(k)) mem[k] = '0;
    mem[k][bitpos] = ~mem[k][bitpos];
  endtask

  function automatic logic [271:0] peek(input logic [CH_W-1:0] ch, input logic [ROW_W-1:0] row);
    longint k;
    k = key(ch, row);
    return mem.exists(k) ? mem[k] : '0;
  endfunction

  always @(posedge clk) req_ready <= ($urandom_range(99) >= STALL_PCT);

  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_rdata = pipe_d[LAT-1];

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pipe_v[i] <= 0; pipe_d[i] <= '0; end
    end else begin
      for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
      pipe_v[0] <= 0;
      if (req_valid && req_ready) begin
        longint k;
        k = key(req_ch, req_row);
        if (req_we) begin
          mem[k] = req_wdata;
          writes++;
        end else begin
          pipe_v[0] <= 1;
          pipe_d[0] <= mem.exists(k) ? mem[k] : '0;
          reads++;
        end
      end
    end
  end
endmodule
