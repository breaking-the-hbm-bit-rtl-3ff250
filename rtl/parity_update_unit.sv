// parity_update_unit: computes the parity of a codeword after a partial
// update without reading the rest of the codeword (differential encoding).
//
// Following the paper, two sparse M x 32 B vectors are formed: D_old holds
// the old values of the k updated chunks in their positions and zeros
// elsewhere, D_new the new values. Each is encoded by its own RS encoder and,
// RS being linear, the new parity is
//     P_new = P_old ^ RS(D_new) ^ RS(D_old).
// The same unit does a full (re-)encode when D_old is all zero and P_old is
// zero, which the controller uses for sequential writes and for the
// read-modify-write fallback; that reuse is this design's choice.
//
// Interface: clear_i starts a codeword. For each of the M chunk positions in
// order, in_valid_i presents old_i and new_i (zero for untouched positions).
// p_old_i is the parity read from memory; p_new_o is valid once all M
// positions have been presented and stays until the next clear_i.
// Timing: one chunk position per cycle, M cycles per codeword; p_new_o is
// combinational from the encoder registers and p_old_i.
module parity_update_unit
  import ecc_pkg::*;
#(
  parameter int R = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear_i,
  input  logic                 in_valid_i,
  input  chunk_t               old_i,
  input  chunk_t               new_i,
  input  logic [R*CHUNK_W-1:0] p_old_i,
  output logic [R*CHUNK_W-1:0] p_new_o
);

  logic [R*CHUNK_W-1:0] rs_old, rs_new;

  rs_encoder #(.R(R)) u_enc_old (
    .clk, .rst_n, .clear_i, .in_valid_i, .in_chunk_i(old_i), .parity_o(rs_old)
  );

  rs_encoder #(.R(R)) u_enc_new (
    .clk, .rst_n, .clear_i, .in_valid_i, .in_chunk_i(new_i), .parity_o(rs_new)
  );

  assign p_new_o = p_old_i ^ rs_new ^ rs_old;

endmodule
