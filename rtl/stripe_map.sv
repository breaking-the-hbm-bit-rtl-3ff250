// stripe_map: places the 34-byte units of a codeword on the HBM channels.
//
// The paper stripes the CRC-augmented chunks of one RS codeword sequentially
// across s independent HBM channels (16 channels of 128 bit in an HBM3E
// stack), so that a codeword is read and written with channel parallelism.
// Here the units of all codewords form one sequence of slots: unit idx of
// codeword blk is slot blk*(M+R)+idx, placed on channel slot mod S at row
// slot div S. A codeword of 17 units therefore spans all 16 channels and wraps
// one unit into the next row; the next codeword continues where it ends. The
// exact address arithmetic is this design's choice.
// Bit-planes left unprotected by importance-adaptive ECC are stored in a
// separate raw region (region_i = 1) with NRAW units per block, striped the
// same way; the region is the top bit of the row address.
//
// Interface: region_i, blk_i, idx_i in; ch_o, row_o out. Combinational.
module stripe_map #(
  parameter int M    = 16,  // data chunks per codeword
  parameter int R    = 1,   // parity chunks per codeword
  parameter int S    = 16,  // channels a codeword is striped over
  parameter int NRAW = 16,  // raw (unprotected) units per block
  parameter int BLK_W = 26, // codeword / block index width
  parameter int IDX_W = 6,  // unit index width within a codeword
  parameter int CH_W  = $clog2(S),
  parameter int ROW_W = BLK_W + IDX_W + 1
) (
  input  logic             region_i,
  input  logic [BLK_W-1:0] blk_i,
  input  logic [IDX_W-1:0] idx_i,
  output logic [CH_W-1:0]  ch_o,
  output logic [ROW_W-1:0] row_o
);

  localparam int SLOT_W = ROW_W - 1 + CH_W;

  logic [SLOT_W-1:0] slot, per_blk;
  logic [ROW_W-2:0]  line;

  assign per_blk = region_i ? SLOT_W'(NRAW) : SLOT_W'(M + R);
  assign slot    = SLOT_W'(blk_i) * per_blk + SLOT_W'(idx_i);
  assign line    = (ROW_W-1)'(slot / SLOT_W'(S));
  assign ch_o    = CH_W'(slot % SLOT_W'(S));
  assign row_o   = {region_i, line};

endmodule
