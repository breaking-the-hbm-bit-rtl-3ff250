// bitplane_xpose: bit-plane transposition for importance-adaptive ECC.
//
// The paper stores a block of m numbers of n bits as n bit-planes (plane i
// holds bit i of every number) and sends only the critical planes, set S,
// through CRC and RS; all other planes bypass the ECC logic. For BF16 it
// always protects the exponent planes. This unit holds one block of NV values
// and gives two views of it: value words (16 values, 32 B, per access) on the
// host side, and 32 B plane chunks on the memory side. With NV = 512 BF16
// values each plane is two 32 B chunks (part 0: values 0..255, part 1: values
// 256..511); bit b of part c of plane p is bit p of value 256*c + b.
//
// Plane chunks are addressed by their position q in a stream that lists the
// protected chunks first and then the unprotected ones, each group by plane
// from the top bit down, parts in order. pl_prot_o tells which group q is in.
// With the default criticality map PLANE_MASK = 16'h7F80 (BF16 exponent,
// bits 14..7, protected-plane ratio 1/2) the block yields 16 protected chunks,
// exactly the data of one default RS codeword, and 16 raw chunks. The block
// size, stream order and this match are this design's choices; the bit-plane
// definition and the exponent-only map follow the paper.
//
// Interface: val_we_i writes value word val_idx_i; val_rdata_o reads it.
// pl_we_i writes plane chunk pl_q_i; pl_rdata_o reads it. Writes take effect
// at the clock edge, reads are combinational. A value write and a plane write
// must not happen in the same cycle (the plane write wins).
module bitplane_xpose
  import ecc_pkg::*;
#(
  parameter int          NV         = 512,        // values per block
  parameter int          VW         = 16,         // bits per value (BF16)
  parameter logic [15:0] PLANE_MASK = 16'h7F80,   // critical planes (exponent)
  parameter int          NW         = NV * VW / CHUNK_W, // value words per block
  parameter int          CPP        = NV / CHUNK_W,      // chunks per plane
  parameter int          NQ         = VW * CPP           // plane chunks per block
) (
  input  logic                   clk,
  input  logic                   val_we_i,
  input  logic [$clog2(NW)-1:0]  val_idx_i,
  input  chunk_t                 val_wdata_i,
  output chunk_t                 val_rdata_o,
  input  logic                   pl_we_i,
  input  logic [$clog2(NQ)-1:0]  pl_q_i,
  input  chunk_t                 pl_wdata_i,
  output chunk_t                 pl_rdata_o,
  output logic                   pl_prot_o
);

  localparam int VPW = CHUNK_W / VW;   // values per value word

  function automatic int nprot_f();
    int n = 0;
    for (int p = 0; p < VW; p++) if (PLANE_MASK[p]) n++;
    return n * CPP;
  endfunction
  localparam int NPROT = nprot_f();

  localparam int PLW = $clog2(VW);
  localparam int PTW = (CPP > 1) ? $clog2(CPP) : 1;
  localparam int WIW = $clog2(NW);

  // Block storage as flip-flops, one packed word per value.
  logic [NV-1:0][VW-1:0] vals_q;

  // stream position -> plane and part
  logic [PLW-1:0] plane;
  logic [PTW-1:0] part;
  always_comb begin
    int rank, qq;
    logic want_prot;
    want_prot = (int'(pl_q_i) < NPROT);
    qq    = want_prot ? int'(pl_q_i) : int'(pl_q_i) - NPROT;
    rank  = 0;
    plane = '0;
    part  = PTW'(qq % CPP);
    for (int p = VW - 1; p >= 0; p--) begin
      if (PLANE_MASK[p] == want_prot) begin
        if (rank == qq / CPP) plane = PLW'(p);
        rank++;
      end
    end
  end
  assign pl_prot_o = (int'(pl_q_i) < NPROT);

  // Plane view: bit b of the chunk is bit 'plane' of value part*256+b.
  for (genvar b = 0; b < CHUNK_W; b++) begin : g_plane_rd
    logic [CPP*VW-1:0] cand;
    for (genvar c = 0; c < CPP; c++) begin : g_part
      assign cand[c*VW +: VW] = vals_q[c*CHUNK_W + b];
    end
    assign pl_rdata_o[b] = cand[{part, plane}];
  end

  // Value view: word w holds values VPW*w .. VPW*w+VPW-1.
  for (genvar v = 0; v < VPW; v++) begin : g_val_rd
    assign val_rdata_o[v*VW +: VW] = vals_q[int'(val_idx_i) * VPW + v];
  end

  // Each value is written either by a plane write (one bit) or by a value
  // write (the whole value).
  for (genvar v = 0; v < NV; v++) begin : g_store
    always_ff @(posedge clk) begin
      if (pl_we_i) begin
        if (part == PTW'(v / CHUNK_W)) vals_q[v][plane] <= pl_wdata_i[v % CHUNK_W];
      end else if (val_we_i && val_idx_i == WIW'(v / VPW)) begin
        vals_q[v] <= val_wdata_i[(v % VPW)*VW +: VW];
      end
    end
  end

endmodule
