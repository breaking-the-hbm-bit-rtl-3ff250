// crc16_chunk: 2-byte CRC of one 32-byte chunk, used both to generate the CRC
// appended to a chunk on a write and to check a 34-byte unit on a read.
//
// The paper reuses the HBM interface feature that lets the host attach a 2 B
// CRC to every 32 B word, and turns it into a per-chunk error filter that
// decides whether a random access may skip Reed-Solomon decoding. The paper
// does not give the polynomial; this design uses CRC-16/CCITT (x^16+x^12+x^5+1,
// 0x1021) with initial value 0xFFFF and no final XOR, shifting the chunk in
// from bit 255 down to bit 0.
//
// Interface: chunk_i is the data chunk; crc_o is its CRC. For a check, crc_i is
// the CRC read from memory and crc_ok_o is high when it matches.
// Timing: purely combinational, no clock.
module crc16_chunk
  import ecc_pkg::*;
#(
  parameter logic [15:0] POLY = 16'h1021,
  parameter logic [15:0] INIT = 16'hFFFF
) (
  input  chunk_t chunk_i,
  input  crc_t   crc_i,
  output crc_t   crc_o,
  output logic   crc_ok_o
);

  always_comb begin
    logic [15:0] c;
    c = INIT;
    for (int i = CHUNK_W - 1; i >= 0; i--) begin
      if (c[15] ^ chunk_i[i]) c = (c << 1) ^ POLY;
      else                    c = c << 1;
    end
    crc_o = c;
  end

  assign crc_ok_o = (crc_o == crc_i);

endmodule
