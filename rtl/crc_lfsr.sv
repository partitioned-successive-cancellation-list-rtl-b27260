// crc_lfsr: one step of the CRC remainder of a list path.
//
// Every decoded information bit of a partition is shifted into a W-bit
// remainder register (MSB first, zero initial value, no final XOR):
//   fb = crc[W-1] ^ bit;  crc' = (crc << 1) ^ (fb ? POLY : 0).
// POLY is the generator polynomial in normal form without the x^W term. When
// the last W information bits of a partition carry the CRC of the others, the
// remainder after the whole partition is zero for a valid candidate. The
// paper uses CRC-8 per partition for four partitions and CRC-16 for two, with
// polynomials from Koopman's tables, without printing them; the defaults here
// (0x2F for CRC-8, Koopman notation 0x97) are this design's choice.
// Purely combinational.
module crc_lfsr #(
  parameter int unsigned    W    = 8,
  parameter logic [W-1:0]   POLY = 8'h2F
) (
  input  logic [W-1:0] crc_in,
  input  logic         bit_in,
  output logic [W-1:0] crc_out
);
  logic fb;
  always_comb begin
    fb      = crc_in[W-1] ^ bit_in;
    crc_out = {crc_in[W-2:0], 1'b0} ^ (fb ? POLY : '0);
  end
endmodule
