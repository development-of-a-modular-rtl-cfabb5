// crc32_eth: one-byte step of the Ethernet CRC-32 (reflected polynomial
// 0xEDB88320, least-significant bit first). Combinational: crc_out is the
// register value after feeding byte d into crc_in. Ethernet starts from all
// ones and sends the complement, low byte first; over a frame that ends in a
// correct FCS the register is left at the residue 0xDEBB20E3.
module crc32_eth (
  input  logic [31:0] crc_in,
  input  logic [7:0]  d,
  output logic [31:0] crc_out
);
  always_comb begin
    crc_out = crc_in;
    for (int i = 0; i < 8; i++)
      crc_out = (crc_out[0] ^ d[i]) ? ((crc_out >> 1) ^ 32'hEDB8_8320) : (crc_out >> 1);
  end
endmodule
