// crc32_d128: one-cycle CRC-32 update over a 128-bit word (combinational).
//
// CRC-32 as used by Ethernet (generator 0x04C11DB7, processed LSB first,
// i.e. the reflected constant 0xEDB88320).  The word is taken as 16 bytes,
// byte 0 = bits [7:0] first, each byte LSB first.  crc_out is the raw
// register after the word: callers start from 32'hFFFFFFFF and compare raw
// registers, so no final inversion is applied.  The loop unrolls into an
// XOR network; there is no state and no latency.
// The paper names CRC-32 as the link error check; the word width follows the
// 128-bit datapath, the bit order is the Ethernet one (this design's choice).
module crc32_d128 (
  input  logic [31:0]  crc_in,
  input  logic [127:0] data,
  output logic [31:0]  crc_out
);
  always_comb begin
    logic [31:0] c;
    c = crc_in;
    for (int i = 0; i < 128; i++) begin
      if (c[0] ^ data[i]) c = (c >> 1) ^ 32'hEDB8_8320;
      else                c = c >> 1;
    end
    crc_out = c;
  end
endmodule
