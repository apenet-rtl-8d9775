// tb_util_pkg: reference functions shared by the testbenches.
// crc32_ref is a CRC-32 model written independently of the design
// (non-reflected register, MSB-first shifting with generator 0x04C11DB7,
// input and output bit-reversed); it equals the reflected CRC-32 register
// after the 16 bytes of a 128-bit word, byte 0 first, LSB first.
//
// The CRC model computes CRC-32 as named in the APEnet+ description, in a
// different (bit-serial, MSB-first) form from the RTL so the two are
// independent.
package tb_util_pkg;
  import apenet_pkg::*;

  function automatic logic [31:0] rev32(logic [31:0] x);
    for (int i = 0; i < 32; i++) rev32[i] = x[31 - i];
  endfunction

  function automatic logic [31:0] crc32_ref(logic [31:0] c, logic [127:0] d);
    logic [31:0] r;
    r = rev32(c);
    for (int i = 0; i < 128; i++) begin
      logic fb;
      fb = r[31] ^ d[i];
      r  = {r[30:0], 1'b0};
      if (fb) r = r ^ 32'h04C1_1DB7;
    end
    return rev32(r);
  endfunction

  function automatic word_t kword(logic [7:0] t, logic [87:0] arg);
    return {32'hBCBC_BCBC, t, arg};
  endfunction

  function automatic word_t rand_word();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction
endpackage
