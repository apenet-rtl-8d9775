// tb_crc32_d128: checks the 128-bit CRC-32 step against a bit-serial model
// written the other way round (non-reflected register, MSB-first shifting
// with generator 0x04C11DB7, input and output bit-reversed), and against
// chaining: two steps over two words must equal the model over 32 bytes.
//
// CRC-32 is the polynomial the APEnet+ links use; the bit and byte order
// checked here is this design's choice.
module tb_crc32_d128;
  logic [31:0]  crc_in, crc_out;
  logic [127:0] data;
  int checks = 0, failures = 0;

  crc32_d128 dut (.crc_in, .data, .crc_out);

  function automatic logic [31:0] rev32(logic [31:0] x);
    for (int i = 0; i < 32; i++) rev32[i] = x[31 - i];
  endfunction

  // non-reflected model: register r = bit-reverse of the reflected one
  function automatic logic [31:0] model(logic [31:0] c, logic [127:0] d);
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

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] mid;
    for (int n = 0; n < 400; n++) begin
      crc_in = (n == 0) ? 32'hFFFF_FFFF : $urandom;
      data   = {$urandom, $urandom, $urandom, $urandom};
      if (n % 50 == 1) data = '0;
      #1;
      checks++;
      if (crc_out !== model(crc_in, data)) begin
        failures++;
        $display("mismatch crc_in=%h data=%h got=%h exp=%h", crc_in, data, crc_out, model(crc_in, data));
      end
    end
    // chaining
    crc_in = 32'hFFFF_FFFF; data = {4{32'h0123_4567}}; #1; mid = crc_out;
    crc_in = mid; data = {4{32'h89AB_CDEF}}; #1;
    checks++;
    if (crc_out !== model(model(32'hFFFF_FFFF, {4{32'h0123_4567}}), {4{32'h89AB_CDEF}})) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
