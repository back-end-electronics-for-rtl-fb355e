// tb_tdcm_pkg - checks the package functions: the CRC-32 word step against an
// independent bit-serial CRC (including the published check value of this
// CRC variant for "123456789", 0x0376E6E7) and the payload word rounding.
module tb_tdcm_pkg;
  import tdcm_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference: shift one bit at a time through a 33-bit division
  function automatic logic [31:0] ref_crc_bits(logic [31:0] crc, logic [15:0] d, int nbits);
    for (int i = nbits-1; i >= 0; i--) begin
      logic top;
      top = crc[31];
      crc = crc << 1;
      if (top ^ d[i]) crc = crc ^ 32'h04C11DB7;
    end
    return crc;
  endfunction

  initial begin
    logic [31:0] c, r;
    logic [15:0] w;
    static byte s[9] = '{"1","2","3","4","5","6","7","8","9"};
    // check value of the 8-bit message with the reference
    r = 32'hFFFF_FFFF;
    foreach (s[i]) r = ref_crc_bits(r, {8'h0, s[i]}, 8);
    check(r == 32'h0376E6E7, $sformatf("reference check value %h", r));
    // package function on 16-bit words of "12345678" then last byte by reference
    c = CRC_INIT;
    for (int i = 0; i < 4; i++) c = crc32_w16(c, {s[2*i], s[2*i+1]});
    c = ref_crc_bits(c, {8'h0, s[8]}, 8);
    check(c == 32'h0376E6E7, $sformatf("package crc on words %h", c));
    // random words
    for (int n = 0; n < 200; n++) begin
      c = CRC_INIT; r = CRC_INIT;
      for (int k = 0; k < 1 + n % 9; k++) begin
        w = 16'($urandom);
        c = crc32_w16(c, w);
        r = ref_crc_bits(r, w, 16);
      end
      check(c == r, "random crc");
      // appending the CRC gives a zero remainder
      c = crc32_w16(crc32_w16(c, c[31:16]), c[15:0]);
      check(c == 0, "zero residue");
    end
    // payload word rounding: bytes -> words -> even
    check(payload_words(13'd0) == 0, "pw 0");
    check(payload_words(13'd1) == 2, "pw 1");
    check(payload_words(13'd2) == 2, "pw 2");
    check(payload_words(13'd3) == 2, "pw 3");
    check(payload_words(13'd5) == 4, "pw 5");
    check(payload_words(13'd10) == 6, "pw 10");
    check(payload_words(13'd2040) == 1020, "pw 2040");
    check($bits(vcb_msg_t) == 62, "VC B payload 62 bits");
    check($bits(vcc_req_t) == 36, "VC C request payload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
