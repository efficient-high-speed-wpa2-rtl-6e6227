// tb_ref_selftest - checks the behavioural reference model used by the other
// testbenches against published test vectors: SHA1("abc") (FIPS 180),
// HMAC-SHA1 test case 1 of RFC 2202 and the 802.11i PSK vector
// (passphrase "password", SSID "IEEE").
module tb_ref_selftest;
  import wpa2_ref_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(string what, logic [255:0] got, logic [255:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    bytes_t k;
    for (int i = 0; i < 20; i++) k.push_back(8'h0b);
    check("sha1(abc)", 256'(ref_sha1(str_bytes("abc"))),
          256'(160'ha9993e364706816aba3e25717850c26c9cd0d89d));
    check("hmac rfc2202 #1", 256'(ref_hmac(k, str_bytes("Hi There"))),
          256'(160'hb617318655057264e28bc0b6fb378c8ef146be00));
    check("pmk password/IEEE", ref_pmk(str_bytes("password"), str_bytes("IEEE"), 4096),
          256'hf42c6fc52df0ebef9ebb4b90b38a5f902e83fe1b135a70e23aed762e9710a12e);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
