// wpa2_ref_pkg - behavioural reference model of the WPA2-Personal key
// derivation for the testbenches: SHA1 (FIPS 180), HMAC-SHA1 (RFC 2104),
// PBKDF2 (RFC 2898), the 802.11 PRF for the KCK and the EAPOL MIC.
// Written in the plain software style over byte queues, independently of the
// pipelined RTL, so that the RTL can be checked against it.
package wpa2_ref_pkg;

  typedef byte unsigned bytes_t[$];

  function automatic logic [31:0] r_rol(logic [31:0] x, int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  // One SHA1 compression including the feed-forward addition.
  function automatic logic [159:0] ref_compress(logic [159:0] h, logic [511:0] blk);
    logic [31:0] w [80];
    logic [31:0] a, b, c, d, e, f, k, tmp;
    for (int t = 0; t < 16; t++) w[t] = blk[511 - 32*t -: 32];
    for (int t = 16; t < 80; t++) w[t] = r_rol(w[t-3] ^ w[t-8] ^ w[t-14] ^ w[t-16], 1);
    {a, b, c, d, e} = h;
    for (int t = 0; t < 80; t++) begin
      case (t / 20)
        0: begin f = (b & c) | (~b & d);          k = 32'h5a827999; end
        1: begin f = b ^ c ^ d;                   k = 32'h6ed9eba1; end
        2: begin f = (b & c) | (b & d) | (c & d); k = 32'h8f1bbcdc; end
        default: begin f = b ^ c ^ d;            k = 32'hca62c1d6; end
      endcase
      tmp = r_rol(a, 5) + f + e + k + w[t];
      e = d; d = c; c = r_rol(b, 30); b = a; a = tmp;
    end
    return {h[159:128] + a, h[127:96] + b, h[95:64] + c, h[63:32] + d, h[31:0] + e};
  endfunction

  function automatic logic [159:0] ref_sha1(bytes_t m);
    logic [159:0] h = 160'h67452301_efcdab89_98badcfe_10325476_c3d2e1f0;
    bytes_t p = m;
    longint unsigned bits = 64'(m.size()) * 8;
    logic [511:0] blk;
    p.push_back(8'h80);
    while (p.size() % 64 != 56) p.push_back(8'h00);
    for (int i = 7; i >= 0; i--) p.push_back(8'(bits >> (8*i)));
    for (int o = 0; o < p.size(); o += 64) begin
      for (int i = 0; i < 64; i++) blk[511 - 8*i -: 8] = p[o+i];
      h = ref_compress(h, blk);
    end
    return h;
  endfunction

  function automatic bytes_t digest_bytes(logic [159:0] d);
    bytes_t r;
    for (int i = 0; i < 20; i++) r.push_back(d[159 - 8*i -: 8]);
    return r;
  endfunction

  function automatic logic [159:0] ref_hmac(bytes_t key, bytes_t msg);
    bytes_t ki, ko;
    for (int i = 0; i < 64; i++) begin
      byte unsigned kb = (i < key.size()) ? key[i] : 8'h00;
      ki.push_back(kb ^ 8'h36);
      ko.push_back(kb ^ 8'h5c);
    end
    ki = {ki, msg};
    ko = {ko, digest_bytes(ref_sha1(ki))};
    return ref_sha1(ko);
  endfunction

  function automatic logic [255:0] ref_pmk(bytes_t pw, bytes_t ssid, int iter);
    logic [159:0] t [2];
    for (int blkno = 1; blkno <= 2; blkno++) begin
      bytes_t s = ssid;
      logic [159:0] u;
      s.push_back(0); s.push_back(0); s.push_back(0); s.push_back(8'(blkno));
      u = ref_hmac(pw, s);
      t[blkno-1] = u;
      for (int j = 2; j <= iter; j++) begin
        u = ref_hmac(pw, digest_bytes(u));
        t[blkno-1] ^= u;
      end
    end
    return {t[0], t[1][159:64]};
  endfunction

  function automatic logic [127:0] ref_kck(logic [255:0] pmk, logic [47:0] aa, logic [47:0] spa,
                                           logic [255:0] anonce, logic [255:0] snonce);
    bytes_t key, msg;
    string label = "Pairwise key expansion";
    logic [47:0]  m1 = (aa < spa) ? aa : spa;
    logic [47:0]  m2 = (aa < spa) ? spa : aa;
    logic [255:0] n1 = (anonce < snonce) ? anonce : snonce;
    logic [255:0] n2 = (anonce < snonce) ? snonce : anonce;
    logic [159:0] ptk;
    for (int i = 0; i < 32; i++) key.push_back(pmk[255 - 8*i -: 8]);
    for (int i = 0; i < label.len(); i++) msg.push_back(label[i]);
    msg.push_back(8'h00);
    for (int i = 0; i < 6; i++)  msg.push_back(m1[47 - 8*i -: 8]);
    for (int i = 0; i < 6; i++)  msg.push_back(m2[47 - 8*i -: 8]);
    for (int i = 0; i < 32; i++) msg.push_back(n1[255 - 8*i -: 8]);
    for (int i = 0; i < 32; i++) msg.push_back(n2[255 - 8*i -: 8]);
    msg.push_back(8'h00);
    ptk = ref_hmac(key, msg);
    return ptk[159:32];
  endfunction

  function automatic logic [127:0] ref_mic(logic [127:0] kck, bytes_t eapol);
    bytes_t key;
    logic [159:0] m;
    for (int i = 0; i < 16; i++) key.push_back(kck[127 - 8*i -: 8]);
    m = ref_hmac(key, eapol);
    return m[159:32];
  endfunction

  function automatic bytes_t str_bytes(string s);
    bytes_t r;
    for (int i = 0; i < s.len(); i++) r.push_back(s[i]);
    return r;
  endfunction

  function automatic bytes_t pw64_bytes(logic [63:0] pw);
    bytes_t r;
    for (int i = 0; i < 8; i++) r.push_back(pw[63 - 8*i -: 8]);
    return r;
  endfunction

  // The password `k` places after `pw` in odometer order over first..last,
  // last character least significant.
  function automatic logic [63:0] pw_add(logic [63:0] pw, longint unsigned k,
                                         byte unsigned first, byte unsigned last);
    longint unsigned radix = last - first + 1;
    longint unsigned carry = k;
    for (int i = 7; i >= 0; i--) begin
      longint unsigned v = (pw[63 - 8*i -: 8] - first) + carry;
      pw[63 - 8*i -: 8] = 8'(first + v % radix);
      carry = v / radix;
    end
    return pw;
  endfunction

endpackage
