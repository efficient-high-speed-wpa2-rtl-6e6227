// wpa2_pkg - types, constants and small functions shared by the WPA2-Personal
// brute force design.
//
// Byte order used throughout: a byte string is packed with its first byte in
// the most significant bits, as SHA1 reads it (big-endian words). A 512-bit
// SHA1 block therefore holds W0 in bits [511:480]; a 160-bit digest holds H0
// in bits [159:128]; an 8-character password holds its first character in
// bits [63:56]. This packing is a design choice; the SHA1 constants, the
// round functions and the HMAC pads are those of the SHA1/HMAC standards the
// design implements.
package wpa2_pkg;

  typedef logic [31:0]  word_t;
  typedef logic [159:0] sha1_state_t;   // {H0,H1,H2,H3,H4}
  typedef logic [511:0] sha1_block_t;   // {W0..W15}

  // Working variables A..E carried down the round pipeline.
  typedef struct packed {
    word_t a;
    word_t b;
    word_t c;
    word_t d;
    word_t e;
  } sha1_vars_t;

  localparam sha1_state_t SHA1_IV = 160'h67452301_efcdab89_98badcfe_10325476_c3d2e1f0;

  // HMAC pads, repeated over the 64-byte key block.
  localparam sha1_block_t HMAC_IPAD = {64{8'h36}};
  localparam sha1_block_t HMAC_OPAD = {64{8'h5c}};

  // Number of pipeline stages of one SHA1 pipeline: Buffer, Initiate,
  // 80 rounds and Add. It is also the number of passwords a core holds.
  localparam int unsigned SHA1_ROUNDS = 80;
  localparam int unsigned SHA1_STAGES = SHA1_ROUNDS + 3;

  // Handshake data that a core needs after the PMK phase. It is loaded
  // through each core's shift register, HS_WORD bits at a time, first word
  // into the most significant end (aa first, mic last). The EAPOL frame is
  // the captured 802.1X frame with its MIC field zeroed, eapol_len bytes
  // long (at most EAPOL_MAX_LEN), first byte in the top bits.
  localparam int unsigned HS_WORD       = 16;
  localparam int unsigned EAPOL_BYTES   = 128;  // two SHA1 blocks
  localparam int unsigned EAPOL_MAX_LEN = EAPOL_BYTES - 9;

  typedef struct packed {
    logic [47:0]              aa;         // authenticator (access point) MAC
    logic [47:0]              spa;        // supplicant (station) MAC
    logic [255:0]             anonce;
    logic [255:0]             snonce;
    logic [15:0]              eapol_len;  // bytes
    logic [8*EAPOL_BYTES-1:0] eapol;
    logic [127:0]             mic;        // MIC observed in the handshake
  } hs_data_t;

  localparam int unsigned HS_BITS  = $bits(hs_data_t);
  localparam int unsigned HS_WORDS = HS_BITS / HS_WORD;

  // "Pairwise key expansion", the PRF label of the 802.11 PTK derivation.
  localparam logic [175:0] PRF_LABEL = "Pairwise key expansion";

  // Steps of a brute force core. Every step is one pass of all SHA1_STAGES
  // password slots through the SHA1 pipeline.
  typedef enum logic [3:0] {
    ST_IDLE,
    ST_PMK_OSTATE, ST_PMK_ISTATE, ST_PMK_SALT, ST_PMK_FINAL, ST_PMK_ITER,
    ST_PTK_OSTATE, ST_PTK_ISTATE, ST_PTK_SALT, ST_PTK_FINAL,
    ST_MIC_OSTATE, ST_MIC_ISTATE, ST_MIC_SALT, ST_MIC_FINAL,
    ST_CHECK
  } core_step_t;

  // PBKDF2 iteration count of WPA2-Personal.
  localparam int unsigned WPA2_PBKDF2_ITER = 4096;

  function automatic word_t rol(input word_t x, input int unsigned n);
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic word_t sha1_k(input int unsigned t);
    if (t < 20)      return 32'h5a827999;
    else if (t < 40) return 32'h6ed9eba1;
    else if (t < 60) return 32'h8f1bbcdc;
    else             return 32'hca62c1d6;
  endfunction

  function automatic word_t sha1_f(input int unsigned t, input word_t x, input word_t y,
                                   input word_t z);
    if (t < 20)      return (x & y) ^ (~x & z);
    else if (t < 40) return x ^ y ^ z;
    else if (t < 60) return (x & y) ^ (x & z) ^ (y & z);
    else             return x ^ y ^ z;
  endfunction

  // Second SHA1 block of an HMAC step whose message is a 20-byte digest that
  // follows the 64-byte key block: digest, 0x80, zeros, bit length 84*8.
  function automatic sha1_block_t pad_digest(input sha1_state_t d);
    return {d, 8'h80, 280'd0, 64'd672};
  endfunction

endpackage
