// irdvs_pkg: shared constants, types and AES helper functions of the
// island-based random DVS (iRDVS) AES-256 core.
//
// The core is a seven-stage AES-256 encryption pipeline. Each stage holds two
// AES rounds, and each round is a voltage island fed by one of four
// independent power domains. The sizes below (14 rounds, 7 stages of 2
// rounds, 4 domains, supply voltages 0.6 V to 1.0 V in 0.1 V steps) are
// the ones the design is built around. The byte order follows FIPS-197: the
// first byte of a block or key sits in the most significant bits, and
// state byte r + 4*c is row r of column c.
//
// The S-box is computed, not tabulated: the multiplicative inverse in
// GF(2^8) (x^254, modulo x^8+x^4+x^3+x+1) followed by the FIPS-197 affine map.
package irdvs_pkg;

  localparam int unsigned NUM_ROUNDS       = 14;  // AES-256
  localparam int unsigned ROUNDS_PER_STAGE = 2;   // every other flip-flop transparent
  localparam int unsigned NUM_STAGES       = NUM_ROUNDS / ROUNDS_PER_STAGE;  // 7
  localparam int unsigned NUM_ISLANDS      = NUM_ROUNDS;                      // one island per round
  localparam int unsigned NUM_DOMAINS      = 4;   // independent power domains
  localparam int unsigned NUM_VLEVELS      = 5;   // {0.6, 0.7, 0.8, 0.9, 1.0} V
  localparam int unsigned DELAY_W          = 8;   // width of a stage delay in cycles

  typedef logic [127:0] block_t;
  typedef logic [255:0] key256_t;
  typedef logic [1:0]   dom_sel_t;   // power domain index 0..3
  typedef logic [2:0]   vcode_t;     // supply voltage code: V = 0.6 + 0.1*code

  // Island-to-domain configurations measured on the core.
  typedef enum logic [1:0] {
    CFG_CONSTANT    = 2'd0,  // all islands on domain 0, fixed 0.8 V
    CFG_DVS         = 2'd1,  // all islands on domain 0, one random voltage
    CFG_ADJACENT    = 2'd2,  // neighbouring islands share a domain
    CFG_ALTERNATING = 2'd3   // island i on domain i mod 4
  } island_cfg_e;

  // Multiply by x in GF(2^8).
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ aa;
      aa = xtime(aa);
    end
    return p;
  endfunction

  // Multiplicative inverse as a^254 (0 maps to 0).
  function automatic logic [7:0] gf_inv(input logic [7:0] a);
    logic [7:0] a2, a3, a12, a14, a15, a240;
    a2   = gf_mul(a, a);
    a3   = gf_mul(a2, a);
    a12  = gf_mul(gf_mul(a3, a3), gf_mul(a3, a3));       // a^6 squared
    a14  = gf_mul(a12, a2);
    a15  = gf_mul(a12, a3);
    a240 = gf_mul(a15, a15);                             // a^30
    a240 = gf_mul(a240, a240);                           // a^60
    a240 = gf_mul(a240, a240);                           // a^120
    a240 = gf_mul(a240, a240);                           // a^240
    return gf_mul(a240, a14);                            // a^254
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] a);
    logic [7:0] b;
    b = gf_inv(a);
    return b ^ {b[6:0], b[7]} ^ {b[5:0], b[7:6]} ^ {b[4:0], b[7:5]} ^ {b[3:0], b[7:4]} ^ 8'h63;
  endfunction

  // Byte k (0 = first, most significant) of a 128-bit block.
  function automatic logic [7:0] get_byte(input block_t s, input int k);
    return s[127 - 8*k -: 8];
  endfunction

  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {sbox(w[31:24]), sbox(w[23:16]), sbox(w[15:8]), sbox(w[7:0])};
  endfunction

  function automatic block_t sub_bytes(input block_t s);
    block_t o;
    for (int k = 0; k < 16; k++) o[127 - 8*k -: 8] = sbox(get_byte(s, k));
    return o;
  endfunction

  // Row r is rotated left by r columns: out(r,c) = in(r, c+r mod 4).
  function automatic block_t shift_rows(input block_t s);
    block_t o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8*(r + 4*c) -: 8] = get_byte(s, r + 4*((c + r) % 4));
    return o;
  endfunction

  function automatic block_t mix_columns(input block_t s);
    block_t o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c);
      a1 = get_byte(s, 4*c + 1);
      a2 = get_byte(s, 4*c + 2);
      a3 = get_byte(s, 4*c + 3);
      o[127 - 8*(4*c)     -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[127 - 8*(4*c + 1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[127 - 8*(4*c + 2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[127 - 8*(4*c + 3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

endpackage
