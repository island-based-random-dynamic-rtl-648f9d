// aes_ref_pkg: reference AES-256 encryption for the testbenches, written
// independently of the RTL. It works on byte arrays and takes its S-box
// from a lookup table (tb/aes_sbox.hex, the FIPS-197 S-box) that each
// testbench loads with load_sbox(); the RTL instead computes the S-box from
// GF(2^8) inversion. Byte 0 of a block is its most significant byte.
package aes_ref_pkg;

  typedef logic [7:0]   u8;
  typedef logic [127:0] blk_t;
  typedef blk_t         rk_arr_t [15];

  u8 sbox_tab [256];

  task automatic load_sbox();
    $readmemh("tb/aes_sbox.hex", sbox_tab);
  endtask

  function automatic u8 mul2(input u8 a);
    return a[7] ? ((a << 1) ^ 8'h1b) : (a << 1);
  endfunction

  function automatic void to_bytes(input blk_t b, output u8 o [16]);
    for (int k = 0; k < 16; k++) o[k] = b[127 - 8*k -: 8];
  endfunction

  function automatic blk_t from_bytes(input u8 o [16]);
    blk_t b;
    for (int k = 0; k < 16; k++) b[127 - 8*k -: 8] = o[k];
    return b;
  endfunction

  // One round; last = 1 leaves out MixColumns.
  function automatic blk_t round_ref(input blk_t s, input blk_t rk, input bit last);
    u8 a [16];
    u8 b [16];
    u8 k [16];
    to_bytes(s, a);
    to_bytes(rk, k);
    // SubBytes and ShiftRows: new byte (r,c) comes from old (r,(c+r)%4)
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        b[4*c + r] = sbox_tab[a[4*((c + r) % 4) + r]];
    if (!last)
      for (int c = 0; c < 4; c++) begin
        u8 x0, x1, x2, x3, all;
        x0 = b[4*c]; x1 = b[4*c+1]; x2 = b[4*c+2]; x3 = b[4*c+3];
        all = x0 ^ x1 ^ x2 ^ x3;
        b[4*c]   = x0 ^ all ^ mul2(x0 ^ x1);
        b[4*c+1] = x1 ^ all ^ mul2(x1 ^ x2);
        b[4*c+2] = x2 ^ all ^ mul2(x2 ^ x3);
        b[4*c+3] = x3 ^ all ^ mul2(x3 ^ x0);
      end
    for (int i = 0; i < 16; i++) b[i] = b[i] ^ k[i];
    return from_bytes(b);
  endfunction

  function automatic rk_arr_t expand_ref(input logic [255:0] key);
    logic [31:0] w [60];
    logic [31:0] t;
    u8 rc;
    rk_arr_t rks;
    rc = 8'h01;
    for (int i = 0; i < 8; i++) w[i] = key[255 - 32*i -: 32];
    for (int i = 8; i < 60; i++) begin
      t = w[i-1];
      if (i % 8 == 0) begin
        t = {t[23:0], t[31:24]};
        t = {sbox_tab[t[31:24]], sbox_tab[t[23:16]], sbox_tab[t[15:8]], sbox_tab[t[7:0]]};
        t[31:24] = t[31:24] ^ rc;
        rc = mul2(rc);
      end else if (i % 8 == 4) begin
        t = {sbox_tab[t[31:24]], sbox_tab[t[23:16]], sbox_tab[t[15:8]], sbox_tab[t[7:0]]};
      end
      w[i] = w[i-8] ^ t;
    end
    for (int r = 0; r < 15; r++) rks[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
    return rks;
  endfunction

  function automatic blk_t encrypt_ref(input logic [255:0] key, input blk_t pt);
    rk_arr_t rks;
    blk_t s;
    rks = expand_ref(key);
    s = pt ^ rks[0];
    for (int r = 1; r <= 14; r++) s = round_ref(s, rks[r], r == 14);
    return s;
  endfunction

  function automatic logic [255:0] rand256();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  function automatic blk_t rand128();
    blk_t v;
    for (int i = 0; i < 4; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

endpackage
