// tami_pkg: constants, types and AES-128 helper functions shared by the
// receiver-side Millionaires' accelerator.
//
// Sizes that follow the paper: 32-bit comparison inputs cut into n = 8 chunks
// of k = 4 bits, a 512-bit memory/AXI word, four parallel key-expansion/AES
// lanes in the correlation-robust hash, up to 512/n comparisons packed per
// word in the tree merge. The message width of one leaf-comparison OT (one
// bit, the <lt> share) and the stream widths are this design's choices.
//
// The AES S-box is not stored as a literal table: it is computed at
// elaboration from its definition (multiplicative inverse in GF(2^8) modulo
// x^8+x^4+x^3+x+1 followed by the affine map with constant 0x63).
package tami_pkg;

  // ---- sizes -------------------------------------------------------------
  localparam int unsigned BITLEN     = 32;              // comparison input width
  localparam int unsigned CHUNK_K    = 4;               // k, bits per chunk
  localparam int unsigned N_CHUNKS   = BITLEN / CHUNK_K;// n = 8
  localparam int unsigned N_MSG      = 1 << CHUNK_K;    // 2^k messages per leaf OT
  localparam int unsigned AXI_W      = 512;             // memory/AXI word
  localparam int unsigned PACK_P     = AXI_W / N_CHUNKS;// comparisons per packed word (64)
  localparam int unsigned CRH_LANES  = 4;               // parallel KE/AES units
  localparam int unsigned BLK_W      = 128;             // AES block
  localparam int unsigned LEAF_PER_W = AXI_W / N_MSG;   // leaf OTs per message word (32)

  typedef logic [BLK_W-1:0] blk_t;

  // One hash request: the block to hash and the AES key it is hashed under.
  typedef struct packed {
    blk_t key;
    blk_t blk;
  } crh_req_t;

  // ---- GF(2^8) and AES ----------------------------------------------------
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = 8'h00;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  // S-box value of one byte, from its definition.
  function automatic logic [7:0] sbox_calc(input logic [7:0] a);
    logic [7:0] inv, r, s;
    // a^254 = a^-1 (and 0 -> 0)
    inv = 8'h01;
    r   = a;
    for (int e = 0; e < 8; e++) begin
      if (e != 0) inv = gf_mul(inv, r);   // exponent 254 = 0b11111110
      r = gf_mul(r, r);
    end
    s = inv;
    for (int i = 0; i < 8; i++)
      s[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s ^ 8'h63;
  endfunction

  function automatic logic [2047:0] sbox_table();
    logic [2047:0] t;
    for (int i = 0; i < 256; i++) t[i*8 +: 8] = sbox_calc(8'(i));
    return t;
  endfunction

  localparam logic [2047:0] SBOX_TBL = sbox_table();

  function automatic logic [7:0] sbox(input logic [7:0] a);
    return SBOX_TBL[a*8 +: 8];
  endfunction

  // Byte b of a block, byte 0 being the most significant (FIPS-197 order).
  function automatic logic [7:0] get_byte(input blk_t s, input int b);
    return s[BLK_W-1-8*b -: 8];
  endfunction

  function automatic blk_t sub_shift(input blk_t s);
    blk_t o;
    // state column c, row r is byte 4c+r; ShiftRows takes row r from column c+r
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[BLK_W-1-8*(4*c+r) -: 8] = sbox(get_byte(s, 4*((c+r)%4)+r));
    return o;
  endfunction

  function automatic blk_t mix_columns(input blk_t s);
    blk_t o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c);   a1 = get_byte(s, 4*c+1);
      a2 = get_byte(s, 4*c+2); a3 = get_byte(s, 4*c+3);
      o[BLK_W-1-8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[BLK_W-1-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[BLK_W-1-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[BLK_W-1-8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  // One step of the AES-128 key schedule: round key i from round key i-1.
  function automatic blk_t key_step(input blk_t k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = k;
    t  = {sbox(w3[23:16]) ^ rcon, sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // Round constant for round key r (r = 1..10).
  function automatic logic [7:0] rcon_of(input logic [3:0] r);
    logic [7:0] c;
    c = 8'h01;
    for (int i = 1; i < 10; i++)
      if (i < int'(r)) c = xtime(c);
    return c;
  endfunction

endpackage
