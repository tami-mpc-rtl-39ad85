// tb_aes_ref_pkg: reference AES-128 encryption and hash for the testbenches.
// Written independently of the design's package: the S-box comes from
// exp/log tables over generator 3, state is kept as a byte array, and the
// whole key schedule is expanded before encrypting.
package tb_aes_ref_pkg;

  typedef logic [7:0] bytes16_t [16];

  function automatic logic [7:0] mul2(input logic [7:0] a);
    return (a << 1) ^ ((a & 8'h80) != 0 ? 8'h1b : 8'h00);
  endfunction

  logic [7:0] expt [256];
  int         logt [256];
  bit         tables_built = 0;

  function automatic logic [7:0] ref_sbox(input logic [7:0] a);
    logic [7:0] v, inv, s;
    if (!tables_built) begin
      v = 8'h01;
      for (int i = 0; i < 255; i++) begin
        expt[i] = v;
        logt[v] = i;
        v = mul2(v) ^ v;   // multiply by 3
      end
      tables_built = 1;
    end
    inv = (a == 0) ? 8'h00 : expt[(255 - logt[a]) % 255];
    s = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^ {inv[4:0], inv[7:5]} ^ {inv[3:0], inv[7:4]};
    return s ^ 8'h63;
  endfunction

  function automatic logic [127:0] ref_aes128(input logic [127:0] key, input logic [127:0] pt);
    logic [7:0] w [176];
    logic [7:0] st [16];
    logic [7:0] tmp [16];
    logic [7:0] t0, t1, t2, t3, rc, a0, a1, a2, a3;
    logic [127:0] out;
    for (int i = 0; i < 16; i++) w[i] = key[127-8*i -: 8];
    rc = 8'h01;
    for (int i = 16; i < 176; i += 4) begin
      t0 = w[i-4]; t1 = w[i-3]; t2 = w[i-2]; t3 = w[i-1];
      if (i % 16 == 0) begin
        {t0, t1, t2, t3} = {ref_sbox(t1) ^ rc, ref_sbox(t2), ref_sbox(t3), ref_sbox(t0)};
        rc = mul2(rc);
      end
      w[i] = w[i-16] ^ t0; w[i+1] = w[i-15] ^ t1; w[i+2] = w[i-14] ^ t2; w[i+3] = w[i-13] ^ t3;
    end
    for (int i = 0; i < 16; i++) st[i] = pt[127-8*i -: 8] ^ w[i];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) tmp[i] = ref_sbox(st[(i + 4*(i%4)) % 16]);
      if (r != 10)
        for (int c = 0; c < 4; c++) begin
          a0 = tmp[4*c]; a1 = tmp[4*c+1]; a2 = tmp[4*c+2]; a3 = tmp[4*c+3];
          tmp[4*c]   = mul2(a0) ^ mul2(a1) ^ a1 ^ a2 ^ a3;
          tmp[4*c+1] = a0 ^ mul2(a1) ^ mul2(a2) ^ a2 ^ a3;
          tmp[4*c+2] = a0 ^ a1 ^ mul2(a2) ^ mul2(a3) ^ a3;
          tmp[4*c+3] = mul2(a0) ^ a0 ^ a1 ^ a2 ^ mul2(a3);
        end
      for (int i = 0; i < 16; i++) st[i] = tmp[i] ^ w[16*r + i];
    end
    for (int i = 0; i < 16; i++) out[127-8*i -: 8] = st[i];
    return out;
  endfunction

  function automatic logic [127:0] ref_crh(input logic [127:0] key, input logic [127:0] x);
    return ref_aes128(key, x) ^ x;
  endfunction

endpackage
