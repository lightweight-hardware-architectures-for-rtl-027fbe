// hash_ref_pkg: reference models used by the testbenches.
//
// Written separately from the RTL: the S-box comes from log/antilog tables
// over the generator {03} and the rotate-form affine map, MixColumns uses
// explicit {02}/{03} products, and ECHO / Fugue states are packed vectors
// (ECHO word i = st[2047-128*i -: 128], Fugue word i = st[959-32*i -: 32]).
package hash_ref_pkg;

  bit        tab_ok = 1'b0;
  bit [7:0]  sbox_tab [256];

  function automatic bit [7:0] rmul(bit [7:0] a, bit [7:0] b);
    bit [7:0] r = 0;
    while (b != 0) begin
      if (b[0]) r ^= a;
      a = (a << 1) ^ (a[7] ? 8'h1b : 8'h00);
      b >>= 1;
    end
    return r;
  endfunction

  function automatic bit [7:0] rotl8(bit [7:0] x, int n);
    return (x << n) | (x >> (8 - n));
  endfunction

  function automatic void build_sbox();
    bit [7:0] expt [256];
    int       logt [256];
    bit [7:0] e = 1;
    for (int i = 0; i < 255; i++) begin
      expt[i] = e;
      logt[e] = i;
      e = rmul(e, 8'h03);
    end
    for (int x = 0; x < 256; x++) begin
      bit [7:0] inv = (x == 0) ? 8'h00 : expt[(255 - logt[x]) % 255];
      sbox_tab[x] = inv ^ rotl8(inv, 1) ^ rotl8(inv, 2) ^ rotl8(inv, 3)
                  ^ rotl8(inv, 4) ^ 8'h63;
    end
    tab_ok = 1'b1;
  endfunction

  function automatic bit [7:0] ref_sbox(bit [7:0] x);
    if (!tab_ok) build_sbox();
    return sbox_tab[x];
  endfunction

  // One AES round; byte i at bits [127-8i -: 8], column-major.
  function automatic bit [127:0] ref_aes_round(bit [127:0] s, bit [127:0] k);
    bit [7:0] a [16];
    bit [7:0] b [16];
    bit [127:0] o;
    for (int i = 0; i < 16; i++) a[i] = ref_sbox(s[127-8*i -: 8]);
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) b[4*c+r] = a[4*((c+r)%4)+r];
    for (int c = 0; c < 4; c++) begin
      bit [7:0] x0 = b[4*c], x1 = b[4*c+1], x2 = b[4*c+2], x3 = b[4*c+3];
      a[4*c]   = rmul(x0,2) ^ rmul(x1,3) ^ x2 ^ x3;
      a[4*c+1] = x0 ^ rmul(x1,2) ^ rmul(x2,3) ^ x3;
      a[4*c+2] = x0 ^ x1 ^ rmul(x2,2) ^ rmul(x3,3);
      a[4*c+3] = rmul(x0,3) ^ x1 ^ x2 ^ rmul(x3,2);
    end
    for (int i = 0; i < 16; i++) o[127-8*i -: 8] = a[i] ^ k[127-8*i -: 8];
    return o;
  endfunction

  function automatic bit [127:0] ref_ew(bit [2047:0] st, int i);
    return st[2047-128*i -: 128];
  endfunction

  // BIG.ShiftRows followed by BIG.MixColumns.
  function automatic bit [2047:0] ref_big_mix(bit [2047:0] st);
    bit [2047:0] t, o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        t[2047-128*(4*c+r) -: 128] = st[2047-128*(4*((c+r)%4)+r) -: 128];
    for (int j = 0; j < 4; j++)
      for (int b = 0; b < 16; b++) begin
        bit [7:0] x [4];
        for (int r = 0; r < 4; r++) x[r] = t[2047-128*(4*j+r)-8*b -: 8];
        o[2047-128*(4*j)  -8*b -: 8] = rmul(x[0],2) ^ rmul(x[1],3) ^ x[2] ^ x[3];
        o[2047-128*(4*j+1)-8*b -: 8] = x[0] ^ rmul(x[1],2) ^ rmul(x[2],3) ^ x[3];
        o[2047-128*(4*j+2)-8*b -: 8] = x[0] ^ x[1] ^ rmul(x[2],2) ^ rmul(x[3],3);
        o[2047-128*(4*j+3)-8*b -: 8] = rmul(x[0],3) ^ x[1] ^ x[2] ^ rmul(x[3],2);
      end
    return o;
  endfunction

  // BIG.Final: new chaining value (v0 in the top 128 bits).
  function automatic bit [511:0] ref_big_final(bit [2047:0] in_st, bit [2047:0] a);
    bit [511:0] v;
    for (int j = 0; j < 4; j++) begin
      bit [127:0] x = 0;
      for (int k = 0; k < 4; k++) x ^= ref_ew(in_st, j + 4*k) ^ ref_ew(a, j + 4*k);
      v[511-128*j -: 128] = x;
    end
    return v;
  endfunction

  // Compress512: chain (v0 top) and message (m0 top) -> new chain.
  function automatic bit [511:0] ref_echo_compress(bit [511:0] v, bit [1535:0] m,
                                                   bit [127:0] cnt, bit [127:0] salt);
    bit [2047:0] st = {v, m};
    bit [2047:0] in_st = st;
    bit [127:0]  k = cnt;
    for (int r = 0; r < 8; r++) begin
      for (int i = 0; i < 16; i++) begin
        bit [127:0] key;
        for (int b = 0; b < 16; b++) key[127-8*b -: 8] = k[8*b +: 8];
        st[2047-128*i -: 128] = ref_aes_round(ref_aes_round(ref_ew(st, i), key), salt);
        k++;
      end
      st = ref_big_mix(st);
    end
    return ref_big_final(in_st, st);
  endfunction

  localparam bit [127:0] REF_ECHO256_IV = {8'h00, 8'h01, 112'h0};

  // ---------------- Fugue
  localparam byte unsigned NMAT [16][16] = '{
    '{1,4,7,1, 1,0,0,0, 1,0,0,0, 1,0,0,0},
    '{0,1,0,0, 1,1,4,7, 0,1,0,0, 0,1,0,0},
    '{0,0,1,0, 0,0,1,0, 7,1,1,4, 0,0,1,0},
    '{0,0,0,1, 0,0,0,1, 0,0,0,1, 4,7,1,1},
    '{0,0,0,0, 0,4,7,1, 1,0,0,0, 1,0,0,0},
    '{0,1,0,0, 0,0,0,0, 1,0,4,7, 0,1,0,0},
    '{0,0,1,0, 0,0,1,0, 0,0,0,0, 7,1,0,4},
    '{4,7,1,0, 0,0,0,1, 0,0,0,1, 0,0,0,0},
    '{0,0,0,0, 7,0,0,0, 6,4,7,1, 7,0,0,0},
    '{0,7,0,0, 0,0,0,0, 0,7,0,0, 1,6,4,7},
    '{7,1,6,4, 0,0,7,0, 0,0,0,0, 0,0,7,0},
    '{0,0,0,7, 4,7,1,6, 0,0,0,7, 0,0,0,0},
    '{0,0,0,0, 4,0,0,0, 4,0,0,0, 5,4,7,1},
    '{1,5,4,7, 0,0,0,0, 0,4,0,0, 0,4,0,0},
    '{0,0,4,0, 7,1,5,4, 0,0,0,0, 0,0,4,0},
    '{0,0,0,4, 0,0,0,4, 4,7,1,5, 0,0,0,0}
  };

  function automatic bit [31:0] fw(bit [959:0] s, int i);
    return s[959-32*i -: 32];
  endfunction

  function automatic bit [959:0] fset(bit [959:0] s, int i, bit [31:0] v);
    s[959-32*i -: 32] = v;
    return s;
  endfunction

  function automatic bit [959:0] fror(bit [959:0] s, int n);
    bit [959:0] o;
    for (int i = 0; i < 30; i++) o = fset(o, i, fw(s, (i + 30 - n) % 30));
    return o;
  endfunction

  function automatic bit [959:0] ftix(bit [959:0] s, bit [31:0] m);
    s = fset(s, 10, fw(s, 10) ^ fw(s, 0));
    s = fset(s, 0, m);
    s = fset(s, 8, fw(s, 8) ^ m);
    s = fset(s, 1, fw(s, 1) ^ fw(s, 24));
    return s;
  endfunction

  function automatic bit [959:0] fcmix(bit [959:0] s);
    s = fset(s, 0,  fw(s, 0)  ^ fw(s, 4));
    s = fset(s, 1,  fw(s, 1)  ^ fw(s, 5));
    s = fset(s, 2,  fw(s, 2)  ^ fw(s, 6));
    s = fset(s, 15, fw(s, 15) ^ fw(s, 4));
    s = fset(s, 16, fw(s, 16) ^ fw(s, 5));
    s = fset(s, 17, fw(s, 17) ^ fw(s, 6));
    return s;
  endfunction

  function automatic bit [127:0] ref_smix128(bit [127:0] x);
    bit [7:0] in_b [16];
    bit [127:0] o;
    for (int i = 0; i < 16; i++) in_b[i] = ref_sbox(x[127-8*i -: 8]);
    for (int i = 0; i < 16; i++) begin
      bit [7:0] acc = 0;
      for (int j = 0; j < 16; j++) acc ^= rmul(in_b[j], NMAT[i][j]);
      o[127-8*i -: 8] = acc;
    end
    return o;
  endfunction

  function automatic bit [959:0] fsmix(bit [959:0] s);
    s[959 -: 128] = ref_smix128(s[959 -: 128]);
    return s;
  endfunction

  function automatic bit [959:0] ref_fugue_iv();
    return {704'h0, 32'he952bdde, 32'h6671135f, 32'he0d4f668, 32'hd2b0b594,
            32'hf96c621d, 32'hfbf929de, 32'h9149e899, 32'h34f8c248};
  endfunction

  // One message word: TIX, then two sub-rounds.
  function automatic bit [959:0] ref_fugue_word(bit [959:0] s, bit [31:0] m);
    s = ftix(s, m);
    s = fsmix(fcmix(fror(s, 3)));
    s = fsmix(fcmix(fror(s, 3)));
    return s;
  endfunction

  function automatic bit [255:0] ref_fugue_final(bit [959:0] s);
    for (int i = 0; i < 5; i++) s = fsmix(fcmix(fror(s, 3)));
    for (int i = 0; i < 13; i++) begin
      s = fset(s, 4, fw(s, 4) ^ fw(s, 0));
      s = fset(s, 15, fw(s, 15) ^ fw(s, 0));
      s = fsmix(fror(s, 15));
      s = fset(s, 4, fw(s, 4) ^ fw(s, 0));
      s = fset(s, 16, fw(s, 16) ^ fw(s, 0));
      s = fsmix(fror(s, 14));
    end
    s = fset(s, 4, fw(s, 4) ^ fw(s, 0));
    s = fset(s, 15, fw(s, 15) ^ fw(s, 0));
    return {fw(s,1), fw(s,2), fw(s,3), fw(s,4), fw(s,15), fw(s,16), fw(s,17), fw(s,18)};
  endfunction

endpackage
