// tb_math_pkg: reference modular arithmetic for the testbenches.
//
// Plain multiply-and-remainder arithmetic on wide integers, written without
// any of the Montgomery tricks of the RTL so that it serves as an independent
// reference. Also builds the twiddle constants the NTT needs from a prime q
// and a generator g of its multiplicative group.
package tb_math_pkg;
  typedef logic [63:0]  u64;
  typedef logic [191:0] u192;

  function automatic u64 mulm(u64 a, u64 b, u64 q);
    u192 t;
    t = (u192'(a) * u192'(b)) % u192'(q);
    return t[63:0];
  endfunction

  function automatic u64 addm(u64 a, u64 b, u64 q);
    return u64'((u192'(a) + u192'(b)) % u192'(q));
  endfunction

  function automatic u64 subm(u64 a, u64 b, u64 q);
    return u64'((u192'(a) + u192'(q) - u192'(b)) % u192'(q));
  endfunction

  function automatic u64 powm(u64 b, u64 e, u64 q);
    u64 r, x;
    r = 1;
    x = b % q;
    while (e != 0) begin
      if (e[0]) r = mulm(r, x, q);
      x = mulm(x, x, q);
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic u64 invm(u64 a, u64 q);
    return powm(a, q - 2, q);
  endfunction

  // 2^54 mod q, the Montgomery radix
  function automatic u64 rmod(u64 q);
    return u64'((u192'(1) << 54) % u192'(q));
  endfunction

  // x in Montgomery form
  function automatic u64 tomont(u64 x, u64 q);
    return mulm(x, rmod(q), q);
  endfunction

  // what the RTL multiplier should return: a*b*2^-54 mod q
  function automatic u64 montref(u64 a, u64 b, u64 q);
    return mulm(mulm(a, b, q), invm(rmod(q), q), q);
  endfunction

  function automatic int unsigned brev(int unsigned x, int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < bits; i++) r = (r << 1) | ((x >> i) & 1);
    return r;
  endfunction

  function automatic u64 rand54(u64 q);
    u64 r;
    r = {$urandom, $urandom};
    return r % q;
  endfunction
  typedef struct {
    logic [2:0]  kind;
    logic [1:0]  sel;
    int unsigned idx;
    u64          data;
  } cfg_t;

  // psi: primitive 2N-th root of unity of q (g generates Z_q^*)
  function automatic u64 psi_of(u64 q, u64 g, int unsigned n);
    return powm(g, (q - 1) / (2 * n), q);
  endfunction

  // All constants hybrid_ntt needs for one modulus, in its load-port format.
  function automatic void ntt_consts(u64 q, u64 g, int unsigned n1, int unsigned n2,
                                     ref cfg_t list[$]);
    u64 psi, ipsi, om, iom, r1, r2, ninv, root;
    int unsigned n, lg1;
    n    = n1 * n2;
    psi  = psi_of(q, g, n);
    ipsi = invm(psi, q);
    om   = mulm(psi, psi, q);
    iom  = invm(om, q);
    ninv = invm(u64'(n), q);
    lg1  = $clog2(n1);
    list.push_back('{3'd0, 2'd0, 0, q});
    list.push_back('{3'd0, 2'd0, 1, rmod(q)});
    for (int unsigned i = 0; i < n1; i++) begin
      list.push_back('{3'd1, 2'd0, i, tomont(powm(psi, u64'(n2 * i), q), q)});
      list.push_back('{3'd1, 2'd1, i, tomont(mulm(powm(ipsi, u64'(n2 * i), q), ninv, q), q)});
    end
    for (int d = 0; d < 2; d++) begin
      root = powm(d == 0 ? om : iom, u64'(n2), q);
      for (int unsigned s = 0; s < lg1; s++)
        for (int unsigned k = 0; k < (1 << s); k++)
          list.push_back('{3'd2, 2'(d), (1 << s) + k,
                           tomont(powm(root, u64'((n1 >> (s + 1)) * k), q), q)});
      root = powm(d == 0 ? om : iom, u64'(n1), q);
      for (int unsigned e = 0; e < n2 / 2; e++)
        list.push_back('{3'd4, 2'(d), e, tomont(powm(root, u64'(e), q), q)});
    end
    for (int unsigned j = 0; j < n2; j++) begin
      list.push_back('{3'd3, 2'd0, j, tomont(powm(psi,  u64'(j), q), q)});
      list.push_back('{3'd3, 2'd1, j, tomont(powm(ipsi, u64'(j), q), q)});
      list.push_back('{3'd3, 2'd2, j, tomont(powm(om,   u64'(j), q), q)});
      list.push_back('{3'd3, 2'd3, j, tomont(powm(iom,  u64'(j), q), q)});
    end
  endfunction

  // Reference negacyclic NTT coefficient: A[k] = sum_n a[n] psi^((2k+1)n)
  function automatic u64 ntt_ref_coeff(const ref u64 a[], u64 q, u64 psi, int unsigned k);
    u64 acc, w, x;
    acc = 0;
    w   = powm(psi, u64'(2 * k + 1), q);
    x   = 1;
    foreach (a[n]) begin
      acc = addm(acc, mulm(a[n], x, q), q);
      x   = mulm(x, w, q);
    end
    return acc;
  endfunction

  // Trivium keystream, bit-serial as in its specification (state s1..s288).
  // The 80-bit key is the 64-bit seed zero-extended; key bit i is seed[i-1].
  // Returns nwords 64-bit words; bit b of word w is keystream bit 64*w+b.
  function automatic void trivium_ref(logic [63:0] seed, logic [79:0] iv,
                                      int unsigned nwords, ref u64 out[$]);
    logic s [1:288];
    logic t1, t2, t3, z;
    u64   wd;
    for (int i = 1; i <= 288; i++) s[i] = 1'b0;
    for (int i = 1; i <= 64; i++) s[i] = seed[i-1];
    for (int i = 1; i <= 80; i++) s[93+i] = iv[i-1];
    s[286] = 1'b1; s[287] = 1'b1; s[288] = 1'b1;
    for (int st = 0; st < 1152 + 64 * int'(nwords); st++) begin
      t1 = s[66] ^ s[93];
      t2 = s[162] ^ s[177];
      t3 = s[243] ^ s[288];
      z  = t1 ^ t2 ^ t3;
      t1 = t1 ^ (s[91] & s[92]) ^ s[171];
      t2 = t2 ^ (s[175] & s[176]) ^ s[264];
      t3 = t3 ^ (s[286] & s[287]) ^ s[69];
      for (int i = 93; i > 1; i--) s[i] = s[i-1];
      s[1] = t3;
      for (int i = 177; i > 94; i--) s[i] = s[i-1];
      s[94] = t1;
      for (int i = 288; i > 178; i--) s[i] = s[i-1];
      s[178] = t2;
      if (st >= 1152) begin
        wd[(st - 1152) % 64] = z;
        if ((st - 1152) % 64 == 63) out.push_back(wd);
      end
    end
  endfunction
endpackage
