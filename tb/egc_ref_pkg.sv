// egc_ref_pkg -- behavioural reference model of EGC128 for the testbenches.
//
// Written from the cipher's equations and independently of the RTL structure:
//  * Rule-A is evaluated from its algebraic normal form, not from the truth table;
//  * the round constants are computed here, digit by digit, from pi with the
//    Bailey-Borwein-Plouffe digit-extraction formula (RC_r = hex digits 16r..16r+15 of pi);
//  * decryption follows the specification's algorithm literally: all 20 round keys are generated
//    forward, then applied in reverse order with the un-swapped Feistel inverse.
// Also holds the published test vectors (key, plaintext, ciphertext).
package egc_ref_pkg;

  typedef logic [63:0]  h64_t;
  typedef logic [127:0] b128_t;

  function automatic logic rule_a(logic x0, logic x1, logic x2, logic x3);
    return 1'b1 ^ x2 ^ (x0 & x2) ^ (x1 & x2) ^ (x1 & x3) ^ (x0 & x2 & x3);
  endfunction

  function automatic h64_t fcore(h64_t x);
    h64_t y;
    for (int i = 0; i < 64; i++)
      y[i] = rule_a(x[i], x[(i + 63) % 64], x[(i + 1) % 64], x[(i + 16) % 64]);
    return y;
  endfunction

  function automatic h64_t lfsr_next(h64_t s);
    logic fb;
    fb = s[0] ^ s[1] ^ s[3] ^ s[4];
    return (s >> 1) | (h64_t'(fb) << 63);
  endfunction

  // ---- pi hex digits by BBP: digit n (0-based, after the point) of pi in base 16.
  function automatic longint unsigned powmod16(longint unsigned e, longint unsigned m);
    longint unsigned r = 1, b = 16 % m;
    if (m == 1) return 0;
    while (e > 0) begin
      if (e[0]) r = (r * b) % m;
      b = (b * b) % m;
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic real frac(real v);
    return v - $floor(v);
  endfunction

  function automatic real bbp_series(int j, int n);
    real s = 0.0;
    real t;
    longint unsigned e, m;
    for (int k = 0; k <= n; k++) begin
      e = 64'(unsigned'(n - k));
      m = 64'(unsigned'(8 * k + j));
      s = frac(s + real'(powmod16(e, m)) / real'(m));
    end
    t = 1.0 / 16.0;
    for (int k = n + 1; k <= n + 20; k++) begin
      s = s + t / real'(8 * k + j);
      t = t / 16.0;
    end
    return frac(s);
  endfunction

  function automatic logic [3:0] pi_hex_digit(int n);
    real x;
    x = frac(4.0 * bbp_series(1, n) - 2.0 * bbp_series(4, n) - bbp_series(5, n) - bbp_series(6, n));
    return 4'($rtoi(16.0 * x));
  endfunction

  function automatic h64_t pi_word(int r);
    h64_t w = '0;
    for (int d = 0; d < 16; d++) w = {w[59:0], pi_hex_digit(16 * r + d)};
    return w;
  endfunction

  // RC_r, computed once and cached.
  h64_t rc_tab [20];
  bit   rc_ready = 1'b0;

  function automatic h64_t round_const(int r);
    if (!rc_ready) begin
      for (int i = 0; i < 20; i++) rc_tab[i] = pi_word(i);
      rc_ready = 1'b1;
    end
    return rc_tab[r];
  endfunction

  // ---- whole cipher
  function automatic void round_keys(b128_t key, ref h64_t rk[20]);
    h64_t s = key[127:64];
    if (s == '0) s = 64'd1;
    for (int r = 0; r < 20; r++) begin
      rk[r] = key[63:0] ^ s ^ round_const(r);
      s = lfsr_next(s);
    end
  endfunction

  function automatic b128_t encrypt(b128_t key, b128_t pt);
    h64_t rk[20];
    h64_t l = pt[127:64], r = pt[63:0], t;
    round_keys(key, rk);
    for (int i = 0; i < 20; i++) begin
      t = r;
      r = l ^ fcore(r) ^ rk[i];
      l = t;
    end
    return {l, r};
  endfunction

  function automatic b128_t decrypt(b128_t key, b128_t ct);
    h64_t rk[20];
    h64_t l = ct[127:64], r = ct[63:0], rp;
    round_keys(key, rk);
    for (int i = 19; i >= 0; i--) begin
      rp = l;                        // R_i = L_i+1
      l  = r ^ fcore(rp) ^ rk[i];    // L_i = R_i+1 ^ F(R_i) ^ RK_i
      r  = rp;
    end
    return {l, r};
  endfunction

  // ---- published reference vectors: key, plaintext, ciphertext
  localparam int NUM_TV = 10;
  localparam b128_t TV_KEY [NUM_TV] = '{
    128'h00000000000000000000000000000000, 128'h00000000000000000000000000000000,
    128'h000102030405060708090a0b0c0d0e0f, 128'hffffffffffffffffffffffffffffffff,
    128'hffffffffffffffffffffffffffffffff, 128'hffff0000ffff0000ffff0000ffff0000,
    128'hAAAAAAAA55555555AAAAAAAA55555555, 128'h00000000000000000000000000000001,
    128'h80000000000000000000000000000000, 128'h3C4F1A279BD80256E1F0C3A5D4976B8E};
  localparam b128_t TV_PT [NUM_TV] = '{
    128'h00000000000000000000000000000000, 128'h00112233445566778899aabbccddeeff,
    128'h00112233445566778899aabbccddeeff, 128'hffffffffffffffffffffffffffffffff,
    128'h00000000000000000000000000000000, 128'h0000ffff0000ffff0000ffff0000ffff,
    128'h55555555AAAAAAAA55555555AAAAAAAA, 128'h00000000000000000000000000000001,
    128'h80000000000000000000000000000000, 128'h9A7C3E2B10F4D8C6B5E1A2938476D0F1};
  // Vector 8 (key = plaintext = 1) is printed as 0xAEDAFEA5219FFEBF...; every independent
  // evaluation of the specification gives 0xAEDAFAA5219FFEBF... (one bit apart), which is used here.
  localparam b128_t TV_CT [NUM_TV] = '{
    128'h054e2db44cd3907d7c814c56070da703, 128'hB1E7EAD3650E12FF0C8F14CA88AE9498,
    128'hE9095E3E9BE0D9A655B1B81FE62E940E, 128'h797644AEE6B69C4C28AC59BDCCE7FF19,
    128'h4929CA1C6BEA1A54DDC0B2E8215CF7EC, 128'h83ECBAB571F266BC3F50697F31AD3AA1,
    128'h36A0317611F63F3548EA89535E5C5060, 128'hAEDAFAA5219FFEBFB979BE5F1D6D7D8D,
    128'hE1F56D13A8B9D337FD75E584E3A26282, 128'h0C578E13690158046726B86187D850DA};

endpackage
