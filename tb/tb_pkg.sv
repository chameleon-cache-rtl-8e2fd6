// tb_pkg: reference functions shared by the testbenches.
//
// ref_encrypt / ref_decrypt are an independent description of the IDF
// cipher (a 4-round Feistel network on 21-bit halves; see idf_cipher for the
// definition). Decryption runs the rounds backwards, so a round trip checks
// the hardware without reusing its code. mem_pattern gives the initial
// content of every memory line, a function of its address.
package tb_pkg;
  import cc_pkg::*;

  function automatic logic [20:0] rol21(logic [20:0] x, int n);
    logic [41:0] d;
    d = {x, x} << n;
    return d[41:21];
  endfunction

  function automatic logic [20:0] ref_rk(key_t k, int r);
    logic [127:0] kk;
    int sh;
    sh = (13 * r) % 64;
    kk = {k, k} << sh;
    return kk[127 -: 64][20:0] ^ 21'((32'hA5F3C + 32'h13579 * r) & 32'h1FFFFF);
  endfunction

  function automatic logic [20:0] ref_f(logic [20:0] x, logic [20:0] k);
    logic [20:0] t;
    t = x ^ k;
    t = 21'(t + rol21(t, 7));
    t = t ^ rol21(t, 18);
    t = 21'(t + rol21(t ^ k, 11));
    return t;
  endfunction

  function automatic line_addr_t ref_encrypt(line_addr_t a, key_t k, int rounds = 4);
    logic [20:0] l, r, t;
    l = a[41:21];
    r = a[20:0];
    for (int i = 0; i < rounds; i++) begin
      t = l ^ ref_f(r, ref_rk(k, i));
      l = r;
      r = t;
    end
    return {l, r};
  endfunction

  function automatic line_addr_t ref_decrypt(line_addr_t c, key_t k, int rounds = 4);
    logic [20:0] l, r, t;
    l = c[41:21];
    r = c[20:0];
    for (int i = rounds - 1; i >= 0; i--) begin
      t = r ^ ref_f(l, ref_rk(k, i));
      r = l;
      l = t;
    end
    return {l, r};
  endfunction

  function automatic line_data_t mem_pattern(line_addr_t a);
    line_data_t d;
    for (int i = 0; i < 8; i++) d[i*64 +: 64] = {22'(i), a} ^ 64'h5A5A_0000_C3C3_0000;
    return d;
  endfunction

  function automatic line_data_t rand_data();
    line_data_t d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  function automatic line_addr_t rand_addr();
    return {10'($urandom), $urandom};
  endfunction

  function automatic key_t rand_key();
    return {$urandom, $urandom};
  endfunction
endpackage
