// idf_cipher: keyed block cipher E_K over a cache line address.
//
// The index derivation function encrypts the line address with one key per
// RSC division and slices set-index bits out of the ciphertext. The source
// design asks only for a block cipher (or keyed hash) whose keys stay secret
// and whose collisions under one key are unrelated to collisions under
// another; it names no cipher. This module is this design's own choice: a
// balanced Feistel network on the 42-bit line address (two 21-bit halves)
// with ROUNDS rounds. Being a Feistel network it is a permutation of the
// address space for every key. The round function mixes with XOR, a 21-bit
// addition and rotations; the round keys are 21-bit slices of the 64-bit key
// (rotated by 13 bits per round) XORed with a round constant. It is NOT a
// vetted cryptographic cipher: replace it with a low-latency cipher such as
// a reduced-round PRINCE or QARMA for a real product.
//
// Interface: addr and key in, enc out. Purely combinational (0 cycles).
module idf_cipher
  import cc_pkg::*;
#(
  parameter int unsigned ROUNDS = 4
) (
  input  line_addr_t addr,
  input  key_t       key,
  output line_addr_t enc
);

  localparam int unsigned HW = LINE_ADDR_W / 2;   // 21-bit half

  typedef logic [HW-1:0] half_t;

  function automatic half_t rotl(half_t x, int unsigned n);
    return half_t'((x << n) | (x >> (HW - n)));
  endfunction

  function automatic half_t round_key(key_t k, int unsigned r);
    key_t rk;
    rk = key_t'((k << ((13 * r) % KEY_W)) | (k >> ((KEY_W - (13 * r) % KEY_W) % KEY_W)));
    return rk[HW-1:0] ^ half_t'(32'h000A_5F3C + 32'h0001_3579 * r);
  endfunction

  function automatic half_t round_f(half_t x, half_t k);
    half_t t;
    t = x ^ k;
    t = t + rotl(t, 7);
    t = t ^ rotl(t, 18);
    t = t + rotl(t ^ k, 11);
    return t;
  endfunction

  always_comb begin
    half_t l, r, t;
    l = addr[LINE_ADDR_W-1:HW];
    r = addr[HW-1:0];
    for (int unsigned i = 0; i < ROUNDS; i++) begin
      t = l ^ round_f(r, round_key(key, i));
      l = r;
      r = t;
    end
    enc = {l, r};
  end

endmodule
