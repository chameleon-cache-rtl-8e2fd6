// tb_idf_cipher: checks the IDF block cipher against an independent
// reference (tb_pkg::ref_encrypt) and checks that decrypting its output with
// the inverse rounds gives back the address (the cipher is a permutation).
// It also checks that the same address under two keys gives different
// ciphertexts. Combinational block: one check per step of a 1 ns clock.
module tb_idf_cipher;
  import cc_pkg::*;
  import tb_pkg::*;

  line_addr_t addr, enc;
  key_t       key;
  int checks = 0, failures = 0;

  idf_cipher #(.ROUNDS(4)) dut (.addr(addr), .key(key), .enc(enc));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_addr_t e0;
    int same = 0;
    for (int n = 0; n < 2000; n++) begin
      addr = (n < 4) ? line_addr_t'(n) : rand_addr();
      key  = (n % 3 == 0) ? key_t'(n) : rand_key();
      #1;
      checks++;
      if (enc !== ref_encrypt(addr, key)) begin
        failures++;
        if (failures < 5) $display("mismatch addr=%h key=%h enc=%h ref=%h", addr, key, enc, ref_encrypt(addr, key));
      end
      checks++;
      if (ref_decrypt(enc, key) !== addr) failures++;
      e0  = enc;
      key = key ^ 64'h1;
      #1;
      if (enc == e0) same++;
    end
    checks++;
    if (same > 2) begin
      failures++;
      $display("key change did not change the ciphertext %0d times", same);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
