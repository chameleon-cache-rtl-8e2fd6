// tb_idf: checks the index derivation function. For random addresses and
// four random division keys every index must equal the low log2(SETS) bits
// of the reference encryption under that division's key. It also checks
// that 8192 consecutive line addresses spread evenly over the 256 sets of
// each division (no set gets more than three times the mean), and that the
// four divisions give different indices for most addresses (skewing).
module tb_idf;
  import cc_pkg::*;
  import tb_pkg::*;

  localparam int DIVS = 4, SETS = 256, IDX_W = 8;
  line_addr_t addr;
  key_t [DIVS-1:0] keys;
  logic [DIVS-1:0][IDX_W-1:0] idx;
  int checks = 0, failures = 0;

  idf #(.DIVS(DIVS), .SETS(SETS)) dut (.addr(addr), .keys(keys), .idx(idx));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt [DIVS][SETS];
    int all_same = 0;
    for (int i = 0; i < DIVS; i++) keys[i] = rand_key();
    for (int n = 0; n < 1000; n++) begin
      addr = rand_addr();
      #1;
      for (int i = 0; i < DIVS; i++) begin
        line_addr_t e;
        e = ref_encrypt(addr, keys[i]);
        checks++;
        if (idx[i] !== e[IDX_W-1:0]) begin
          failures++;
          if (failures < 5) $display("div %0d addr %h idx %h ref %h", i, addr, idx[i], e[IDX_W-1:0]);
        end
      end
    end
    foreach (cnt[i, j]) cnt[i][j] = 0;
    for (int n = 0; n < 8192; n++) begin
      addr = line_addr_t'(n) + 42'h3_0000_0000;
      #1;
      for (int i = 0; i < DIVS; i++) cnt[i][idx[i]]++;
      if (idx[0] == idx[1] && idx[1] == idx[2] && idx[2] == idx[3]) all_same++;
    end
    for (int i = 0; i < DIVS; i++) begin
      int mx = 0;
      for (int j = 0; j < SETS; j++) if (cnt[i][j] > mx) mx = cnt[i][j];
      checks++;
      if (mx > 3 * 8192 / SETS) begin
        failures++;
        $display("division %0d uneven: max %0d", i, mx);
      end
    end
    checks++;
    if (all_same > 10) begin
      failures++;
      $display("divisions not skewed: %0d", all_same);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
