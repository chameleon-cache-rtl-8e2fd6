// tb_eviction_rate: runs the eviction-probability experiment of the
// published security evaluation on the RTL, for the four 256-line
// configurations it shows with 8 divisions: 16 ways (16 sets) and 8 ways
// (32 sets), each with an 8-entry and a 2-entry victim cache. An eviction
// set holds 4 x ways random addresses; 1000 trials per configuration.
//
// Expected rate, worked out independently of the RTL. The target is
// inserted, and the line X it displaces is reinserted at once. With
// probability 1/WAYS (random division, then random way) X lands exactly on
// the target's way, and the two swap (the "reinsertion into the same way"
// case). The target then waits in the VC and is pushed out by the eviction
// set. Otherwise, each of the eviction set's misses past the first VCE
// (whose victims are still in the VC at the probe) pushes one roughly
// uniformly chosen line out of the N = 256 lines:
//   p = 1/WAYS + (1 - 1/WAYS) * (1 - (1 - 1/N)^(4*WAYS - VCE))
// That gives 0.247 (16 ways) and 0.204 (8 ways) with 8 VC entries, 0.265
// and 0.222 with 2. Each measured rate must lie within 0.06 of it (more
// than four standard errors). The published curves, from a software model,
// read about 0.16, 0.11, 0.17 and 0.13 at 256 lines; the test prints them
// for comparison but does not check them.
// All read data must be correct as well.
module tb_eviction_rate;
  localparam int NCFG = 4;
  localparam int CFG_WAYS [NCFG] = '{16, 8, 16, 8};
  localparam int CFG_VCE  [NCFG] = '{8, 8, 2, 2};
  localparam int PUBLISHED[NCFG] = '{160, 110, 170, 130};

  logic [NCFG-1:0] done;
  int   rate [NCFG];
  int   errs [NCFG];
  int   checks = 0, failures = 0;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    evict_rate_run #(.SETS(256 / CFG_WAYS[c]), .WAYS(CFG_WAYS[c]), .DIVS(8), .VCE(CFG_VCE[c]), .TRIALS(1000))
      u_run (.done(done[c]), .permille(rate[c]), .errors(errs[c]));
  end

  function automatic int expected_permille(int ways, int vce);
    real q;
    q = 1.0 / ways + (1.0 - 1.0 / ways) * (1.0 - (1.0 - 1.0 / 256.0) ** (4 * ways - vce));
    return int'(q * 1000.0);
  endfunction

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (&done);
    $display("eviction rate per 1000, 256 lines, 8 divisions:");
    for (int c = 0; c < NCFG; c++) begin
      int x;
      x = expected_permille(CFG_WAYS[c], CFG_VCE[c]);
      $display("  %2d ways, %0d VC entries: measured %0d, expected %0d, published about %0d",
               CFG_WAYS[c], CFG_VCE[c], rate[c], x, PUBLISHED[c]);
      checks++;
      if (rate[c] < x - 60 || rate[c] > x + 60) begin
        failures++;
        $display("rate off for %0d ways, %0d VC entries", CFG_WAYS[c], CFG_VCE[c]);
      end
      checks++;
      if (errs[c] != 0) begin failures++; $display("read data errors %0d", errs[c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
