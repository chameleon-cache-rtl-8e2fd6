// tb_cc_prng: checks the random source against the xorshift32 recurrence,
// its reset seed, and that the low bits used for division and way choice
// are close to uniform.
module tb_cc_prng;
  logic clk = 0, rst_n = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;

  cc_prng #(.SEED(32'hDEAD_BEEF)) dut (.clk(clk), .rst_n(rst_n), .rnd(rnd));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x;
    int hist [4];
    hist = '{0, 0, 0, 0};
    #12;
    checks++;
    if (rnd !== 32'hDEAD_BEEF) failures++;
    x = 32'hDEAD_BEEF;
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 8000; n++) begin
      @(posedge clk); #1;
      x = x ^ (x << 13);
      x = x ^ (x >> 17);
      x = x ^ (x << 5);
      checks++;
      if (rnd !== x) begin
        failures++;
        if (failures < 5) $display("step %0d: %h expected %h", n, rnd, x);
      end
      hist[rnd[1:0]]++;
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (hist[i] < 1800 || hist[i] > 2200) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
