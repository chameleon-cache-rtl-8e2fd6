// tb_rsc_way_ram: checks the way RAM against an array model: random writes
// and reads, read data one clock edge after the read, read data held while
// the RAM is idle or written.
module tb_rsc_way_ram;
  import cc_pkg::*;
  import tb_pkg::*;

  localparam int DEPTH = 32;
  logic clk = 0, en = 0, we = 0;
  logic [4:0] addr = '0;
  line_t wdata = '0, rdata;
  line_t model [DEPTH];
  int checks = 0, failures = 0;

  rsc_way_ram #(.DEPTH(DEPTH)) dut (.clk(clk), .en(en), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t rand_line();
    line_t l;
    l.valid = 1'($urandom);
    l.dirty = 1'($urandom);
    l.tag   = rand_addr();
    l.data  = rand_data();
    return l;
  endfunction

  initial begin
    line_t last;
    // fill every word
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = rand_line();
      @(negedge clk); en = 1; we = 1; addr = 5'(i); wdata = model[i];
    end
    @(negedge clk); en = 0; we = 0;
    for (int n = 0; n < 3000; n++) begin
      int op;
      op = $urandom_range(0, 2);
      @(negedge clk);
      addr = 5'($urandom);
      if (op == 0) begin               // read
        en = 1; we = 0;
        @(posedge clk); #1;
        checks++;
        if (rdata !== model[addr]) begin
          failures++;
          if (failures < 5) $display("read %0d mismatch", addr);
        end
        last = model[addr];
      end else if (op == 1) begin      // write: rdata must not change
        en = 1; we = 1; wdata = rand_line();
        model[addr] = wdata;
        @(posedge clk); #1;
        checks++;
        if (n > 0 && rdata !== last) failures++;
      end else begin                   // idle
        en = 0; we = 1'($urandom); wdata = rand_line();
        @(posedge clk); #1;
        checks++;
        if (n > 0 && rdata !== last) failures++;
      end
      if (n == 0) last = rdata;
      en = 0; we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
