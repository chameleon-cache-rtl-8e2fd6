// tb_chameleon_full: the Chameleon Cache at its default size (16 MB:
// 16384 sets, 16 ways, 4 divisions, 8 victim-cache entries) through Init and
// a short run of reads and writes against the memory model. Checks the
// Init time (one cycle per set), read data against a scoreboard, that a
// first access misses and a repeated one hits, the two-cycle hit latency
// and the read-miss latency: 4 cycles plus the memory's, which for the
// memory model is MEM_LAT + 2 cycles from the first cycle with mem_rd_valid
// high to the one with mem_rsp_valid high (one cycle to take the request,
// MEM_LAT to count down, one to answer).
module tb_chameleon_full;
  import cc_pkg::*;
  import tb_pkg::*;

  localparam int SETS = 16384, DIVS = 4;
  localparam int MEM_LAT = 20;

  logic clk = 0, rst_n = 0;
  key_t [DIVS-1:0] keys;
  logic init_done;
  logic req_valid = 0, req_ready, req_write = 0;
  line_addr_t req_addr = '0;
  line_data_t req_wdata = '0;
  logic rsp_valid, rsp_hit;
  line_data_t rsp_data;
  logic mem_rd_valid, mem_rd_ready, mem_rsp_valid, mem_wr_valid, mem_wr_ready;
  line_addr_t mem_rd_addr, mem_wr_addr;
  line_data_t mem_rsp_data, mem_wr_data;
  cc_events_t events;

  chameleon_cache dut (
    .clk(clk), .rst_n(rst_n), .keys(keys), .init_done(init_done),
    .req_valid(req_valid), .req_ready(req_ready), .req_write(req_write), .req_addr(req_addr),
    .req_wdata(req_wdata), .rsp_valid(rsp_valid), .rsp_data(rsp_data), .rsp_hit(rsp_hit),
    .mem_rd_valid(mem_rd_valid), .mem_rd_ready(mem_rd_ready), .mem_rd_addr(mem_rd_addr),
    .mem_rsp_valid(mem_rsp_valid), .mem_rsp_data(mem_rsp_data),
    .mem_wr_valid(mem_wr_valid), .mem_wr_ready(mem_wr_ready), .mem_wr_addr(mem_wr_addr),
    .mem_wr_data(mem_wr_data), .events(events));

  mem_model #(.LATENCY(MEM_LAT)) u_mem (
    .clk(clk), .rst_n(rst_n), .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data), .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready),
    .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  line_data_t expect_data [line_addr_t];
  function automatic line_data_t newest(line_addr_t a);
    return expect_data.exists(a) ? expect_data[a] : mem_pattern(a);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(line_addr_t a, bit wr, output bit hit);
    longint t0;
    line_data_t d;
    d = rand_data();
    @(negedge clk);
    req_valid = 1; req_addr = a; req_write = wr; req_wdata = d;
    do @(posedge clk); while (!req_ready);
    t0 = cycle;
    #1 req_valid = 0;
    if (wr) expect_data[a] = d;
    do @(posedge clk); while (!rsp_valid);
    hit = rsp_hit;
    if (!wr) begin
      checks++;
      if (rsp_data !== newest(a)) begin
        failures++;
        $display("read %h returned wrong data", a);
      end
    end
    if (hit) begin
      checks++;
      if (cycle - t0 != 2) begin
        failures++;
        $display("hit latency %0d", cycle - t0);
      end
    end else if (!wr) begin
      checks++;
      if (cycle - t0 != 4 + MEM_LAT + 2) begin
        failures++;
        $display("read miss latency %0d", cycle - t0);
      end
    end
  endtask

  initial begin
    bit h;
    longint t_init;
    for (int i = 0; i < DIVS; i++) keys[i] = rand_key();
    #22 rst_n = 1;
    @(posedge clk);
    t_init = cycle;
    while (!init_done) @(posedge clk);
    checks++;
    if (cycle - t_init > SETS + 1 || cycle - t_init < SETS - 1) begin
      failures++;
      $display("init took %0d cycles", cycle - t_init);
    end
    for (int i = 0; i < 64; i++) begin
      line_addr_t a;
      a = rand_addr();
      access(a, 0, h);
      checks++; if (h) begin failures++; $display("first access to %h hit", a); end
      access(a, $urandom_range(0, 1) == 1, h);
      checks++; if (!h) begin failures++; $display("second access to %h missed", a); end
      access(a, 0, h);
      checks++; if (!h) begin failures++; $display("third access to %h missed", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
