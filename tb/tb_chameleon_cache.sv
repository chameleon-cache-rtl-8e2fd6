// tb_chameleon_cache: end-to-end test of the Chameleon Cache at reduced size
// (16 sets, 4 ways, 2 divisions, 4 victim-cache entries; 64 lines in the
// RSC) against the memory model.
//
// Checks:
//  * Init takes SETS cycles before the first request is accepted.
//  * Every read returns the last value written to that line address, or
//    the memory's initial pattern: a lost, duplicated or stale line shows up
//    here, since a dirty line that is not written back comes back from
//    memory with old data.
//  * Every write-back carries the newest data of its line.
//  * A hit (rsp_hit) arrives exactly two cycles after acceptance, for RSC
//    hits and VC hits alike (same latency for both stores).
//  * A repeated access to the line just used always hits.
//  * After a miss without write-back, req_ready returns two cycles after the
//    response, the same number of cycles whether or not the fill pushed a line into the
//    VC (the reinsertion slot has a fixed length); both cases must occur.
//  * Each mechanism happened: RSC hit, VC hit with swap, miss, eviction from
//    the RSC into the VC, eviction from the VC, write-back and automatic
//    reinsertion.
// The run ends with a stream of back-to-back write misses (req_valid never
// drops) and reads every line back.
module tb_chameleon_cache;
  import cc_pkg::*;
  import tb_pkg::*;

  localparam int SETS = 16, WAYS = 4, DIVS = 2, VCE = 4;

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

  chameleon_cache #(.SETS(SETS), .WAYS(WAYS), .DIVS(DIVS), .VC_ENTRIES(VCE)) dut (
    .clk(clk), .rst_n(rst_n), .keys(keys), .init_done(init_done),
    .req_valid(req_valid), .req_ready(req_ready), .req_write(req_write), .req_addr(req_addr),
    .req_wdata(req_wdata), .rsp_valid(rsp_valid), .rsp_data(rsp_data), .rsp_hit(rsp_hit),
    .mem_rd_valid(mem_rd_valid), .mem_rd_ready(mem_rd_ready), .mem_rd_addr(mem_rd_addr),
    .mem_rsp_valid(mem_rsp_valid), .mem_rsp_data(mem_rsp_data),
    .mem_wr_valid(mem_wr_valid), .mem_wr_ready(mem_wr_ready), .mem_wr_addr(mem_wr_addr),
    .mem_wr_data(mem_wr_data), .events(events));

  mem_model #(.LATENCY(6)) u_mem (
    .clk(clk), .rst_n(rst_n), .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data), .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready),
    .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // event counters
  int c_rsc_hit, c_vc_hit, c_miss, c_rsc_evict, c_vc_evict, c_wb, c_rein;
  initial {c_rsc_hit, c_vc_hit, c_miss, c_rsc_evict, c_vc_evict, c_wb, c_rein} = '0;
  always @(posedge clk) if (rst_n) begin
    c_rsc_hit   += int'(events.rsc_hit);
    c_vc_hit    += int'(events.vc_hit);
    c_miss      += int'(events.miss);
    c_rsc_evict += int'(events.rsc_evict);
    c_vc_evict  += int'(events.vc_evict);
    c_wb        += int'(events.writeback);
    c_rein      += int'(events.auto_reinsert);
  end

  // busy time after a miss: from the response to the next req_ready
  int gap_cnt = -1, gap_ev_val = -1, gap_noev_val = -1, n_gap_ev = 0, n_gap_noev = 0;
  bit last_evict = 0, gap_ev = 0, gap_wb = 0;
  always @(posedge clk) if (rst_n) begin
    if (events.miss) last_evict = 0;
    if (events.rsc_evict) last_evict = 1;
    if (rsp_valid && !rsp_hit) begin
      gap_cnt = 0; gap_ev = last_evict; gap_wb = mem_wr_valid;
    end else if (gap_cnt >= 0) begin
      if (mem_wr_valid) gap_wb = 1;
      if (req_ready) begin
        if (!gap_wb) begin
          if (gap_ev) begin
            n_gap_ev++;
            if (gap_ev_val < 0) gap_ev_val = gap_cnt;
            checks++;
            if (gap_cnt != gap_ev_val) begin failures++; $display("busy time %0d after evicting miss", gap_cnt); end
          end else begin
            n_gap_noev++;
            if (gap_noev_val < 0) gap_noev_val = gap_cnt;
            checks++;
            if (gap_cnt != gap_noev_val) begin failures++; $display("busy time %0d after non-evicting miss", gap_cnt); end
          end
        end
        gap_cnt = -1;
      end else gap_cnt++;
    end
  end

  // scoreboard: newest data of every line address
  line_data_t expect_data [line_addr_t];
  function automatic line_data_t newest(line_addr_t a);
    return expect_data.exists(a) ? expect_data[a] : mem_pattern(a);
  endfunction

  always @(posedge clk) if (rst_n && mem_wr_valid && mem_wr_ready) begin
    checks++;
    if (mem_wr_data !== newest(mem_wr_addr)) begin
      failures++;
      $display("write-back of %h carries stale data", mem_wr_addr);
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one request; returns whether it hit. back_to_back keeps req_valid high
  // into the next request (no idle cycle in between).
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
        if (failures < 10) $display("read %h returned wrong data", a);
      end
    end
    if (hit) begin
      checks++;
      if (cycle - t0 != 2) begin
        failures++;
        $display("hit latency %0d", cycle - t0);
      end
    end
    #1;
  endtask

  function automatic line_addr_t pool_addr(int i);
    return line_addr_t'(42'h100_0000 + i * 7);
  endfunction

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
    // directed: miss then hit
    access(pool_addr(0), 0, h);
    checks++; if (h) begin failures++; $display("first access hit"); end
    access(pool_addr(0), 0, h);
    checks++; if (!h) begin failures++; $display("second access missed"); end
    // random traffic over 100 lines (cache holds 64 + 4)
    for (int n = 0; n < 6000; n++) begin
      line_addr_t a;
      a = pool_addr($urandom_range(0, 99));
      access(a, $urandom_range(0, 2) == 0, h);
      if ($urandom_range(0, 3) == 0) begin
        access(a, 0, h);
        checks++;
        if (!h) begin failures++; $display("re-access of %h missed", a); end
      end
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    // stream of back-to-back full-line write misses to new lines
    for (int n = 0; n < 40; n++) begin
      line_data_t d;
      d = rand_data();
      req_valid = 1; req_write = 1; req_addr = line_addr_t'(42'h200_0000 + n); req_wdata = d;
      expect_data[req_addr] = d;
      do @(posedge clk); while (!req_ready);
      #1;
    end
    req_valid = 0;
    repeat (50) @(posedge clk);
    // read everything back
    for (int i = 0; i < 100; i++) access(pool_addr(i), 0, h);
    for (int n = 0; n < 40; n++) access(line_addr_t'(42'h200_0000 + n), 0, h);

    $display("rsc_hit %0d vc_hit %0d miss %0d rsc_evict %0d vc_evict %0d writeback %0d reinsert %0d mem reads %0d writes %0d",
             c_rsc_hit, c_vc_hit, c_miss, c_rsc_evict, c_vc_evict, c_wb, c_rein,
             u_mem.n_reads, u_mem.n_writes);
    checks++; if (c_rsc_hit == 0)   begin failures++; $display("no RSC hit"); end
    checks++; if (c_vc_hit == 0)    begin failures++; $display("no VC hit"); end
    checks++; if (c_miss == 0)      begin failures++; $display("no miss"); end
    checks++; if (c_rsc_evict == 0) begin failures++; $display("no RSC eviction"); end
    checks++; if (c_vc_evict == 0)  begin failures++; $display("no VC eviction"); end
    checks++; if (c_wb == 0)        begin failures++; $display("no write-back"); end
    checks++; if (c_rein == 0)      begin failures++; $display("no automatic reinsertion"); end
    $display("req_ready returns %0d cycles after a miss response with a line pushed into the VC (%0d times), %0d without (%0d times)",
             gap_ev_val + 1, n_gap_ev, gap_noev_val + 1, n_gap_noev);
    checks++; if (gap_ev_val != 1) begin failures++; $display("req_ready not 2 cycles after a miss response"); end
    checks++; if (n_gap_ev == 0 || n_gap_noev == 0) begin failures++; $display("miss kinds not both seen"); end
    checks++; if (gap_ev_val != gap_noev_val) begin failures++; $display("busy time depends on eviction"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
