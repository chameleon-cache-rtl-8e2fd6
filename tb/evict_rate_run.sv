// evict_rate_run: measures, on one Chameleon Cache configuration, how often
// a random eviction set evicts a target line.
//
// After a warm-up of 4 x (cache lines) random reads, each of TRIALS trials
// reads a fresh target line, reads EVSET fresh random lines (the eviction
// set; 4 x WAYS in the published experiment) and reads the target again. A
// miss on the last read means the target left the cache (RSC and VC). The
// rate is reported in parts per thousand when `done` rises. Reads are
// checked against the memory model's content on the way.
module evict_rate_run
  import cc_pkg::*;
  import tb_pkg::*;
#(
  parameter int SETS = 16,
  parameter int WAYS = 16,
  parameter int DIVS = 8,
  parameter int VCE  = 8,
  parameter int TRIALS = 400
) (
  output logic done,
  output int   permille,
  output int   errors
);

  localparam int EVSET = 4 * WAYS;

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

  chameleon_cache #(.SETS(SETS), .WAYS(WAYS), .DIVS(DIVS), .VC_ENTRIES(VCE), .SEED(32'(SETS * 977 + WAYS))) dut (
    .clk(clk), .rst_n(rst_n), .keys(keys), .init_done(init_done),
    .req_valid(req_valid), .req_ready(req_ready), .req_write(req_write), .req_addr(req_addr),
    .req_wdata(req_wdata), .rsp_valid(rsp_valid), .rsp_data(rsp_data), .rsp_hit(rsp_hit),
    .mem_rd_valid(mem_rd_valid), .mem_rd_ready(mem_rd_ready), .mem_rd_addr(mem_rd_addr),
    .mem_rsp_valid(mem_rsp_valid), .mem_rsp_data(mem_rsp_data),
    .mem_wr_valid(mem_wr_valid), .mem_wr_ready(mem_wr_ready), .mem_wr_addr(mem_wr_addr),
    .mem_wr_data(mem_wr_data), .events(events));

  mem_model #(.LATENCY(2)) u_mem (
    .clk(clk), .rst_n(rst_n), .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data), .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready),
    .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  always #5 clk = ~clk;

  task automatic read(line_addr_t a, output bit hit);
    @(negedge clk);
    req_valid = 1; req_addr = a; req_write = 0;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    do @(posedge clk); while (!rsp_valid);
    hit = rsp_hit;
    if (rsp_data !== mem_pattern(a)) errors++;
  endtask

  initial begin
    bit h;
    int evicted;
    done = 0; permille = 0; errors = 0; evicted = 0;
    for (int i = 0; i < DIVS; i++) keys[i] = rand_key();
    #22 rst_n = 1;
    while (!init_done) @(posedge clk);
    for (int i = 0; i < 4 * SETS * WAYS; i++) read(rand_addr(), h);
    for (int t = 0; t < TRIALS; t++) begin
      line_addr_t target;
      target = rand_addr();
      read(target, h);
      for (int e = 0; e < EVSET; e++) read(rand_addr(), h);
      read(target, h);
      if (!h) evicted++;
    end
    permille = evicted * 1000 / TRIALS;
    done = 1;
  end

endmodule
