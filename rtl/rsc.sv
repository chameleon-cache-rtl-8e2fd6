// rsc: randomized skewed cache (RSC) array with its lookup logic.
//
// WAYS ways are split into DIVS divisions of WPD = WAYS/DIVS ways; every way
// belongs to exactly one division. Each division is indexed by its own set
// index idx[i] (from the IDF), so the cache is skewed by its divisions, as
// in the source design. Every way is one rsc_way_ram.
//
// Read: with rd_en, all ways of division i read set idx[i]. One cycle later
// lines[i][j] holds way j of the selected set of division i, and the lookup
// compares cmp_addr (the address the lookup is for, held stable by the
// caller) against every valid tag: hit, hit_div, hit_way. The lines stay
// until the next read, so the caller can pick a victim from them later.
//
// Write: with wr_en, way wr_way of division wr_div is written at set wr_idx.
// Clear: with clr_en, set clr_idx of every way of every division is written
// invalid (used by the Init sweep). Write and clear take priority over a read
// of the same way; the controller never asks for two at once.
module rsc
  import cc_pkg::*;
#(
  parameter int unsigned SETS = 16384,
  parameter int unsigned WAYS = 16,
  parameter int unsigned DIVS = 4,
  localparam int unsigned WPD   = WAYS / DIVS,
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned DIV_W = (DIVS > 1) ? $clog2(DIVS) : 1,
  localparam int unsigned WAY_W = (WPD  > 1) ? $clog2(WPD)  : 1
) (
  input  logic                          clk,
  // read all divisions
  input  logic                          rd_en,
  input  logic [DIVS-1:0][IDX_W-1:0]    idx,
  output line_t [DIVS-1:0][WPD-1:0]     lines,
  // lookup on the lines read
  input  line_addr_t                    cmp_addr,
  output logic                          hit,
  output logic [DIV_W-1:0]              hit_div,
  output logic [WAY_W-1:0]              hit_way,
  // write one way
  input  logic                          wr_en,
  input  logic [DIV_W-1:0]              wr_div,
  input  logic [WAY_W-1:0]              wr_way,
  input  logic [IDX_W-1:0]              wr_idx,
  input  line_t                         wr_line,
  // clear one set in all ways
  input  logic                          clr_en,
  input  logic [IDX_W-1:0]              clr_idx
);

  initial begin
    assert (WAYS % DIVS == 0) else $fatal(1, "WAYS must be a multiple of DIVS");
    assert ((SETS & (SETS - 1)) == 0) else $fatal(1, "SETS must be a power of two");
  end

  for (genvar i = 0; i < DIVS; i++) begin : g_div
    for (genvar j = 0; j < WPD; j++) begin : g_way
      logic             sel_wr;
      logic             en, we;
      logic [IDX_W-1:0] addr;
      line_t            wdata;
      always_comb begin
        sel_wr = wr_en && (DIVS == 1 || wr_div == DIV_W'(i)) && (WPD == 1 || wr_way == WAY_W'(j));
        en     = rd_en || sel_wr || clr_en;
        we     = sel_wr || clr_en;
        addr   = clr_en ? clr_idx : (sel_wr ? wr_idx : idx[i]);
        wdata  = clr_en ? INVALID_LINE : wr_line;
      end
      rsc_way_ram #(.DEPTH(SETS)) u_ram (
        .clk(clk), .en(en), .we(we), .addr(addr), .wdata(wdata), .rdata(lines[i][j])
      );
    end
  end

  always_comb begin
    hit     = 1'b0;
    hit_div = '0;
    hit_way = '0;
    for (int unsigned i = 0; i < DIVS; i++) begin
      for (int unsigned j = 0; j < WPD; j++) begin
        if (lines[i][j].valid && lines[i][j].tag == cmp_addr) begin
          hit     = 1'b1;
          hit_div = DIV_W'(i);
          hit_way = WAY_W'(j);
        end
      end
    end
  end

endmodule
