// rsc_way_ram: storage of one way of one RSC division.
//
// A single-port synchronous RAM with DEPTH words of type line_t (valid,
// dirty, tag and data of a cache line). In a chip this would be a tag SRAM
// and a data SRAM macro; here it is one array that synthesis keeps as a
// memory. A read (en=1, we=0) returns the word in rdata on the next clock
// edge; rdata then holds its value until the next read. A write (en=1,
// we=1) stores wdata and leaves rdata unchanged. The source design gives only
// the cache geometry; the one-cycle read is this design's choice.
module rsc_way_ram
  import cc_pkg::*;
#(
  parameter int unsigned DEPTH  = 16384,
  localparam int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  line_t             wdata,
  output line_t             rdata
);

  line_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
