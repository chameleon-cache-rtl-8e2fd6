// victim_cache: fully associative victim cache (VC) with automatic
// reinsertion bookkeeping.
//
// ENTRIES slots of line_t held in flip-flops. Lines that the RSC evicts are
// written FIFO-fashion at the insert pointer; whatever occupied that slot
// leaves the cache (evict_line shows it, so that a dirty line can be written
// back). A reinsert pointer follows the insert pointer: every slot written by
// an insert is later handed back to the RSC (Automatic RSC Reinsert), in
// insertion order. Both pointers wrap around at ENTRIES, as in the source
// design. The source design's pseudo-code increments idx_VC,insert before
// writing the slot but reinserts at idx_VC,reinsert before incrementing it;
// taken literally the two would be one slot apart, so here both pointers
// name the slot they act on next and are incremented after use.
// The number of slots awaiting reinsertion is kept in `pending` (0..ENTRIES)
// instead of comparing the wrapped pointers. If an insert meets a full
// queue (pending == ENTRIES, an overflow that only happens when
// reinsertion was starved), the slot it overwrites was the oldest awaiting
// reinsertion, so the reinsert pointer moves on with it.
//
// Lookup is combinational: lk_addr against all valid tags gives lk_hit,
// lk_idx and lk_line.
//
// One operation per cycle, chosen by the controller:
//   ins_en  - write ins_line at the insert pointer (RSC Insert eviction).
//   swap_en - write swap_line into slot swap_idx (the line that came out of
//             the RSC in a reinsertion swap); with swap_adv the reinsertion
//             was the automatic one and the reinsert pointer advances.
//   skip_en - advance the reinsert pointer without a swap (slot invalid).
// Reset empties the cache and zeroes both pointers (Init).
module victim_cache
  import cc_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  localparam int unsigned PTR_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned CNT_W = $clog2(ENTRIES + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  line_addr_t       lk_addr,
  output logic             lk_hit,
  output logic [PTR_W-1:0] lk_idx,
  output line_t            lk_line,
  // insert at the insert pointer
  input  logic             ins_en,
  input  line_t            ins_line,
  output line_t            evict_line,
  output logic             overflow,
  // swap with a line from the RSC
  input  logic             swap_en,
  input  logic [PTR_W-1:0] swap_idx,
  input  line_t            swap_line,
  input  logic             swap_adv,
  input  logic             skip_en,
  // automatic reinsertion
  output logic             rei_pending,
  output logic [PTR_W-1:0] rei_idx,
  output line_t            rei_line,
  output logic [CNT_W-1:0] pending
);

  line_t            slots [ENTRIES];
  logic [PTR_W-1:0] ins_ptr, rei_ptr;

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (p == PTR_W'(ENTRIES - 1)) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    lk_hit  = 1'b0;
    lk_idx  = '0;
    lk_line = INVALID_LINE;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (slots[i].valid && slots[i].tag == lk_addr) begin
        lk_hit  = 1'b1;
        lk_idx  = PTR_W'(i);
        lk_line = slots[i];
      end
    end
  end

  assign evict_line  = slots[ins_ptr];
  assign overflow    = ins_en && (pending == CNT_W'(ENTRIES));
  assign rei_pending = (pending != '0);
  assign rei_idx     = rei_ptr;
  assign rei_line    = slots[rei_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) slots[i] <= INVALID_LINE;
      ins_ptr <= '0;
      rei_ptr <= '0;
      pending <= '0;
    end else if (ins_en) begin
      slots[ins_ptr] <= ins_line;
      ins_ptr        <= inc(ins_ptr);
      if (pending == CNT_W'(ENTRIES)) rei_ptr <= inc(rei_ptr);
      else                            pending <= pending + 1'b1;
    end else if (swap_en) begin
      slots[swap_idx] <= swap_line;
      if (swap_adv) begin
        rei_ptr <= inc(rei_ptr);
        pending <= pending - 1'b1;
      end
    end else if (skip_en) begin
      rei_ptr <= inc(rei_ptr);
      pending <= pending - 1'b1;
    end
  end

  // One operation per cycle; the reinsert pointer only moves while work is pending.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0({ins_en, swap_en, skip_en}));
  assert property (@(posedge clk) disable iff (!rst_n) (skip_en || (swap_en && swap_adv)) |-> rei_pending);
  assert property (@(posedge clk) disable iff (!rst_n) (swap_en && swap_adv) |-> swap_idx == rei_ptr);

endmodule
