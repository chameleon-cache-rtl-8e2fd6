// tb_victim_cache: checks the victim cache (4 entries) against a model of
// its slots, FIFO insert pointer, reinsert pointer and pending count.
// Random operations: inserts (also into a full queue, to reach the
// overflow case), swaps at the reinsert pointer that advance it, swaps at
// a hit slot that do not, and skips. After each operation it checks the
// lookup of a random present or absent address, the line about to be
// evicted, the reinsert slot and the pending count.
module tb_victim_cache;
  import cc_pkg::*;
  import tb_pkg::*;

  localparam int E = 4;
  logic clk = 0, rst_n = 0;
  line_addr_t lk_addr = '0;
  logic lk_hit;
  logic [1:0] lk_idx, swap_idx = '0, rei_idx;
  line_t lk_line, evict_line, rei_line, ins_line = '0, swap_line = '0;
  logic ins_en = 0, swap_en = 0, swap_adv = 0, skip_en = 0, overflow, rei_pending;
  logic [2:0] pending;
  int checks = 0, failures = 0, n_overflow = 0, n_adv = 0;

  line_t m_slot [E];
  int m_ins = 0, m_rei = 0, m_pend = 0;
  int next_tag = 1;

  victim_cache #(.ENTRIES(E)) dut (
    .clk(clk), .rst_n(rst_n), .lk_addr(lk_addr), .lk_hit(lk_hit), .lk_idx(lk_idx), .lk_line(lk_line),
    .ins_en(ins_en), .ins_line(ins_line), .evict_line(evict_line), .overflow(overflow),
    .swap_en(swap_en), .swap_idx(swap_idx), .swap_line(swap_line), .swap_adv(swap_adv),
    .skip_en(skip_en), .rei_pending(rei_pending), .rei_idx(rei_idx), .rei_line(rei_line),
    .pending(pending));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t new_line(bit valid);
    line_t l;
    l.valid = valid;
    l.dirty = 1'($urandom);
    l.tag   = line_addr_t'(next_tag);
    l.data  = rand_data();
    next_tag++;
    return l;
  endfunction

  task automatic check_state();
    int k;
    checks++;
    if (pending !== 3'(m_pend) || rei_pending !== (m_pend != 0) || rei_idx !== 2'(m_rei)) begin
      failures++;
      if (failures < 5) $display("pointer mismatch pend %0d/%0d rei %0d/%0d", pending, m_pend, rei_idx, m_rei);
    end
    checks++;
    if (evict_line !== m_slot[m_ins] || rei_line !== m_slot[m_rei]) failures++;
    // lookup of a present slot's tag (or of an absent tag)
    k = $urandom_range(0, E);
    lk_addr = (k < E) ? m_slot[k].tag : line_addr_t'(42'h3FF_FFFF_FFFF);
    #1;
    checks++;
    if (k < E && m_slot[k].valid) begin
      if (!lk_hit || lk_idx !== 2'(k) || lk_line !== m_slot[k]) failures++;
    end else if (k == E) begin
      if (lk_hit) failures++;
    end
  endtask

  initial begin
    for (int i = 0; i < E; i++) m_slot[i] = '0;
    #12 rst_n = 1;
    @(negedge clk);
    check_state();
    for (int n = 0; n < 5000; n++) begin
      int op;
      @(negedge clk);
      op = $urandom_range(0, 9);
      if (op < 4) begin
        ins_en = 1; ins_line = new_line(1);
        #1;
        checks++;
        if (overflow !== (m_pend == E)) failures++;
        if (m_pend == E) begin
          n_overflow++;
          m_rei = (m_rei + 1) % E;
        end else m_pend++;
        m_slot[m_ins] = ins_line;
        m_ins = (m_ins + 1) % E;
      end else if (op < 7 && m_pend > 0) begin
        swap_en = 1; swap_adv = 1; swap_idx = 2'(m_rei); swap_line = new_line($urandom_range(0, 1) == 0);
        m_slot[m_rei] = swap_line;
        m_rei = (m_rei + 1) % E; m_pend--;
        n_adv++;
      end else if (op < 9) begin
        swap_en = 1; swap_adv = 0; swap_idx = 2'($urandom); swap_line = new_line(1);
        m_slot[swap_idx] = swap_line;
      end else if (m_pend > 0) begin
        skip_en = 1;
        m_rei = (m_rei + 1) % E; m_pend--;
      end
      @(posedge clk); #1;
      ins_en = 0; swap_en = 0; swap_adv = 0; skip_en = 0;
      check_state();
    end
    checks++;
    if (n_overflow == 0 || n_adv == 0) failures++;
    $display("overflows %0d reinserts %0d", n_overflow, n_adv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
