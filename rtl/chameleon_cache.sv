// chameleon_cache: Chameleon Cache, a randomized skewed cache (RSC) with a
// reinserting, fully associative victim cache (VC).
//
// Idea. In an RSC every division maps an address to a different set, chosen
// by a keyed index derivation function (IDF). An attacker who learns which
// addresses contend in the RSC can still build eviction sets. Chameleon Cache
// hides that contention: a line evicted from the RSC goes to a small VC
// instead of memory, and the VC puts it back into the RSC through a
// randomly chosen division, i.e. through a different mapping. What finally
// leaves the cache is the oldest VC line, unrelated to the conflict that
// caused the eviction, so evictions look like those of a fully associative
// cache with random replacement.
//
// Structure (all of it follows the source design unless noted):
//   idf          - per-division set indices of an address (keyed cipher).
//   rsc          - SETS x WAYS lines in DIVS divisions, one RAM per way.
//   victim_cache - VC_ENTRIES lines, FIFO insert pointer, reinsert pointer.
//   cc_prng      - random division and random way (random replacement).
//   this module  - the controller: Init, Lookup, RSC Insert, RSC Reinsert and
//                  Automatic RSC Reinsert as a finite-state machine.
//
// Operation (one request at a time, blocking; this is this design's choice,
// the source design describes the algorithms, not a pipeline):
//   INIT  after reset every set is cleared, one set index per cycle (SETS
//         cycles); the VC and its pointers are cleared by reset.
//   IDLE  accepts a request (req_valid && req_ready): the IDF indices of the
//         address are computed and every division reads its set. A random
//         division d and way v are drawn at the same time.
//   LOOK  RSC and VC are compared in the same cycle. An RSC hit or a VC hit
//         answers in the same cycle, so both hits have the same latency
//         (indistinguishability requirement). A VC hit also swaps the line
//         with way v of set idx_d in division d (RSC Reinsert). A miss goes
//         to memory (read) or, for a full-line write, straight to FILL.
//   FILL  RSC Insert: the new line goes to way v of set idx_d of division d;
//         a valid line found there moves to the VC at the insert pointer; the
//         line that held that VC slot leaves the cache and, when dirty, is
//         written back (WB).
//   RSEL, REIN  the reinsertion slot that follows every fill (Automatic RSC
//         Reinsert): the VC line at the reinsert pointer has its own set
//         indices computed and read (RSEL), then is swapped with way v of its
//         set in a random division d (REIN). The slot takes its two cycles
//         whether or not a line is waiting, so the time a miss keeps the
//         cache busy does not reveal whether the fill pushed a line into the
//         VC. The source design says the reinsertion is "periodically
//         triggered"; tying it to every fill is this design's choice, and it
//         means at most one line ever waits and requests never compete with
//         a reinsertion.
// Write requests (full-line writes that set the dirty bit, write-allocate)
// and write-back of dirty lines are this design's additions: the source
// design only reads and "evicts to memory".
//
// Timing, counting the cycle in which req_valid && req_ready as cycle 0: a
// hit has rsp_valid high (for one cycle) in cycle 2, and the next request
// can be accepted in that same cycle. A write miss answers in cycle 3. A
// read miss raises mem_rd_valid in cycle 2 and answers two cycles after
// the cycle in which mem_rsp_valid is high. After a miss, req_ready returns
// two cycles after the cycle in which rsp_valid is high (the reinsertion
// slot), plus the write-back handshake when a dirty line left the VC.
//
// Ports: keys[DIVS] are the IDF keys (re-keying is left to the system).
// Request: req_valid/req_ready handshake with req_write, req_addr (line
// address), req_wdata. Response: rsp_valid, rsp_data, rsp_hit. Memory read:
// mem_rd_valid/mem_rd_ready with mem_rd_addr, then mem_rsp_valid with
// mem_rsp_data. Memory write: mem_wr_valid/mem_wr_ready with mem_wr_addr and
// mem_wr_data. events: one-cycle pulses, see cc_pkg::cc_events_t.
module chameleon_cache
  import cc_pkg::*;
#(
  parameter int unsigned SETS       = 16384,   // 16 MB / 64 B / 16 ways
  parameter int unsigned WAYS       = 16,
  parameter int unsigned DIVS       = 4,
  parameter int unsigned VC_ENTRIES = 8,
  parameter int unsigned ROUNDS     = 4,
  parameter logic [31:0] SEED       = 32'h1F2E_3D4C,
  localparam int unsigned WPD   = WAYS / DIVS,
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned DIV_W = (DIVS > 1) ? $clog2(DIVS) : 1,
  localparam int unsigned WAY_W = (WPD  > 1) ? $clog2(WPD)  : 1,
  localparam int unsigned VCP_W = (VC_ENTRIES > 1) ? $clog2(VC_ENTRIES) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  key_t [DIVS-1:0]       keys,
  output logic                  init_done,
  // core side
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic                  req_write,
  input  line_addr_t            req_addr,
  input  line_data_t            req_wdata,
  output logic                  rsp_valid,
  output line_data_t            rsp_data,
  output logic                  rsp_hit,
  // memory side
  output logic                  mem_rd_valid,
  input  logic                  mem_rd_ready,
  output line_addr_t            mem_rd_addr,
  input  logic                  mem_rsp_valid,
  input  line_data_t            mem_rsp_data,
  output logic                  mem_wr_valid,
  input  logic                  mem_wr_ready,
  output line_addr_t            mem_wr_addr,
  output line_data_t            mem_wr_data,
  // statistics
  output cc_events_t            events
);

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOK, S_MRD, S_MWAIT, S_FILL, S_WB, S_RSEL, S_REIN
  } state_t;

  state_t                    state;
  logic                      rein_go_q;
  logic [IDX_W-1:0]          init_cnt;
  line_addr_t                addr_q;
  logic                      write_q;
  line_data_t                wdata_q;
  logic [DIVS-1:0][IDX_W-1:0] idx_q;
  logic [DIV_W-1:0]          rdiv_q;
  logic [WAY_W-1:0]          rway_q;
  line_data_t                fill_data_q;
  logic                      fill_dirty_q;
  line_t                     wb_q;

  // ---------------------------------------------------------------- IDF
  line_addr_t                 idf_addr;
  logic [DIVS-1:0][IDX_W-1:0] idf_idx;

  idf #(.DIVS(DIVS), .SETS(SETS), .ROUNDS(ROUNDS)) u_idf (
    .addr(idf_addr), .keys(keys), .idx(idf_idx)
  );

  // ---------------------------------------------------------------- PRNG
  logic [31:0] rnd;
  cc_prng #(.SEED(SEED)) u_prng (.clk(clk), .rst_n(rst_n), .rnd(rnd));

  // ---------------------------------------------------------------- RSC
  logic                       rsc_rd_en;
  line_t [DIVS-1:0][WPD-1:0]  rsc_lines;
  logic                       rsc_hit;
  logic [DIV_W-1:0]           rsc_hit_div;
  logic [WAY_W-1:0]           rsc_hit_way;
  logic                       rsc_wr_en;
  logic [DIV_W-1:0]           rsc_wr_div;
  logic [WAY_W-1:0]           rsc_wr_way;
  logic [IDX_W-1:0]           rsc_wr_idx;
  line_t                      rsc_wr_line;
  logic                       rsc_clr_en;

  rsc #(.SETS(SETS), .WAYS(WAYS), .DIVS(DIVS)) u_rsc (
    .clk(clk),
    .rd_en(rsc_rd_en), .idx(idf_idx), .lines(rsc_lines),
    .cmp_addr(addr_q), .hit(rsc_hit), .hit_div(rsc_hit_div), .hit_way(rsc_hit_way),
    .wr_en(rsc_wr_en), .wr_div(rsc_wr_div), .wr_way(rsc_wr_way), .wr_idx(rsc_wr_idx),
    .wr_line(rsc_wr_line),
    .clr_en(rsc_clr_en), .clr_idx(init_cnt)
  );

  // The replacement candidate: way v of set idx_d in the random division d.
  line_t rsc_victim;
  assign rsc_victim = rsc_lines[rdiv_q][rway_q];

  // ---------------------------------------------------------------- VC
  logic                  vc_hit;
  logic [VCP_W-1:0]      vc_hit_idx;
  line_t                 vc_hit_line;
  logic                  vc_ins_en;
  line_t                 vc_evict_line;
  logic                  vc_swap_en;
  logic [VCP_W-1:0]      vc_swap_idx;
  logic                  vc_swap_adv;
  logic                  vc_skip_en;
  logic                  vc_rei_pending;
  logic [VCP_W-1:0]      vc_rei_idx;
  line_t                 vc_rei_line;

  victim_cache #(.ENTRIES(VC_ENTRIES)) u_vc (
    .clk(clk), .rst_n(rst_n),
    .lk_addr(addr_q), .lk_hit(vc_hit), .lk_idx(vc_hit_idx), .lk_line(vc_hit_line),
    .ins_en(vc_ins_en), .ins_line(rsc_victim), .evict_line(vc_evict_line), .overflow(),
    .swap_en(vc_swap_en), .swap_idx(vc_swap_idx), .swap_line(rsc_victim), .swap_adv(vc_swap_adv),
    .skip_en(vc_skip_en),
    .rei_pending(vc_rei_pending), .rei_idx(vc_rei_idx), .rei_line(vc_rei_line), .pending()
  );


  // ---------------------------------------------------------------- control
  line_t hit_line;   // VC line after an optional write, for the swap

  always_comb begin
    idf_addr     = (state == S_RSEL) ? vc_rei_line.tag : req_addr;
    req_ready    = (state == S_IDLE);
    init_done    = (state != S_INIT);
    rsc_rd_en    = 1'b0;
    rsc_clr_en   = (state == S_INIT);
    rsc_wr_en    = 1'b0;
    rsc_wr_div   = rdiv_q;
    rsc_wr_way   = rway_q;
    rsc_wr_idx   = idx_q[rdiv_q];
    rsc_wr_line  = INVALID_LINE;
    vc_ins_en    = 1'b0;
    vc_swap_en   = 1'b0;
    vc_swap_idx  = vc_hit_idx;
    vc_swap_adv  = 1'b0;
    vc_skip_en   = 1'b0;
    mem_rd_valid = (state == S_MRD);
    mem_rd_addr  = addr_q;
    mem_wr_valid = (state == S_WB);
    mem_wr_addr  = wb_q.tag;
    mem_wr_data  = wb_q.data;
    events       = '0;

    hit_line = vc_hit_line;
    if (write_q) begin
      hit_line.data  = wdata_q;
      hit_line.dirty = 1'b1;
    end

    unique case (state)
      S_IDLE: begin
        rsc_rd_en = req_valid;
      end
      S_LOOK: begin
        if (rsc_hit) begin
          events.rsc_hit = 1'b1;
          if (write_q) begin
            rsc_wr_en   = 1'b1;
            rsc_wr_div  = rsc_hit_div;
            rsc_wr_way  = rsc_hit_way;
            rsc_wr_idx  = idx_q[rsc_hit_div];
            rsc_wr_line = '{valid: 1'b1, dirty: 1'b1, tag: addr_q, data: wdata_q};
          end
        end else if (vc_hit) begin
          // RSC Reinsert of the hit line: swap with the random RSC victim.
          events.vc_hit = 1'b1;
          rsc_wr_en     = 1'b1;
          rsc_wr_line   = hit_line;
          vc_swap_en    = 1'b1;
          vc_swap_idx   = vc_hit_idx;
        end else begin
          events.miss = 1'b1;
        end
      end
      S_FILL: begin
        // RSC Insert
        rsc_wr_en   = 1'b1;
        rsc_wr_line = '{valid: 1'b1, dirty: fill_dirty_q, tag: addr_q, data: fill_data_q};
        if (rsc_victim.valid) begin
          vc_ins_en       = 1'b1;
          events.rsc_evict = 1'b1;
          events.vc_evict  = vc_evict_line.valid;
        end
      end
      S_WB: begin
        events.writeback = mem_wr_ready;
      end
      S_RSEL: begin
        // Reinsertion slot, first cycle: read the sets of the VC line at the
        // reinsert pointer (or skip an invalid one).
        if (vc_rei_pending) begin
          if (vc_rei_line.valid) rsc_rd_en  = 1'b1;
          else                   vc_skip_en = 1'b1;
        end
      end
      S_REIN: begin
        // Reinsertion slot, second cycle: Automatic RSC Reinsert.
        if (rein_go_q) begin
          events.auto_reinsert = 1'b1;
          rsc_wr_en    = 1'b1;
          rsc_wr_line  = vc_rei_line;
          vc_swap_en   = 1'b1;
          vc_swap_idx  = vc_rei_idx;
          vc_swap_adv  = 1'b1;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_INIT;
      init_cnt     <= '0;
      addr_q       <= '0;
      write_q      <= 1'b0;
      wdata_q      <= '0;
      idx_q        <= '0;
      rdiv_q       <= '0;
      rway_q       <= '0;
      fill_data_q  <= '0;
      fill_dirty_q <= 1'b0;
      wb_q         <= INVALID_LINE;
      rein_go_q    <= 1'b0;
      rsp_valid    <= 1'b0;
      rsp_data     <= '0;
      rsp_hit      <= 1'b0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        S_INIT: begin
          init_cnt <= init_cnt + 1'b1;
          if (init_cnt == IDX_W'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (req_valid) begin
            addr_q  <= req_addr;
            write_q <= req_write;
            wdata_q <= req_wdata;
            idx_q   <= idf_idx;
            rdiv_q  <= DIV_W'(rnd[DIV_W-1:0] % DIVS);
            rway_q  <= WAY_W'(rnd[16 +: WAY_W] % WPD);
            state   <= S_LOOK;
          end
        end
        S_LOOK: begin
          if (rsc_hit || vc_hit) begin
            rsp_valid <= 1'b1;
            rsp_hit   <= 1'b1;
            rsp_data  <= write_q ? wdata_q : (rsc_hit ? rsc_lines[rsc_hit_div][rsc_hit_way].data
                                                      : vc_hit_line.data);
            state     <= S_IDLE;
          end else if (write_q) begin
            fill_data_q  <= wdata_q;
            fill_dirty_q <= 1'b1;
            state        <= S_FILL;
          end else begin
            state <= S_MRD;
          end
        end
        S_MRD: begin
          if (mem_rd_ready) state <= S_MWAIT;
        end
        S_MWAIT: begin
          if (mem_rsp_valid) begin
            fill_data_q  <= mem_rsp_data;
            fill_dirty_q <= 1'b0;
            state        <= S_FILL;
          end
        end
        S_FILL: begin
          rsp_valid <= 1'b1;
          rsp_hit   <= 1'b0;
          rsp_data  <= fill_data_q;
          if (rsc_victim.valid && vc_evict_line.valid && vc_evict_line.dirty) begin
            wb_q  <= vc_evict_line;
            state <= S_WB;
          end else begin
            state <= S_RSEL;
          end
        end
        S_WB: begin
          if (mem_wr_ready) state <= S_RSEL;
        end
        S_RSEL: begin
          rein_go_q <= vc_rei_pending && vc_rei_line.valid;
          addr_q    <= vc_rei_line.tag;
          write_q   <= 1'b0;
          idx_q     <= idf_idx;
          rdiv_q    <= DIV_W'(rnd[DIV_W-1:0] % DIVS);
          rway_q    <= WAY_W'(rnd[16 +: WAY_W] % WPD);
          state     <= S_REIN;
        end
        S_REIN: begin
          rein_go_q <= 1'b0;
          state     <= S_IDLE;
        end
        default: state <= S_INIT;
      endcase
    end
  end

  // A line lives in exactly one place: never in the RSC and the VC at once.
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_LOOK) |-> !(rsc_hit && vc_hit));
  // Every fill is followed by its reinsertion slot, so no reinsertion is
  // ever left waiting while a request is served.
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_LOOK) |-> !vc_rei_pending);
  // The requester keeps a request stable until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (req_valid && !req_ready) |=> (req_valid && $stable(req_addr) && $stable(req_write)));

endmodule
