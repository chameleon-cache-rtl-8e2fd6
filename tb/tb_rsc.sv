// tb_rsc: checks the skewed RSC array (16 sets, 4 ways, 2 divisions)
// against a model indexed [division][set][way]: writes to single ways,
// reads with a different set index per division, the lookup result
// (hit, division, way) for present and absent addresses, and the clear of
// one set in every way.
module tb_rsc;
  import cc_pkg::*;
  import tb_pkg::*;

  localparam int SETS = 16, WAYS = 4, DIVS = 2, WPD = 2;
  logic clk = 0;
  logic rd_en = 0;
  logic [DIVS-1:0][3:0] idx = '0;
  line_t [DIVS-1:0][WPD-1:0] lines;
  line_addr_t cmp_addr = '0;
  logic hit;
  logic [0:0] hit_div, hit_way;
  logic wr_en = 0;
  logic [0:0] wr_div = '0, wr_way = '0;
  logic [3:0] wr_idx = '0, clr_idx = '0;
  line_t wr_line = '0;
  logic clr_en = 0;
  line_t model [DIVS][SETS][WPD];
  int checks = 0, failures = 0;

  rsc #(.SETS(SETS), .WAYS(WAYS), .DIVS(DIVS)) dut (
    .clk(clk), .rd_en(rd_en), .idx(idx), .lines(lines), .cmp_addr(cmp_addr),
    .hit(hit), .hit_div(hit_div), .hit_way(hit_way),
    .wr_en(wr_en), .wr_div(wr_div), .wr_way(wr_way), .wr_idx(wr_idx), .wr_line(wr_line),
    .clr_en(clr_en), .clr_idx(clr_idx));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // small tag space so that lookups hit often
  function automatic line_t rand_line();
    line_t l;
    l.valid = ($urandom_range(0, 3) != 0);
    l.dirty = 1'($urandom);
    l.tag   = line_addr_t'($urandom_range(0, 40));
    l.data  = rand_data();
    return l;
  endfunction

  task automatic clear_all();
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk); clr_en = 1; clr_idx = 4'(s);
      for (int d = 0; d < DIVS; d++) for (int w = 0; w < WPD; w++) model[d][s][w] = '0;
    end
    @(negedge clk); clr_en = 0;
  endtask

  initial begin
    clear_all();
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (n == 2000) begin
        clear_all();
        @(negedge clk);
      end
      if ($urandom_range(0, 1) == 0) begin
        wr_en = 1; wr_div = 1'($urandom); wr_way = 1'($urandom); wr_idx = 4'($urandom);
        wr_line = rand_line();
        // keep tags unique across the two sets a lookup can see is not
        // required by the array; the model simply records what is written
        model[wr_div][wr_idx][wr_way] = wr_line;
        @(posedge clk); #1; wr_en = 0;
      end else begin
        logic exp_hit;
        rd_en = 1; idx[0] = 4'($urandom); idx[1] = 4'($urandom);
        cmp_addr = line_addr_t'($urandom_range(0, 40));
        @(posedge clk); #1; rd_en = 0;
        exp_hit = 0;
        for (int d = 0; d < DIVS; d++)
          for (int w = 0; w < WPD; w++) begin
            checks++;
            if (lines[d][w] !== model[d][idx[d]][w]) begin
              failures++;
              if (failures < 5) $display("line mismatch d%0d w%0d set %0d", d, w, idx[d]);
            end
            if (model[d][idx[d]][w].valid && model[d][idx[d]][w].tag == cmp_addr) exp_hit = 1;
          end
        checks++;
        if (hit !== exp_hit) begin
          failures++;
          if (failures < 5) $display("hit %b expected %b", hit, exp_hit);
        end
        if (hit) begin
          line_t l;
          l = model[hit_div][idx[hit_div]][hit_way];
          checks++;
          if (!(l.valid && l.tag == cmp_addr)) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
