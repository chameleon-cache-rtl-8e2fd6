// mem_model: behavioural model of the backing memory (not synthesizable).
//
// Read requests (rd_valid/rd_ready) are accepted one at a time and answered
// LATENCY cycles later with rsp_valid and the line; a line never written
// holds tb_pkg::mem_pattern(address). Write requests (wr_valid/wr_ready)
// are accepted when ready, which is randomly withheld to exercise the
// cache's write-back stall. Reads and writes are counted.
module mem_model
  import cc_pkg::*;
#(
  parameter int LATENCY = 5
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rd_valid,
  output logic       rd_ready,
  input  line_addr_t rd_addr,
  output logic       rsp_valid,
  output line_data_t rsp_data,
  input  logic       wr_valid,
  output logic       wr_ready,
  input  line_addr_t wr_addr,
  input  line_data_t wr_data
);

  line_data_t store [line_addr_t];
  int         n_reads  = 0;
  int         n_writes = 0;
  int         countdown = -1;
  line_addr_t pending_addr;

  function automatic line_data_t peek(line_addr_t a);
    return store.exists(a) ? store[a] : tb_pkg::mem_pattern(a);
  endfunction

  assign rd_ready = (countdown < 0);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      countdown <= -1;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      wr_ready  <= 1'b0;
    end else begin
      rsp_valid <= 1'b0;
      wr_ready  <= ($urandom_range(0, 2) != 0);
      if (rd_valid && rd_ready) begin
        countdown    <= LATENCY;
        pending_addr <= rd_addr;
        n_reads      <= n_reads + 1;
      end else if (countdown == 0) begin
        rsp_valid <= 1'b1;
        rsp_data  <= peek(pending_addr);
        countdown <= -1;
      end else if (countdown > 0) begin
        countdown <= countdown - 1;
      end
      if (wr_valid && wr_ready) begin
        store[wr_addr] = wr_data;
        n_writes       <= n_writes + 1;
      end
    end
  end

endmodule
