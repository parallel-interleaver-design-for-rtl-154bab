// bypass_unit: decides what the memory bank writes this cycle. When the
// circular buffer holds data, its head is written (and popped) and all newly
// accepted LLRs go into the buffer. When the buffer is empty the first newly
// accepted LLR goes straight to the memory, skipping the buffer latency, and
// only the rest are buffered. Combinational; one memory write per cycle (the
// write port of a two-port SRAM).
// The bypass behaviour follows the published DBCF design; the one-write-
// per-cycle memory port and the append order are this design's choices.
module bypass_unit #(
  parameter int S = 3,
  parameter int W = 14
) (
  input  logic                   buf_empty,
  input  logic [W-1:0]           buf_head,
  input  logic [$clog2(S+1)-1:0] in_cnt,
  input  logic [S-1:0][W-1:0]    in_data,
  output logic                   mem_we,
  output logic [W-1:0]           mem_word,
  output logic                   buf_rd,
  output logic                   bypassed,
  output logic [$clog2(S+1)-1:0] buf_wr_cnt,
  output logic [S-1:0][W-1:0]    buf_wr_data
);
  always_comb begin
    buf_wr_data = in_data;
    buf_wr_cnt  = in_cnt;
    buf_rd      = 1'b0;
    bypassed    = 1'b0;
    mem_we      = 1'b0;
    mem_word    = buf_head;
    if (!buf_empty) begin
      mem_we = 1'b1;
      buf_rd = 1'b1;
    end else if (in_cnt != 0) begin
      mem_we     = 1'b1;
      bypassed   = 1'b1;
      mem_word   = in_data[0];
      buf_wr_cnt = in_cnt - 1'b1;
      for (int s = 0; s < S - 1; s++) buf_wr_data[s] = in_data[s+1];
      buf_wr_data[S-1] = '0;
    end
  end
endmodule
