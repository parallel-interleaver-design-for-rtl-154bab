// circular_buffer: register-based circular buffer in front of one extrinsic
// memory bank, together with its buffer control (write pointer wp, read
// pointer rp, occupancy). Up to S entries are written in one cycle into
// consecutive slots starting at wp (wr_data[0] first); one entry leaves per
// cycle from rp. Registers rather than SRAM are used because of the S
// concurrent writes, as the paper requires. A write may use the slot freed
// by the same cycle's read. Head is combinational.
module circular_buffer #(
  parameter int DEPTH = 12,
  parameter int S     = 3,
  parameter int W     = 14
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(S+1)-1:0]    wr_cnt,
  input  logic [S-1:0][W-1:0]       wr_data,
  input  logic                      rd_en,
  output logic [W-1:0]              head,
  output logic                      empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = $clog2(DEPTH);
  logic [W-1:0]  buf_q [DEPTH];
  logic [PW-1:0] wp, rp;

  function automatic logic [PW-1:0] addp(input logic [PW-1:0] p, input int d);
    int t;
    t = int'(p) + d;
    if (t >= DEPTH) t = t - DEPTH;
    return PW'(t);
  endfunction

  assign empty = (count == 0);
  assign head  = buf_q[rp];

  logic do_rd;
  assign do_rd = rd_en && !empty;

  // Writing beyond the free space (after this cycle's read) would overwrite data.
  property no_overrun;
    @(posedge clk)
      !rst_n || int'(wr_cnt) <= DEPTH - int'(count) + (do_rd ? 1 : 0);
  endproperty
  a_no_overrun: assert property (no_overrun);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      for (int s = 0; s < S; s++)
        if (s < int'(wr_cnt)) buf_q[addp(wp, s)] <= wr_data[s];
      wp    <= addp(wp, int'(wr_cnt));
      if (do_rd) rp <= addp(rp, 1);
      count <= count + wr_cnt - (do_rd ? 1'b1 : 1'b0);
    end
  end
endmodule
