// lane_fifo: the FIFO that sits between one SISO-decoder output lane and the
// interconnection network of the DBCF write network. An LLR that the buffer
// router of its target bank rejects is pushed here, so the decoder keeps
// running at full speed. Push and pop may happen in the same cycle (also when
// full). Head is read combinationally (register file, first-word fall-through).
// A push into a full FIFO without a pop loses the datum and sets the sticky
// overflow flag; the paper sizes the FIFOs by simulation so that this does
// not happen, the flag is this design's addition for checking that.
module lane_fifo #(
  parameter int DEPTH = 8,
  parameter int W     = 20
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] head,
  output logic         empty,
  output logic         full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic         overflow
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rp, wp;

  assign empty = (count == 0);
  assign full  = (count == DEPTH);
  assign head  = mem[rp];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  logic do_pop, do_push;
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0; overflow <= 1'b0;
    end else begin
      if (do_push) begin
        mem[wp] <= din;
        wp      <= inc(wp);
      end
      if (do_pop) rp <= inc(rp);
      count <= count + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
      if (push && !do_push) overflow <= 1'b1;
    end
  end
endmodule
