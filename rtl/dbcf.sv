// dbcf: double-buffer contention-free write network between N LLR lanes and
// M extrinsic memory banks. Buffer set one is a FIFO per lane, buffer set two
// a circular buffer per bank (inside each buffer_router). Each cycle a lane
// offers two candidates to the routers: the head of its FIFO (if any) and
// the LLR arriving this cycle. A granted FIFO head pops; an arriving LLR that
// is not granted is pushed into the FIFO. Hence producers never stall, and a
// lane can retire up to two LLRs per cycle, so its FIFO drains again while
// the decoder keeps producing. Back pressure is spread over FIFOs and
// circular buffers. Routers see 2N requesters: index l is the FIFO head of
// lane l, index N+l the new LLR of lane l. `idle` is high when all FIFOs and
// buffers are empty, i.e. every LLR of a half iteration has reached memory.
// Counters report conflict cycles, FIFO pushes, bypassed and buffered writes.
// Interface/timing: in_valid/in_pkt are taken every cycle; memory writes
// come out combinationally (bypass) or from the circular buffers later.
// Follows the source: FIFOs per lane, per-bank router with selection S,
// circular buffer and bypass. This design's choice: the two candidates per
// lane (the source does not say how a FIFO drains while its decoder runs at
// full rate), so the router interconnect is 2N x S instead of N x S.
module dbcf
  import tdec_pkg::*;
#(
  parameter int N      = 32,
  parameter int M      = 32,
  parameter int S      = 3,
  parameter int D_FIFO = 8,
  parameter int D_BUF  = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N-1:0]            in_valid,
  input  wr_pkt_t [N-1:0]         in_pkt,
  output logic [M-1:0]            mem_we,
  output logic [M-1:0][OFF_W-1:0] mem_addr,
  output llr_t [M-1:0]            mem_data,
  output logic                    idle,
  output logic                    overflow,
  output logic [31:0]             n_conflict_cycles,
  output logic [31:0]             n_fifo_push,
  output logic [31:0]             n_bypass,
  output logic [31:0]             n_buffered
);
  localparam int PKW = $bits(wr_pkt_t);

  logic [N-1:0]           f_empty, f_full, f_ovf, f_push, f_pop, g_head, g_new;
  wr_pkt_t [N-1:0]        f_head;
  logic [2*N-1:0]         cand_v;
  wr_pkt_t [2*N-1:0]      cand;
  logic [M-1:0][2*N-1:0]  grant;
  logic [M-1:0]           b_conf, b_byp, b_rej, b_empty;

  assign cand_v = {in_valid, ~f_empty};
  assign cand   = {in_pkt, f_head};

  for (genvar l = 0; l < N; l++) begin : g_lane
    lane_fifo #(.DEPTH(D_FIFO), .W(PKW)) u_fifo (
      .clk, .rst_n, .push(f_push[l]), .din(in_pkt[l]), .pop(f_pop[l]),
      .head(f_head[l]), .empty(f_empty[l]), .full(f_full[l]), .count(),
      .overflow(f_ovf[l]));
    always_comb begin
      g_head[l] = 1'b0;
      g_new[l]  = 1'b0;
      for (int b = 0; b < M; b++) begin
        g_head[l] |= grant[b][l];
        g_new[l]  |= grant[b][N+l];
      end
    end
    assign f_pop[l]  = g_head[l];
    assign f_push[l] = in_valid[l] && !g_new[l];
  end

  for (genvar b = 0; b < M; b++) begin : g_bank
    buffer_router #(.N(2*N), .S(S), .DEPTH(D_BUF), .BANK(b),
                    .SEED(16'hACE1 ^ 16'(b * 16'h1F3B))) u_br (
      .clk, .rst_n, .lane_valid(cand_v), .lane_pkt(cand), .grant(grant[b]),
      .mem_we(mem_we[b]), .mem_addr(mem_addr[b]), .mem_data(mem_data[b]),
      .conflict(b_conf[b]), .bypassed(b_byp[b]), .rejected(b_rej[b]), .empty(b_empty[b]));
  end

  assign idle     = (&f_empty) && (&b_empty) && !(|in_valid);
  assign overflow = |f_ovf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_conflict_cycles <= '0; n_fifo_push <= '0; n_bypass <= '0; n_buffered <= '0;
    end else begin
      if (|b_conf) n_conflict_cycles <= n_conflict_cycles + 1;
      n_fifo_push <= n_fifo_push + 32'($countones(f_push));
      n_bypass    <= n_bypass + 32'($countones(b_byp));
      n_buffered  <= n_buffered + 32'($countones(mem_we & ~b_byp));
    end
  end
endmodule
