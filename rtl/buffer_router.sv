// buffer_router: the DBCF slice in front of one extrinsic memory bank. Each
// cycle the conflict detector finds the lanes whose pending LLR targets this
// bank; the priority selector, started at a PRN-generated lane, accepts at
// most min(S, free slots) of them; the accepted LLRs are gathered through an
// N x S multiplexer (the reduced interconnect of the paper) and passed to the
// bypass unit, which writes one datum per cycle to the memory, either the
// circular buffer head or, when the buffer is empty, an accepted LLR
// directly. Rejected lanes keep their LLR in their lane FIFO.
// Timing: grant is combinational from the lane inputs; the memory write is
// issued in the same cycle (its address/data are combinational outputs).
// Free slots = D_buf - count + 1: the +1 is the entry that leaves this cycle
// (or the bypassed one) -- this design's choice.
module buffer_router
  import tdec_pkg::*;
#(
  parameter int N      = 32,
  parameter int S      = 3,
  parameter int DEPTH  = 12,
  parameter int BANK   = 0,
  parameter logic [15:0] SEED = 16'h0001
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N-1:0]             lane_valid,
  input  wr_pkt_t [N-1:0]          lane_pkt,
  output logic [N-1:0]             grant,
  output logic                     mem_we,
  output logic [OFF_W-1:0]         mem_addr,
  output llr_t                     mem_data,
  output logic                     conflict,
  output logic                     bypassed,
  output logic                     rejected,
  output logic                     empty
);
  localparam int BWW = $bits(bank_word_t);
  localparam int SW  = $clog2(S+1);

  logic [N-1:0][BANK_W-1:0] lane_bank;
  logic [N-1:0]             req;
  logic [$clog2(N+1)-1:0]   n_req;
  logic [15:0]              rnd;
  logic [SW-1:0]            limit, n_grant, buf_wr_cnt;
  logic [S-1:0][$clog2(N)-1:0] sel_idx;
  logic [S-1:0][BWW-1:0]    acc_data, buf_wr_data;
  logic [BWW-1:0]           buf_head;
  bank_word_t               mem_word;
  logic                     buf_empty, buf_rd;
  logic [$clog2(DEPTH+1)-1:0] count;

  always_comb for (int l = 0; l < N; l++) lane_bank[l] = lane_pkt[l].bank;

  conflict_detector #(.N(N), .BW(BANK_W), .BANK(BANK)) u_cd (
    .lane_valid, .lane_bank, .req, .n_req, .conflict);

  prn_gen #(.SEED(SEED)) u_prn (.clk, .rst_n, .rnd);

  // Buffer control: how many LLRs may enter this cycle.
  always_comb begin
    int freec;
    freec = DEPTH - int'(count) + 1;
    limit = (freec < S) ? SW'(freec) : SW'(S);
  end

  priority_selector #(.N(N), .S(S)) u_ps (
    .req, .offset(rnd[$clog2(N)-1:0]), .limit, .grant, .sel_idx, .n_grant);

  // N x S gather network.
  always_comb
    for (int s = 0; s < S; s++)
      acc_data[s] = {lane_pkt[sel_idx[s]].off, lane_pkt[sel_idx[s]].llr};

  bypass_unit #(.S(S), .W(BWW)) u_bp (
    .buf_empty, .buf_head, .in_cnt(n_grant), .in_data(acc_data),
    .mem_we, .mem_word, .buf_rd, .bypassed, .buf_wr_cnt, .buf_wr_data);

  circular_buffer #(.DEPTH(DEPTH), .S(S), .W(BWW)) u_cb (
    .clk, .rst_n, .wr_cnt(buf_wr_cnt), .wr_data(buf_wr_data), .rd_en(buf_rd),
    .head(buf_head), .empty(buf_empty), .count);

  assign mem_addr = mem_word.off;
  assign mem_data = mem_word.llr;
  assign rejected = (int'(n_req) > int'(n_grant));
  assign empty    = buf_empty;
endmodule
