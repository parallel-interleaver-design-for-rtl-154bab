// turbo_top: the parallel interleaver subsystem of an HSPA+/LTE turbo
// decoder with 16 Radix-4 decoders (64 LLR lanes). The decoders themselves
// are outside this module: each lane port carries one extrinsic LLR per
// cycle with the index the decoder produced it for. The subsystem writes
// every LLR to the extrinsic memory position the other half iteration will
// read it from, in order (balanced scheduling), so reads never conflict.
//   LTE mode:   64 lanes, each with a QPP address generator, write straight
//               into 64 memory modules (QPP is contention-free; a conflict is
//               only counted and flagged, the colliding LLR is lost).
//   HSPA+ mode: lanes 0..31, each with a unified HSPA+ address generator,
//               write through the DBCF network (lane FIFOs, per-module
//               buffer routers with circular buffers and bypass) into memory
//               modules 0..31; one shared preprocessing unit.
// Address a maps to module a / W and word a mod W, W = bank_w from the
// control unit (the memory is split into contiguous segments, so the
// in-order reads of the next half iteration hit one word per module).
// Reads: rd_addr[b] gives the word of module b one cycle later on rd_data[b].
// Channel LLR memories (16 single-port modules) are exposed as ports.
// Timing: lane LLR -> address generator register (1 cycle) -> network.
// Follows the published decoder: 64 QPP lanes in LTE mode, 32 HSPA+ lanes
// with the DBCF network and 32 modules in HSPA+ mode, 64 extrinsic and 16
// channel memory modules. This design's choices: the contiguous segment
// mapping, the unpruned interleaved domain, and the decoders left outside
// (the lane ports stand for their LLR outputs).
module turbo_top
  import tdec_pkg::*;
#(
  parameter int NL      = 64,
  parameter int NH      = 32,
  parameter int NB      = 64,
  parameter int NCH     = 16,
  parameter int S       = 3,
  parameter int DFIFO   = 8,
  parameter int DBUF    = 12,
  parameter int DEPTH   = 160,
  parameter int CH_DEPTH = 1152
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // job configuration
  input  logic                      start,
  input  logic [ADDR_W-1:0]         k_in,
  input  logic                      lte_in,
  input  logic [3:0]                max_half,
  input  logic [ADDR_W-1:0]         qpp_f1,
  input  logic [ADDR_W-1:0]         qpp_f2,
  input  logic [3:0][ADDR_W-1:0]    qpp_g,      // inverse polynomial g1..g4
  // decoder side
  input  logic [NL-1:0]             lane_valid,
  input  logic [NL-1:0][ADDR_W-1:0] lane_idx,
  input  llr_t [NL-1:0]             lane_llr,
  input  logic                      dec_done,
  input  logic [NB-1:0][OFF_W-1:0]  rd_addr,
  output llr_t [NB-1:0]             rd_data,
  // channel LLR memories
  input  logic [NCH-1:0]            ch_en,
  input  logic [NCH-1:0]            ch_we,
  input  logic [NCH-1:0][$clog2(CH_DEPTH)-1:0] ch_addr,
  input  logic [NCH-1:0][2*B_CH-1:0] ch_wdata,
  output logic [NCH-1:0][2*B_CH-1:0] ch_rdata,
  // status
  output logic                      busy,
  output logic                      done,
  output logic                      half_active,
  output logic [3:0]                half_idx,
  output iag_mode_e                 mode,
  output logic [OFF_W-1:0]          bank_w,
  output logic                      pre_busy,
  output logic                      overflow,
  output logic                      lte_conflict,
  output logic [15:0]               half_cycles,
  output logic [31:0]               n_conflict_cycles,
  output logic [31:0]               n_fifo_push,
  output logic [31:0]               n_bypass,
  output logic [31:0]               n_buffered
);
  // ---------------- control ----------------
  logic              pre_start, pre_done, net_idle, lte;
  logic [ADDR_W-1:0] K, rc;
  logic [4:0]        R;
  logic [8:0]        C, p;
  ccase_e            ccase;
  logic              swap;
  logic [19:0][8:0]  r;
  logic [19:0][7:0]  m;
  logic [19:0][4:0]  t_row, t_inv;
  logic              s_we, si_we;
  logic [7:0]        s_addr, s_data, si_addr, si_data;

  control_unit u_ctl (
    .clk, .rst_n, .start, .k_in, .lte_in, .max_half, .pre_start, .pre_done, .rc,
    .dec_done, .net_idle, .K, .lte, .bank_w, .half_active, .half_idx, .mode,
    .busy, .done, .half_cycles);

  hspa_preproc u_pre (
    .clk, .rst_n, .start(pre_start), .k_in(K), .busy(pre_busy), .done(pre_done),
    .R, .C, .p, .ccase, .swap, .r, .m, .t_row, .t_inv,
    .s_we, .s_addr, .s_data, .si_we, .si_addr, .si_data);
  assign rc = ADDR_W'(R) * ADDR_W'(C);

  // ---------------- address generation ----------------
  logic [NL-1:0]             q_v, q_ok;
  logic [NL-1:0][ADDR_W-1:0] q_addr;
  logic [NH-1:0]             h_v, h_ok;
  logic [NH-1:0][ADDR_W-1:0] h_addr;
  llr_t [NL-1:0]             llr_d;

  always_ff @(posedge clk) llr_d <= lane_llr;

  for (genvar l = 0; l < NL; l++) begin : g_qpp
    qpp_iag u_q (
      .clk, .rst_n, .K, .f1(qpp_f1), .f2(qpp_f2), .g1(qpp_g[0]), .g2(qpp_g[1]),
      .g3(qpp_g[2]), .g4(qpp_g[3]), .mode, .in_valid(lane_valid[l] && lte),
      .idx(lane_idx[l]), .out_valid(q_v[l]), .addr(q_addr[l]), .ok(q_ok[l]));
  end

  for (genvar l = 0; l < NH; l++) begin : g_hspa
    hspa_iag u_h (
      .clk, .rst_n, .K, .R, .C, .p, .ccase, .swap, .r, .m, .t_row, .t_inv,
      .s_we, .s_addr, .s_data, .si_we, .si_addr, .si_data,
      .mode, .in_valid(lane_valid[l] && !lte), .idx(lane_idx[l]),
      .out_valid(h_v[l]), .addr(h_addr[l]), .ok(h_ok[l]));
  end

  function automatic wr_pkt_t split(input logic [ADDR_W-1:0] a,
                                    input logic [OFF_W-1:0] w, input llr_t d);
    wr_pkt_t pk;
    logic [ADDR_W-1:0] bk;
    bk      = (w == '0) ? '0 : a / ADDR_W'(w);
    pk.bank = BANK_W'(bk);
    pk.off  = OFF_W'(a - bk * ADDR_W'(w));
    pk.llr  = d;
    return pk;
  endfunction

  // ---------------- HSPA+: DBCF network ----------------
  wr_pkt_t [NH-1:0]         h_pkt;
  logic    [NH-1:0]         h_req;
  logic [NH-1:0]            d_we;
  logic [NH-1:0][OFF_W-1:0] d_addr;
  llr_t [NH-1:0]            d_data;
  logic                     d_idle;

  always_comb
    for (int l = 0; l < NH; l++) begin
      h_pkt[l] = split(h_addr[l], bank_w, llr_d[l]);
      h_req[l] = h_v[l] && h_ok[l];
    end

  dbcf #(.N(NH), .M(NH), .S(S), .D_FIFO(DFIFO), .D_BUF(DBUF)) u_dbcf (
    .clk, .rst_n, .in_valid(h_req), .in_pkt(h_pkt), .mem_we(d_we), .mem_addr(d_addr),
    .mem_data(d_data), .idle(d_idle), .overflow, .n_conflict_cycles, .n_fifo_push,
    .n_bypass, .n_buffered);

  // ---------------- LTE: direct writes ----------------
  wr_pkt_t [NL-1:0]         q_pkt;
  logic [NB-1:0]            l_we, l_multi;
  logic [NB-1:0][OFF_W-1:0] l_addr;
  llr_t [NB-1:0]            l_data;

  always_comb
    for (int l = 0; l < NL; l++) q_pkt[l] = split(q_addr[l], bank_w, llr_d[l]);

  // per module: the lowest-numbered lane addressing it wins; more than one
  // lane on a module is a collision (never happens for a valid QPP)
  for (genvar b = 0; b < NB; b++) begin : g_lte_mux
    always_comb begin
      l_we[b] = 1'b0; l_multi[b] = 1'b0; l_addr[b] = '0; l_data[b] = '0;
      for (int l = 0; l < NL; l++)
        if (q_v[l] && q_ok[l] && q_pkt[l].bank == BANK_W'(b)) begin
          if (l_we[b]) l_multi[b] = 1'b1;
          else begin
            l_we[b] = 1'b1; l_addr[b] = q_pkt[l].off; l_data[b] = q_pkt[l].llr;
          end
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          lte_conflict <= 1'b0;
    else if (start)      lte_conflict <= 1'b0;
    else if (|l_multi)   lte_conflict <= 1'b1;
  end

  assign net_idle = lte ? !(|q_v) && !(|lane_valid) : d_idle && !(|lane_valid);

  // ---------------- extrinsic memories ----------------
  for (genvar b = 0; b < NB; b++) begin : g_mem
    logic              we;
    logic [OFF_W-1:0]  wa;
    llr_t              wd;
    if (b < NH) begin : g_shared
      assign we = lte ? l_we[b]   : d_we[b];
      assign wa = lte ? l_addr[b] : d_addr[b];
      assign wd = lte ? l_data[b] : d_data[b];
    end else begin : g_lte_only
      assign we = lte && l_we[b];
      assign wa = l_addr[b];
      assign wd = l_data[b];
    end
    ext_mem #(.DEPTH(DEPTH), .W(B_EXT)) u_mem (
      .clk, .we, .waddr(wa), .wdata(wd), .raddr(rd_addr[b]), .rdata(rd_data[b]));
  end

  // ---------------- channel LLR memories ----------------
  for (genvar c = 0; c < NCH; c++) begin : g_ch
    channel_mem #(.DEPTH(CH_DEPTH), .W(2*B_CH)) u_ch (
      .clk, .en(ch_en[c]), .we(ch_we[c]), .addr(ch_addr[c]), .wdata(ch_wdata[c]),
      .rdata(ch_rdata[c]));
  end
endmodule
