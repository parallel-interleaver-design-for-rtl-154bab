// tb_turbo_top: end-to-end test of the interleaver subsystem with its
// default (full-size) configuration: 64 LTE lanes, 32 HSPA+ lanes, 64
// extrinsic memory modules of 160 words, DBCF with S=3, D_FIFO=8, D_buf=12.
// A model of the 16 decoders drives the lanes: in each half iteration lane l
// works through its own window (positions l*W .. l*W+W-1, W = module size
// chosen by the control unit), one LLR per cycle, all lanes in parallel.
// Jobs: HSPA+ K=5114 and K=40, LTE K=6144 and K=40, two half iterations each
// (the first in deinterleave mode, the second in interleave mode).
// Checks:
//  - after every half iteration each memory word holds exactly the LLR the
//    reference interleaver (3GPP TS 25.212 / QPP) sends there, written once,
//    and no other word was written (a write monitor on every module);
//  - after each job the memories are read back through the read ports;
//  - the HSPA+ K=5114 half iterations end within DC_MAX extra cycles of the
//    ideal 160 (Table II of the source reports 10 extra cycles);
//  - no lane FIFO overflows and QPP writes never collide; a final run with
//    lock-step lanes (no stagger) must overflow and raise the flag;
//  - the channel LLR memories store and return data.
// Mechanism counters (each must be non-zero): preprocessing runs, DBCF
// conflict cycles, FIFO pushes, bypassed writes, buffered writes, both
// write modes, mode switches, LTE halves, HSPA+ halves, channel accesses.
module tb_turbo_top;
  import tdec_pkg::*;
  import hspa_ref_pkg::*;
  localparam int NL = 64, NH = 32, NB = 64, NCH = 16, DEPTH = 160, CH_DEPTH = 1152;
  localparam int DC_MAX = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, lte_in = 0, dec_done = 0;
  logic [ADDR_W-1:0] k_in = 0, qpp_f1 = 0, qpp_f2 = 0;
  logic [3:0][ADDR_W-1:0] qpp_g = '0;
  logic [3:0] max_half = 2;
  logic [NL-1:0] lane_valid = '0;
  logic [NL-1:0][ADDR_W-1:0] lane_idx = '0;
  llr_t [NL-1:0] lane_llr = '0;
  logic [NB-1:0][OFF_W-1:0] rd_addr = '0;
  llr_t [NB-1:0] rd_data;
  logic [NCH-1:0] ch_en = '0, ch_we = '0;
  logic [NCH-1:0][$clog2(CH_DEPTH)-1:0] ch_addr = '0;
  logic [NCH-1:0][2*B_CH-1:0] ch_wdata = '0, ch_rdata;
  logic busy, done, half_active, pre_busy, overflow, lte_conflict;
  logic [3:0] half_idx;
  iag_mode_e mode;
  logic [OFF_W-1:0] bank_w;
  logic [15:0] half_cycles;
  logic [31:0] n_conflict_cycles, n_fifo_push, n_bypass, n_buffered;

  turbo_top dut (.*);

  // write monitor: data and write count of every word in the current half
  llr_t shadow[NB][DEPTH];
  int   wcount[NB][DEPTH];
  for (genvar b = 0; b < NB; b++) begin : g_mon
    always @(posedge clk)
      if (dut.g_mem[b].we) begin
        shadow[b][dut.g_mem[b].wa] <= dut.g_mem[b].wd;
        wcount[b][dut.g_mem[b].wa] <= wcount[b][dut.g_mem[b].wa] + 1;
      end
  end

  // mechanism counters
  int m_pre = 0, m_intl = 0, m_deintl = 0, m_switch = 0, m_lte = 0, m_hspa = 0, m_ch = 0;
  iag_mode_e last_mode = DEINTL;
  logic last_active = 0, last_pre = 0;
  always @(posedge clk) begin
    last_pre <= pre_busy;
    if (pre_busy && !last_pre) m_pre++;
    last_active <= half_active;
    if (half_active && !last_active) begin
      if (mode == INTL) m_intl++; else m_deintl++;
      if (half_idx != 0 && mode != last_mode) m_switch++;
      last_mode <= mode;
    end
  end

  llr_t llr_v[8192];
  int   exp_a[8192];    // expected target address per source position, -1: none
  int   qf[8192];
  int   pos_n;          // number of source positions of the half

  task automatic clear_mon();
    for (int b = 0; b < NB; b++) for (int w = 0; w < DEPTH; w++) wcount[b][w] = 0;
  endtask

  // drive one half: lane l sends positions l*W + ((t + stag*l) mod W),
  // t = 0..W-1, if < pos_n (stag staggers the lanes' starting points)
  task automatic run_half(int nlanes, int W, int stag);
    for (int t = 0; t < W; t++) begin
      for (int l = 0; l < NL; l++) begin
        automatic int pos = l * W + (t + stag * l) % W;
        lane_valid[l] = (l < nlanes) && (pos < pos_n);
        lane_idx[l]   = ADDR_W'(pos);
        lane_llr[l]   = llr_v[pos];
      end
      @(negedge clk);
    end
    lane_valid = '0;
    dec_done = 1;
    @(negedge clk);
    dec_done = 0;
  endtask

  // compare the monitor with the expectation of the half just finished
  task automatic check_half(string tag, int W);
    int bad = 0;
    bit hit[NB][DEPTH];
    for (int b = 0; b < NB; b++) for (int w = 0; w < DEPTH; w++) hit[b][w] = 0;
    for (int s = 0; s < pos_n; s++) if (exp_a[s] >= 0) begin
      automatic int b = exp_a[s] / W, w = exp_a[s] % W;
      hit[b][w] = 1;
      checks++;
      if (wcount[b][w] != 1 || shadow[b][w] != llr_v[s]) begin
        failures++; bad++;
        if (bad < 5) $display("%s: pos %0d -> addr %0d: writes %0d data %0d exp %0d",
                              tag, s, exp_a[s], wcount[b][w], shadow[b][w], llr_v[s]);
      end
    end
    for (int b = 0; b < NB; b++) for (int w = 0; w < DEPTH; w++)
      if (!hit[b][w] && wcount[b][w] != 0) begin
        failures++; bad++;
        if (bad < 5) $display("%s: stray write bank %0d word %0d", tag, b, w);
      end
    checks++;
  endtask

  // read every expected word back through the memory read ports
  task automatic readback(string tag, int W);
    int bad = 0;
    for (int w = 0; w < W; w++) begin
      for (int b = 0; b < NB; b++) rd_addr[b] = OFF_W'(w);
      @(negedge clk);
      for (int s = 0; s < pos_n; s++)
        if (exp_a[s] >= 0 && exp_a[s] % W == w) begin
          checks++;
          if (rd_data[exp_a[s] / W] != llr_v[s]) begin
            failures++; bad++;
            if (bad < 5) $display("%s readback addr %0d got %0d exp %0d", tag, exp_a[s], rd_data[exp_a[s] / W], llr_v[s]);
          end
        end
    end
  endtask

  task automatic start_job(int kk, bit l, int f1 = 0, int f2 = 0, int g1 = 0, int g2 = 0);
    k_in = ADDR_W'(kk); lte_in = l; max_half = 2;
    qpp_f1 = ADDR_W'(f1); qpp_f2 = ADDR_W'(f2);
    qpp_g[0] = ADDR_W'(g1); qpp_g[1] = ADDR_W'(g2); qpp_g[2] = '0; qpp_g[3] = '0;
    start = 1;
    @(negedge clk);
    start = 0;
  endtask

  task automatic wait_half();
    int n = 0;
    while (!half_active && n < 20000) begin @(negedge clk); n++; end
  endtask

  task automatic hspa_job(int kk, bit check_dc, int stag = 7, bit lossy = 0);
    int W, nw;
    build(kk);
    start_job(kk, 0);
    wait_half();
    W = int'(bank_w);
    checks++;
    if (W != (R * C + NH - 1) / NH) begin failures++; $display("HSPA K=%0d bank_w %0d", kk, W); end
    for (int h = 0; h < 2; h++) begin
      clear_mon();
      // half 0: natural index k -> matrix position; half 1: matrix position -> k
      pos_n = (h == 0) ? kk : R * C;
      for (int s = 0; s < pos_n; s++) llr_v[s] = llr_t'($urandom);
      for (int s = 0; s < 8192; s++) exp_a[s] = -1;
      if (h == 0) begin
        for (int n = 0; n < R * C; n++) if (pi[n] >= 0) exp_a[pi[n]] = n;
      end else begin
        for (int n = 0; n < R * C; n++) exp_a[n] = pi[n];
      end
      run_half(NH, W, stag);
      m_hspa++;
      if (h == 0) wait_half(); else while (busy) @(negedge clk);
      @(negedge clk);
      if (!lossy) check_half($sformatf("HSPA K=%0d half %0d", kk, h), W);
      if (check_dc) begin
        $display("HSPA K=%0d half %0d: %0d cycles, ideal %0d, extra %0d", kk, h, half_cycles, W, int'(half_cycles) - W);
        checks++;
        if (int'(half_cycles) - W > DC_MAX) failures++;
      end
    end
    if (!lossy) readback($sformatf("HSPA K=%0d", kk), W);
  endtask

  task automatic lte_job(int kk, int f1, int f2, int g1, int g2);
    int W;
    for (int j = 0; j < kk; j++) qf[j] = int'((longint'(f1) * j + longint'(f2) * j * j) % kk);
    start_job(kk, 1, f1, f2, g1, g2);
    wait_half();
    W = int'(bank_w);
    checks++;
    if (W != (kk + NL - 1) / NL) begin failures++; $display("LTE K=%0d bank_w %0d", kk, W); end
    for (int h = 0; h < 2; h++) begin
      clear_mon();
      pos_n = kk;
      for (int s = 0; s < pos_n; s++) llr_v[s] = llr_t'($urandom);
      for (int s = 0; s < 8192; s++) exp_a[s] = -1;
      // half 0: natural index k goes to j with f(j) = k; half 1: j goes to f(j)
      for (int j = 0; j < kk; j++) if (h == 0) exp_a[qf[j]] = j; else exp_a[j] = qf[j];
      run_half(NL, W, 0);
      m_lte++;
      if (h == 0) wait_half(); else while (busy) @(negedge clk);
      @(negedge clk);
      check_half($sformatf("LTE K=%0d half %0d", kk, h), W);
    end
    readback($sformatf("LTE K=%0d", kk), W);
  endtask

  task automatic channel_test();
    logic [2*B_CH-1:0] vals[NCH][8];
    for (int i = 0; i < 8; i++) begin
      for (int c = 0; c < NCH; c++) begin
        vals[c][i] = (2*B_CH)'($urandom);
        ch_en[c] = 1; ch_we[c] = 1;
        ch_addr[c] = ($clog2(CH_DEPTH))'(i * 131 + c);
        ch_wdata[c] = vals[c][i];
      end
      @(negedge clk);
      m_ch++;
    end
    for (int i = 0; i < 8; i++) begin
      for (int c = 0; c < NCH; c++) begin
        ch_we[c] = 0;
        ch_addr[c] = ($clog2(CH_DEPTH))'(i * 131 + c);
      end
      @(negedge clk);
      for (int c = 0; c < NCH; c++) begin
        checks++;
        if (ch_rdata[c] != vals[c][i]) failures++;
      end
    end
    ch_en = '0;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    channel_test();
    hspa_job(5114, 1);
    hspa_job(40, 0);
    lte_job(6144, 263, 480, 2231, 2784);
    lte_job(40, 3, 10, 27, 10);
    hspa_job(530, 0);
    checks++; if (overflow) failures++;
    checks++; if (lte_conflict) failures++;
    $display("conflict cycles %0d, fifo pushes %0d, bypass %0d, buffered %0d",
             n_conflict_cycles, n_fifo_push, n_bypass, n_buffered);
    // lock-step lanes in the interleaved half: all lanes hit the same matrix
    // row, so a few modules receive 32-way bursts; the FIFOs must overflow
    // and the sticky flag must report the lost LLRs
    hspa_job(5114, 0, 0, 1);
    $display("pre %0d, deintl halves %0d, intl halves %0d, switches %0d, lte halves %0d, hspa halves %0d, ch %0d, overflow %0b",
             m_pre, m_deintl, m_intl, m_switch, m_lte, m_hspa, m_ch, overflow);
    checks++; if (!overflow) failures++;
    checks++; if (m_pre == 0) failures++;
    checks++; if (m_deintl == 0 || m_intl == 0) failures++;
    checks++; if (m_switch == 0) failures++;
    checks++; if (m_lte == 0 || m_hspa == 0) failures++;
    checks++; if (m_ch == 0) failures++;
    checks++; if (n_conflict_cycles == 0) failures++;
    checks++; if (n_fifo_push == 0) failures++;
    checks++; if (n_bypass == 0) failures++;
    checks++; if (n_buffered == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
