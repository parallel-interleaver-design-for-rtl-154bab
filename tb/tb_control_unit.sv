// tb_control_unit: runs an HSPA+ job (preprocessing handshake, 4 halves)
// and an LTE job (no preprocessing, 3 halves) with a model of decoders and
// network. Checks the alternating write mode (even halves deinterleave),
// the bank width, that a half only ends after the network drained, the
// number of halves and the measured half-iteration length.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_control_unit;
  import tdec_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, lte_in = 0, pre_start, pre_done = 0, dec_done = 0, net_idle = 1;
  logic [ADDR_W-1:0] k_in = 0, rc = 0, K;
  logic [3:0] max_half = 4, half_idx;
  logic lte, half_active, busy, done;
  logic [OFF_W-1:0] bank_w;
  iag_mode_e mode;
  logic [15:0] half_cycles;
  int n_pre = 0;
  int exp_cyc;

  control_unit dut (.*);

  always @(posedge clk) if (pre_start) n_pre++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic job(bit l, int kk, int rcv, int halves, int run_len, int drain_len);
    int npre0 = n_pre;
    k_in = ADDR_W'(kk); lte_in = l; max_half = 4'(halves); rc = ADDR_W'(rcv);
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    if (!l) begin
      repeat (5) @(negedge clk);
      checks++;
      if (half_active || n_pre != npre0 + 1) failures++;   // waits for preprocessing
      pre_done = 1;
    end
    for (int h = 0; h < halves; h++) begin
      while (!half_active) @(negedge clk);
      checks++;
      if (int'(half_idx) != h || mode != (h % 2 ? INTL : DEINTL)) begin
        failures++; $display("half %0d idx %0d mode %0d", h, half_idx, mode);
      end
      checks++;
      if (int'(bank_w) != (l ? (kk + 63) / 64 : (rcv + 31) / 32)) begin failures++; $display("bank_w %0d", bank_w); end
      repeat (run_len - 1) @(negedge clk);
      dec_done = 1; net_idle = 0;
      @(negedge clk) dec_done = 0;
      repeat (drain_len) begin
        @(negedge clk);
        checks++;
        if (half_active) failures++;             // must wait for the drain
      end
      net_idle = 1;
      @(negedge clk);
      @(negedge clk);
      checks++;
      // From half 1 on, RUN starts one cycle before this loop sees it (the
      // two waits above), so RUN lasts one cycle longer; DRAIN lasts
      // drain_len cycles plus the cycle in which idle is seen.
      exp_cyc = run_len + drain_len + (h > 0 ? 1 : 0);
      if (int'(half_cycles) != exp_cyc) begin failures++; $display("half_cycles %0d exp %0d", half_cycles, exp_cyc); end
    end
    checks++;
    if (!done || busy) failures++;
    pre_done = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    job(0, 5114, 5120, 4, 20, 7);
    job(1, 6144, 0, 3, 15, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
