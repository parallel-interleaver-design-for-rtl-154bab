// tb_buffer_router: one bank's router with 8 lanes. Random bursts of
// requests to this bank (and to others) are offered; a lane keeps offering
// its datum until granted, like a FIFO head. Checks: only requesting lanes
// are granted, at most S per cycle; every granted datum reaches the memory
// exactly once and nothing else is written; a datum arriving at an empty
// buffer is written in the same cycle (bypass); buffering and rejection
// both occur.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_buffer_router;
  import tdec_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 8, S = 3, D = 12, BANK = 2;
  logic [N-1:0] lane_valid = '0, grant;
  wr_pkt_t [N-1:0] lane_pkt = '0;
  logic mem_we, conflict, bypassed, rejected, empty;
  logic [OFF_W-1:0] mem_addr;
  llr_t mem_data;
  int pending[int];          // key {off,llr} -> outstanding count
  int n_byp = 0, n_rej = 0, n_grant = 0, n_wr = 0, n_conf = 0;

  buffer_router #(.N(N), .S(S), .DEPTH(D), .BANK(BANK)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seq = 0;
  logic [N-1:0] g_saved;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 6000; c++) begin
      // new offers for lanes that are free
      for (int l = 0; l < N; l++)
        if (!lane_valid[l] && c < 5500 && $urandom_range(0, 99) < ((c / 250) % 2 ? 60 : 10)) begin
          lane_valid[l] = 1;
          lane_pkt[l].bank = ($urandom_range(0, 3) == 0) ? BANK_W'(BANK + 1) : BANK_W'(BANK);
          lane_pkt[l].off  = OFF_W'(seq % 256);
          lane_pkt[l].llr  = llr_t'(seq / 256);
          seq++;
        end
      #1;
      checks++;
      if ((grant & ~lane_valid) != 0 || $countones(grant) > S) failures++;
      for (int l = 0; l < N; l++)
        if (grant[l]) begin
          checks++;
          if (lane_pkt[l].bank != BANK) failures++;
          pending[{lane_pkt[l].off, lane_pkt[l].llr}] = 1;
          n_grant++;
        end
      if (bypassed) n_byp++;
      if (rejected) n_rej++;
      if (conflict) n_conf++;
      if (empty && $countones(grant) > 0 && !bypassed) failures++;
      if (mem_we) begin
        checks++;
        n_wr++;
        if (!pending.exists({mem_addr, mem_data})) begin
          failures++;
          if (failures < 10) $display("c=%0d unexpected write off=%0d llr=%0d byp=%0b empty=%0b grant=%b", c, mem_addr, mem_data, bypassed, empty, grant);
        end else pending.delete({mem_addr, mem_data});
      end
      g_saved = grant;
      @(negedge clk);
      for (int l = 0; l < N; l++) if (g_saved[l]) lane_valid[l] = 0;
      // other-bank requests are served elsewhere
      for (int l = 0; l < N; l++) if (lane_valid[l] && lane_pkt[l].bank != BANK && $urandom_range(0, 1)) lane_valid[l] = 0;
    end
    checks++;
    if (pending.num() != 0 || n_wr != n_grant) begin
      failures++; $display("lost %0d, written %0d granted %0d", pending.num(), n_wr, n_grant);
    end
    checks++;
    if (n_byp == 0 || n_rej == 0 || n_conf == 0 || n_byp == n_wr) begin
      failures++; $display("mechanisms: bypass %0d reject %0d conflict %0d", n_byp, n_rej, n_conf);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
