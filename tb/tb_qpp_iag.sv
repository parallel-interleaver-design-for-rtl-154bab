// tb_qpp_iag: interleaver mode against f(x) = (f1 x + f2 x^2) mod K
// computed here with 64-bit arithmetic, for every x of K = 40, 2048 and
// 6144; deinterleaver mode with the quadratic inverse must map f(x) back to
// x (round trip), and an index >= K must be flagged not ok.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_qpp_iag;
  import tdec_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [ADDR_W-1:0] K = 40, f1 = 0, f2 = 0, g1 = 0, g2 = 0, g3 = 0, g4 = 0, idx = 0, addr;
  iag_mode_e mode = INTL;
  logic in_valid = 0, out_valid, ok;

  qpp_iag dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_k(int kk, int a1, int a2, int b1, int b2);
    longint f;
    K = ADDR_W'(kk); f1 = ADDR_W'(a1); f2 = ADDR_W'(a2); g1 = ADDR_W'(b1); g2 = ADDR_W'(b2);
    for (int x = 0; x < kk; x++) begin
      f = (longint'(a1) * x + longint'(a2) * x * x) % kk;
      mode = INTL; idx = ADDR_W'(x); in_valid = 1;
      @(negedge clk);
      checks++;
      if (!out_valid || !ok || longint'(addr) != f) begin
        failures++; if (failures < 10) $display("K=%0d x=%0d f=%0d got %0d", kk, x, f, addr);
      end
      mode = DEINTL; idx = ADDR_W'(f);
      @(negedge clk);
      checks++;
      if (!ok || int'(addr) != x) begin
        failures++; if (failures < 10) $display("K=%0d inverse of %0d got %0d exp %0d", kk, f, addr, x);
      end
    end
    idx = ADDR_W'(kk); mode = INTL;
    @(negedge clk);
    checks++;
    if (ok) failures++;
    in_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_k(40, 3, 10, 27, 10);
    run_k(2048, 31, 64, 991, 64);
    run_k(6144, 263, 480, 2231, 2784);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
