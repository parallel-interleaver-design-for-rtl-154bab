// tb_hspa_preset_rom: the prime list must be the 52 primes from 7 to 257
// in order, each root must be the smallest primitive root of its prime
// (computed here by brute force), and every T pattern must be a permutation
// of its rows, with the patterns of TS 25.212 for R = 5 and 10 (reversal).
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_hspa_preset_rom;
  int checks = 0, failures = 0;
  logic [5:0] a_idx, b_idx;
  logic [8:0] a_p, b_p;
  logic [4:0] a_v, t_i, t_val;
  logic [1:0] t_sel;

  hspa_preset_rom dut (.*);

  function automatic bit is_prime(int x);
    if (x < 2) return 0;
    for (int d = 2; d * d <= x; d++) if (x % d == 0) return 0;
    return 1;
  endfunction

  function automatic int order(int g, int pr);
    int x = g % pr;
    for (int e = 1; e < pr; e++) begin
      if (x == 1) return e;
      x = (x * g) % pr;
    end
    return 0;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expect_p = 7;
    for (int i = 0; i < 52; i++) begin
      while (!is_prime(expect_p)) expect_p++;
      a_idx = 6'(i); b_idx = 6'(51 - i);
      #1;
      checks++;
      if (int'(a_p) != expect_p) begin failures++; $display("p[%0d]=%0d exp %0d", i, a_p, expect_p); end
      checks++;
      if (order(a_v, a_p) != a_p - 1) begin failures++; $display("v=%0d not primitive for %0d", a_v, a_p); end
      for (int g = 2; g < a_v; g++) if (order(g, a_p) == a_p - 1) begin failures++; $display("smaller root %0d for %0d", g, a_p); break; end
      checks++;
      if (!is_prime(b_p)) failures++;
      expect_p++;
    end
    for (int sel = 0; sel < 4; sel++) begin
      automatic int rows = (sel == 0) ? 5 : (sel == 1) ? 10 : 20;
      automatic bit [31:0] seen = 0;
      t_sel = 2'(sel);
      for (int i = 0; i < rows; i++) begin
        t_i = 5'(i); #1;
        seen[t_val] = 1;
        checks++;
        if (t_val >= rows) failures++;
        if (sel < 2 && t_val != rows - 1 - i) failures++;
        if (sel >= 2 && i == 0 && t_val != 19) failures++;
      end
      checks++;
      if ($countones(seen) != rows) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
