// tb_hspa_preproc: for a set of block sizes, the preprocessing results are
// compared with the reference: R, C, p, the streamed base sequence s and its
// inverse, r_i (= q_i placed by T), m_i (r_i*m_i = 1 mod p-1), T and T^-1;
// the set-up time is checked against the bound of 6000 cycles.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_hspa_preproc;
  import tdec_pkg::*;
  import hspa_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, busy, done, swap;
  logic [ADDR_W-1:0] k_in = 0;
  logic [4:0] Rr; logic [8:0] Cr, Pr; ccase_e cc;
  logic [19:0][8:0] r; logic [19:0][7:0] m; logic [19:0][4:0] t_row, t_inv;
  logic s_we, si_we; logic [7:0] s_addr, s_data, si_addr, si_data;
  int s_got[256], si_got[256];

  hspa_preproc dut (.clk, .rst_n, .start, .k_in, .busy, .done, .R(Rr), .C(Cr), .p(Pr),
    .ccase(cc), .swap, .r, .m, .t_row, .t_inv, .s_we, .s_addr, .s_data, .si_we, .si_addr, .si_data);

  always @(posedge clk) begin
    if (s_we)  s_got[s_addr]   <= int'(s_data);
    if (si_we) si_got[si_addr] <= int'(si_data);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_k(int kk);
    int cyc = 0;
    build(kk);
    k_in = ADDR_W'(kk);
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > 6000) begin failures++; $display("K=%0d set-up %0d cycles", kk, cyc); end
    checks++;
    if (Rr != R || Cr != C || Pr != P || swap != (C == P + 1 && kk == R * C)) begin
      failures++; $display("K=%0d R/C/p %0d/%0d/%0d exp %0d/%0d/%0d", kk, Rr, Cr, Pr, R, C, P);
    end
    for (int j = 0; j <= P - 2; j++) begin
      checks++;
      if (s_got[j] != s[j] - 1 || si_got[s[j] - 1] != j) failures++;
    end
    for (int i = 0; i < R; i++) begin
      checks++;
      if (int'(t_row[i]) != T[i] || int'(t_inv[T[i]]) != i || int'(r[i]) != rr[i] ||
          (int'(r[i]) * int'(m[i])) % (P - 1) != 1) begin
        failures++;
        $display("K=%0d row %0d: T=%0d/%0d r=%0d/%0d m=%0d", kk, i, t_row[i], T[i], r[i], rr[i], m[i]);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_k(40); run_k(150); run_k(190); run_k(500); run_k(777); run_k(2400); run_k(3161); run_k(5114);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
