// tb_hspa_iag: checks one HSPA+ address-generator lane, with the
// preprocessing unit filling its parameters, against the reference
// interleaver for block sizes covering all column cases (C = p-1, p, p+1,
// the swap case K = R*C, the 481..530 range and both 20-row patterns).
// INTL: every matrix position; DEINTL: every natural index, checked to be
// the exact inverse.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_hspa_iag;
  import tdec_pkg::*;
  import hspa_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, swap;
  logic [ADDR_W-1:0] K = 0;
  logic [4:0] Rr; logic [8:0] Cr, Pr; ccase_e cc;
  logic [19:0][8:0] r; logic [19:0][7:0] m; logic [19:0][4:0] t_row, t_inv;
  logic s_we, si_we; logic [7:0] s_addr, s_data, si_addr, si_data;
  iag_mode_e mode = INTL;
  logic in_valid = 0, out_valid, ok;
  logic [ADDR_W-1:0] idx = 0, addr;

  hspa_preproc u_pre (.clk, .rst_n, .start, .k_in(K), .busy, .done, .R(Rr), .C(Cr), .p(Pr),
    .ccase(cc), .swap, .r, .m, .t_row, .t_inv, .s_we, .s_addr, .s_data, .si_we, .si_addr, .si_data);
  hspa_iag u_dut (.clk, .rst_n, .K, .R(Rr), .C(Cr), .p(Pr), .ccase(cc), .swap, .r, .m, .t_row, .t_inv,
    .s_we, .s_addr, .s_data, .si_we, .si_addr, .si_data, .mode, .in_valid, .idx,
    .out_valid, .addr, .ok);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_k(int kk);
    int inv[$];
    build(kk);
    K = ADDR_W'(kk);
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    @(negedge clk);
    while (!done) @(negedge clk);
    checks++;
    if (Rr != R || Cr != C || Pr != P) begin
      failures++; $display("K=%0d: R/C/p %0d/%0d/%0d expected %0d/%0d/%0d", kk, Rr, Cr, Pr, R, C, P);
    end
    inv = '{};
    for (int k = 0; k < kk; k++) inv.push_back(-1);
    for (int n = 0; n < R * C; n++) if (pi[n] >= 0) inv[pi[n]] = n;
    // interleaver mode: matrix position -> natural index
    mode = INTL;
    for (int n = 0; n < R * C; n++) begin
      idx = ADDR_W'(n); in_valid = 1;
      @(negedge clk);
      checks++;
      if (ok != (pi[n] >= 0) || (ok && int'(addr) != pi[n])) begin
        failures++;
        if (failures < 10) $display("K=%0d INTL n=%0d got %0d ok=%0b exp %0d", kk, n, addr, ok, pi[n]);
      end
    end
    // deinterleaver mode: natural index -> matrix position
    mode = DEINTL;
    for (int k = 0; k < kk; k++) begin
      idx = ADDR_W'(k);
      @(negedge clk);
      checks++;
      if (!ok || int'(addr) != inv[k]) begin
        failures++;
        if (failures < 10) $display("K=%0d DEINTL k=%0d got %0d exp %0d", kk, k, addr, inv[k]);
      end
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_k(40); run_k(41); run_k(95); run_k(159); run_k(160); run_k(200); run_k(201);
    run_k(481); run_k(530); run_k(1000); run_k(2300); run_k(3200); run_k(4000); run_k(5114);
    run_k(5040);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
