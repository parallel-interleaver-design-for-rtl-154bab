// tb_prn_gen: the LFSR must never reach zero, must visit 65535 states
// before repeating (maximal length), and its low 5 bits must cover all 32
// start lanes evenly (each between 1500 and 2600 times in 65535 steps).
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_prn_gen;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] rnd, first;
  int hist[32];

  prn_gen #(.SEED(16'h1234)) dut (.*);

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int period = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (rnd == 16'h1234) begin failures++; $display("did not advance"); end
    first = rnd;
    do begin
      hist[rnd[4:0]]++;
      @(negedge clk);
      period++;
      if (rnd == 0) begin failures++; $display("zero state"); break; end
    end while (rnd != first && period < 70000);
    checks++;
    if (period != 65535) begin failures++; $display("period %0d", period); end
    foreach (hist[i]) begin
      checks++;
      if (hist[i] < 1500 || hist[i] > 2600) begin failures++; $display("bin %0d: %0d", i, hist[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
