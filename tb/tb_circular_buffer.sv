// tb_circular_buffer: multi-word writes (0..S per cycle, never beyond the
// free space) and single reads against a queue model; the buffer is driven
// full and empty many times so that both pointers wrap.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_circular_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 12, S = 3, W = 14;
  logic [1:0] wr_cnt = 0;
  logic [S-1:0][W-1:0] wr_data = '0;
  logic rd_en = 0, empty;
  logic [W-1:0] head;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] q[$];
  int full_seen = 0;

  circular_buffer #(.DEPTH(D), .S(S), .W(W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      int fr, n;
      @(negedge clk);
      checks++;
      if (int'(count) != q.size() || empty != (q.size() == 0) || (q.size() > 0 && head != q[0])) begin
        failures++;
        if (failures < 10) $display("c=%0d count=%0d exp=%0d head=%h exp=%h", c, count, q.size(), head, q.size() ? q[0] : 0);
      end
      if (q.size() == D) full_seen++;
      rd_en = ($urandom_range(0, 99) < ((c / 300) % 2 ? 25 : 85));
      fr = D - q.size() + ((rd_en && q.size() > 0) ? 1 : 0);
      n  = $urandom_range(0, S);
      if (n > fr) n = fr;
      wr_cnt = 2'(n);
      for (int s = 0; s < S; s++) wr_data[s] = W'($urandom);
      if (rd_en && q.size() > 0) void'(q.pop_front());
      for (int s = 0; s < n; s++) q.push_back(wr_data[s]);
    end
    checks++;
    if (full_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
