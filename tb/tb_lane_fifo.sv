// tb_lane_fifo: random push/pop against a queue model, including pushes
// while full with and without a simultaneous pop, and the overflow flag.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_lane_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 8, W = 20;
  logic push = 0, pop = 0, empty, full, overflow;
  logic [W-1:0] din = 0, head;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] q[$];

  lane_fifo #(.DEPTH(D), .W(W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic bit exp_ovf = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || int'(count) != q.size() ||
          (q.size() > 0 && head != q[0]) || overflow != exp_ovf) begin
        failures++;
        if (failures < 10) $display("c=%0d size=%0d count=%0d head=%h", c, q.size(), count, head);
      end
      // phase-dependent load: bursts that fill the FIFO, then drain
      push = ($urandom_range(0, 99) < ((c / 200) % 2 ? 80 : 30));
      pop  = ($urandom_range(0, 99) < 50);
      if (c > 3500) push = 1;
      din  = W'($urandom);
      #1;
      begin
        automatic bit dp = pop && q.size() > 0;
        automatic bit dpu = push && (q.size() < D || dp);
        if (push && !dpu) exp_ovf = 1;
        if (dp) void'(q.pop_front());
        if (dpu) q.push_back(din);
      end
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
