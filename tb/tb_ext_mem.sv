// tb_ext_mem: random writes and reads against an array model; read data
// must appear one cycle after the address, and a write must not disturb
// other words.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_ext_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 160, W = 6;
  logic we = 0;
  logic [7:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [D];
  logic [W-1:0] exp_q;

  ext_mem #(.DEPTH(D), .W(W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a); wdata = W'(a * 7 + 3); model[a] = wdata;
    end
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = 8'($urandom_range(0, D - 1)); wdata = W'($urandom);
      raddr = 8'($urandom_range(0, D - 1));
      exp_q = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata != exp_q) begin failures++; if (failures < 10) $display("a=%0d got %h exp %h", raddr, rdata, exp_q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
