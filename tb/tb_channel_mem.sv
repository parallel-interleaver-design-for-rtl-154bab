// tb_channel_mem: fill all 1152 words, then random single-port accesses
// (reads, writes, idle cycles) against an array model; read data must
// appear one cycle after the address and hold while idle.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_channel_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 1152, W = 10;
  logic en = 0, we = 0;
  logic [10:0] addr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [D];
  logic [W-1:0] last;

  channel_mem #(.DEPTH(D), .W(W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 11'(a); wdata = W'(a ^ 10'h2A5); model[a] = wdata;
    end
    @(negedge clk); we = 0; en = 1; addr = 0;
    @(negedge clk); last = model[0];
    for (int c = 0; c < 4000; c++) begin
      en = ($urandom_range(0, 3) != 0); we = en && $urandom_range(0, 2) == 0;
      addr = 11'($urandom_range(0, D - 1)); wdata = W'($urandom);
      if (en && !we) last = model[addr];
      if (en && we) model[addr] = wdata;
      @(negedge clk);
      checks++;
      if (rdata != last) begin failures++; if (failures < 10) $display("c=%0d got %h exp %h", c, rdata, last); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
