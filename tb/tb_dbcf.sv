// tb_dbcf: the whole DBCF network with 8 lanes and 8 banks (S=3, D_FIFO=8,
// D_buf=12). Every lane produces one LLR per cycle for a unique address,
// spread pseudo-randomly over the banks, which creates heavy conflicts. The
// producers never stall. Checks: every LLR ends up at its bank/word exactly
// once, the network drains (idle) and no FIFO overflows; conflicts, FIFO
// pushes, bypasses and buffered writes must all have occurred. The drain
// time after the last LLR is printed (the paper's extra cycles, Delta C).
module tb_dbcf;
  import tdec_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 8, M = 8, L = 64;     // L words per bank
  logic [N-1:0] in_valid = '0;
  wr_pkt_t [N-1:0] in_pkt = '0;
  logic [M-1:0] mem_we;
  logic [M-1:0][OFF_W-1:0] mem_addr;
  llr_t [M-1:0] mem_data;
  logic idle, overflow;
  logic [31:0] n_conflict_cycles, n_fifo_push, n_bypass, n_buffered;
  int addr_of[N*L];
  llr_t model[M][L];
  int written[M][L];

  dbcf #(.N(N), .M(M), .S(3), .D_FIFO(8), .D_BUF(12)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    for (int b = 0; b < M; b++)
      if (rst_n && mem_we[b]) begin
        written[b][mem_addr[b]]++;
        if (mem_data[b] != model[b][mem_addr[b]]) begin
          failures++;
          if (failures < 10) $display("bank %0d word %0d got %0d exp %0d", b, mem_addr[b], mem_data[b], model[b][mem_addr[b]]);
        end
      end

  initial begin
    int drain = 0;
    // random permutation of the N*L addresses
    for (int i = 0; i < N * L; i++) addr_of[i] = i;
    for (int i = N * L - 1; i > 0; i--) begin
      automatic int j = $urandom_range(0, i);
      automatic int t = addr_of[i]; addr_of[i] = addr_of[j]; addr_of[j] = t;
    end
    for (int b = 0; b < M; b++) for (int w = 0; w < L; w++) model[b][w] = llr_t'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < L; t++) begin
      for (int l = 0; l < N; l++) begin
        automatic int a = addr_of[l * L + t];
        in_valid[l]     = 1;
        in_pkt[l].bank  = BANK_W'(a / L);
        in_pkt[l].off   = OFF_W'(a % L);
        in_pkt[l].llr   = model[a / L][a % L];
      end
      @(negedge clk);
    end
    in_valid = '0;
    while (!idle && drain < 1000) begin @(negedge clk); drain++; end
    repeat (2) @(negedge clk);
    $display("drain %0d cycles, conflict cycles %0d, fifo pushes %0d, bypass %0d, buffered %0d",
             drain, n_conflict_cycles, n_fifo_push, n_bypass, n_buffered);
    for (int b = 0; b < M; b++) for (int w = 0; w < L; w++) begin
      checks++;
      if (written[b][w] != 1) failures++;
    end
    checks++;
    if (!idle || overflow) failures++;
    checks++;
    if (n_conflict_cycles == 0 || n_fifo_push == 0 || n_bypass == 0 || n_buffered == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
