// tb_conflict_detector: random lane targets (concentrated on few banks so
// that 0-, 1- and n-way cases all occur) against a counted model.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_conflict_detector;
  int checks = 0, failures = 0;
  localparam int N = 32, BW = 6, BANK = 5;
  logic [N-1:0] lane_valid, req;
  logic [N-1:0][BW-1:0] lane_bank;
  logic [$clog2(N+1)-1:0] n_req;
  logic conflict;
  int seen_conf = 0;

  conflict_detector #(.N(N), .BW(BW), .BANK(BANK)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      automatic int n = 0;
      logic [N-1:0] e;
      for (int l = 0; l < N; l++) begin
        lane_valid[l] = ($urandom_range(0, 3) != 0);
        lane_bank[l]  = BW'($urandom_range(0, 4 + (t % 40)));
        e[l] = lane_valid[l] && lane_bank[l] == BANK;
        n += e[l];
      end
      #1;
      checks++;
      if (req != e || int'(n_req) != n || conflict != (n >= 2)) begin
        failures++;
        if (failures < 10) $display("t=%0d req=%h exp=%h n=%0d/%0d", t, req, e, n_req, n);
      end
      if (n >= 2) seen_conf++;
    end
    checks++;
    if (seen_conf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
