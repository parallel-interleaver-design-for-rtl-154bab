// tb_priority_selector: random requests, start lanes and limits. Checks that
// exactly min(limit, S, #requests) lanes are granted, that only requesting
// lanes are granted, that they are the first requesters met when walking up
// from the start lane with wrap-around, and that sel_idx lists them in that
// order.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_priority_selector;
  int checks = 0, failures = 0;
  localparam int N = 32, S = 3;
  logic [N-1:0] req, grant;
  logic [4:0] offset;
  logic [1:0] limit, n_grant;
  logic [S-1:0][4:0] sel_idx;

  priority_selector #(.N(N), .S(S)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      automatic int order[$];
      int want;
      automatic logic [N-1:0] eg = 0;
      req    = N'($urandom) & N'($urandom) & (t % 3 == 0 ? N'($urandom) : '1);
      offset = 5'($urandom);
      limit  = 2'($urandom_range(0, 3));
      for (int k = 0; k < N; k++) if (req[(offset + k) % N]) order.push_back((offset + k) % N);
      want = (order.size() < limit) ? order.size() : limit;
      for (int g = 0; g < want; g++) eg[order[g]] = 1;
      #1;
      checks++;
      if (grant != eg || int'(n_grant) != want) begin
        failures++;
        if (failures < 10) $display("t=%0d req=%h off=%0d lim=%0d grant=%h exp=%h", t, req, offset, limit, grant, eg);
      end
      for (int g = 0; g < want; g++) begin
        checks++;
        if (int'(sel_idx[g]) != order[g]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
