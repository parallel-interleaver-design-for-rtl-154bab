// tb_bypass_unit: every combination of buffer state and number of accepted
// LLRs, checking which datum the memory writes, whether the buffer pops,
// and which LLRs are left for the buffer.
// The expected values come from an independent model in this testbench,
// not from the published design's tables.
module tb_bypass_unit;
  int checks = 0, failures = 0;
  localparam int S = 3, W = 14;
  logic buf_empty, mem_we, buf_rd, bypassed;
  logic [W-1:0] buf_head, mem_word;
  logic [1:0] in_cnt, buf_wr_cnt;
  logic [S-1:0][W-1:0] in_data, buf_wr_data;

  bypass_unit #(.S(S), .W(W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      buf_empty = t[0];
      in_cnt    = 2'(t >> 1);
      buf_head  = W'($urandom);
      for (int s = 0; s < S; s++) in_data[s] = W'($urandom);
      #1;
      checks++;
      if (!buf_empty) begin
        if (!mem_we || mem_word != buf_head || !buf_rd || bypassed || buf_wr_cnt != in_cnt) failures++;
        for (int s = 0; s < in_cnt; s++) if (buf_wr_data[s] != in_data[s]) failures++;
      end else if (in_cnt == 0) begin
        if (mem_we || buf_rd || buf_wr_cnt != 0) failures++;
      end else begin
        if (!mem_we || mem_word != in_data[0] || buf_rd || !bypassed || buf_wr_cnt != in_cnt - 1) failures++;
        for (int s = 0; s + 1 < in_cnt; s++) if (buf_wr_data[s] != in_data[s+1]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
