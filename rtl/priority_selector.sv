// priority_selector: picks at most `limit` (never more than S) of the lanes
// requesting one memory bank in a cycle. Scanning starts at lane `offset`
// (taken from the PRN generator) and wraps around, so over time every lane is
// served with equal chance. Outputs a grant vector and, per buffer write
// slot, the index of the chosen lane. Combinational. The paper fixes S and
// the random fairness; the wrap-around scan is this design's choice.
module priority_selector #(
  parameter int N = 32,
  parameter int S = 3
) (
  input  logic [N-1:0]                req,
  input  logic [$clog2(N)-1:0]        offset,
  input  logic [$clog2(S+1)-1:0]      limit,
  output logic [N-1:0]                grant,
  output logic [S-1:0][$clog2(N)-1:0] sel_idx,
  output logic [$clog2(S+1)-1:0]      n_grant
);
  localparam int LW = $clog2(N);
  always_comb begin
    int idx;
    grant   = '0;
    sel_idx = '0;
    n_grant = '0;
    for (int k = 0; k < N; k++) begin
      idx = int'(offset) + k;
      if (idx >= N) idx = idx - N;
      if (req[idx] && (n_grant < limit) && (int'(n_grant) < S)) begin
        grant[idx]       = 1'b1;
        sel_idx[n_grant] = LW'(idx);
        n_grant          = n_grant + 1'b1;
      end
    end
  end
endmodule
