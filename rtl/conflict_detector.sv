// conflict_detector: compare-select cluster of one buffer router. Every lane
// announces the memory bank its pending LLR goes to; the detector compares
// each with its own bank index BANK and returns the request vector, the
// number of requests n and a conflict flag (n >= 2, an n-way conflict).
// Purely combinational. Number of lanes N follows the HSPA+ parallelism 32.
// The compare-and-count structure follows the published DBCF design; the
// population-count output width is this design's choice.
module conflict_detector #(
  parameter int N      = 32,
  parameter int BW     = 6,
  parameter int BANK   = 0
) (
  input  logic [N-1:0]         lane_valid,
  input  logic [N-1:0][BW-1:0] lane_bank,
  output logic [N-1:0]         req,
  output logic [$clog2(N+1)-1:0] n_req,
  output logic                 conflict
);
  always_comb begin
    n_req = '0;
    for (int l = 0; l < N; l++) begin
      req[l] = lane_valid[l] && (lane_bank[l] == BW'(BANK));
      n_req  = n_req + (req[l] ? 1'b1 : 1'b0);
    end
    conflict = (n_req > 1);
  end
endmodule
