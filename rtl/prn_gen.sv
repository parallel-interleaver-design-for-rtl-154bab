// prn_gen: pseudo-random number generator of one buffer router. The priority
// selector uses its low bits as the lane at which it starts scanning, which
// spreads acceptance evenly over the lanes. The paper only names the block;
// the 16-bit Galois LFSR (x^16+x^14+x^13+x^11+1, period 65535) is this
// design's choice. It advances every cycle; SEED must be non-zero.
module prn_gen #(
  parameter logic [15:0] SEED = 16'h0001
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [15:0] rnd
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rnd <= (SEED == 16'h0) ? 16'h0001 : SEED;
    else        rnd <= {1'b0, rnd[15:1]} ^ (rnd[0] ? 16'hB400 : 16'h0000);
  end
endmodule
