// channel_mem: one channel LLR memory module, a (3K/P x 2B_ch) single-port
// SRAM (1152 x 10 bits for K=6144, P=16) holding the systematic and parity
// LLRs one decoder reads. One access per cycle, write has priority; the read
// data appear one cycle after the address. The finer split into systematic
// and parity banks is not modelled.
// Size (3K/P words of two 5-bit LLRs) follows the published decoder; the
// sub-banking into systematic and parity parts is not modelled here.
module channel_mem #(
  parameter int DEPTH = 1152,
  parameter int W     = 10
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en && int'(addr) < DEPTH) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
