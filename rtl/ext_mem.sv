// ext_mem: one extrinsic LLR memory module, a (K/P_LLR x B_ext) two-port
// SRAM (160 x 6 bits: 5120 HSPA+ matrix positions over 32 modules; LTE
// uses 6144/64 = 96 words). One write port fed by the DBCF bypass unit (or
// directly by a QPP lane in LTE mode), one read port for the in-order reads
// of the next half iteration. Reads are registered (one-cycle latency),
// written here as a plain array.
// Size (K/P_LLR words of 6 bits) follows the published decoder; the
// register-array model of the two-port SRAM is this design's choice.
module ext_mem
  import tdec_pkg::*;
#(
  parameter int DEPTH = 160,
  parameter int W     = 6
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  logic [W-1:0]              wdata,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output logic [W-1:0]              rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we && (int'(waddr) < DEPTH)) mem[waddr] <= wdata;
    rdata <= (int'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule
