// hspa_param_ram: 256 x 8 runtime parameter RAM of one HSPA+ IAG lane
// (holds either the base sequence s or its inverse). Written by the
// preprocessing unit's broadcast stream, read asynchronously by the lane's
// address kernel (the lane registers its result).
// The 256 x 8 size follows the published address generator; one private
// pair of RAMs per lane and the asynchronous read are this design's choices.
module hspa_param_ram (
  input  logic       clk,
  input  logic       we,
  input  logic [7:0] waddr,
  input  logic [7:0] wdata,
  input  logic [7:0] raddr,
  output logic [7:0] rdata
);
  logic [7:0] mem [256];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
